// arrival_filtering: step 5 of the forwarding path, with the filter table
// and the controllable-jitter hold.
//
// At the last switch of a route both a TT frame and its copy may reach the
// output. The filter table keeps, per flow, the sequence of the last frame
// delivered; a frame whose sequence is larger is delivered and recorded, any
// other is dropped, so only the first of the two arrives at the end device.
// Optionally the delivered frame's iscopy flag is cleared so the device sees
// a TT frame. These are the arrival filtering step and filter table of the
// architecture.
//
// Jitter extension: the filter table also holds a per-flow jitter value. A
// copy that passes the filter before offset - jitter of its period (offset
// + m*period is the TT frame's departure from this switch) is held until
// that instant; a copy that comes later is delivered at once. TT frames are
// never held. A negative jitter drops every copy, so only TT frames are
// delivered, and a jitter larger than the period places no constraint. These
// rules follow the architecture's jitter extension.
//
// This design's choices: filtering is enabled per flow by a table bit (a
// flow with filtering off passes unchanged and is never held); the
// filter-table sequence is recorded when a copy is admitted to the hold, not
// when it leaves, so the TT frame that follows is dropped; held copies sit in
// one slot per flow (release_slots) and have priority over the direct path
// in the cycle they are released; the period start comes from the schedule
// table's period tracker. The block is combinational on the direct path.
module arrival_filtering
  import swa_pkg::*;
#(
  parameter int NUM_FLOWS = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  time_ns_t   now,
  input  logic       restore_iscopy,
  // filter-table configuration (clears the flow's sequence)
  input  logic       cfg_we,
  input  flow_id_t   cfg_flow,
  input  logic       cfg_filter_en,
  input  logic signed [TIME_W-1:0] cfg_jitter,
  // frames from the timer
  input  logic       in_valid,
  output logic       in_ready,
  input  frame_t     in_frame,
  // schedule table read port (period, offset and period start of the flow)
  output flow_id_t   rd_flow,
  input  sched_row_t rd_row,
  input  time_ns_t   rd_base,
  // delivered frames
  output logic       out_valid,
  input  logic       out_ready,
  output frame_t     out_frame,
  output logic [31:0] drop_count,
  output logic [31:0] hold_count,
  output logic [NUM_FLOWS-1:0] held,
  output logic [31:0] hold_overrun_count
);
  localparam int IW = $clog2(NUM_FLOWS);

  seq_t                     fseq_q   [NUM_FLOWS];
  logic signed [TIME_W-1:0] jitter_q [NUM_FLOWS];
  logic [NUM_FLOWS-1:0]     en_q;

  logic                     in_range, en, newer, is_copy;
  seq_t                     fseq;
  logic signed [TIME_W-1:0] jit;
  time_ns_t                 dep, release_t;
  logic                     drop, hold, direct;
  logic                     rel_valid, rel_ready;
  frame_t                   rel_frame, dir_frame;
  logic                     accept;

  assign rd_flow  = in_frame.flow_id;
  assign in_range = 32'(in_frame.flow_id) < NUM_FLOWS;
  assign en       = in_range && en_q[in_frame.flow_id[IW-1:0]];
  assign fseq     = in_range ? fseq_q[in_frame.flow_id[IW-1:0]] : '0;
  assign jit      = in_range ? jitter_q[in_frame.flow_id[IW-1:0]] : '0;
  assign newer    = in_frame.seq > fseq;
  assign is_copy  = in_frame.iscopy;

  // Departure of this period's TT frame and the copy's hold-until time.
  always_comb begin
    dep       = rd_base + rd_row.offset;
    release_t = (dep > time_ns_t'(jit)) ? dep - time_ns_t'(jit) : '0;
  end

  always_comb begin
    drop = 1'b0;
    hold = 1'b0;
    if (en) begin
      if (!newer)
        drop = 1'b1;
      else if (is_copy && jit < 0)
        drop = 1'b1;
      else if (is_copy && time_ns_t'(jit) <= rd_row.period && now < release_t)
        hold = 1'b1;
    end
  end
  assign direct = !drop && !hold;

  // Held copies.
  release_slots #(.NUM_FLOWS(NUM_FLOWS)) u_hold (
    .clk, .rst_n, .now,
    .wr_en(in_valid && hold), .wr_frame(in_frame), .wr_time(release_t),
    .out_valid(rel_valid), .out_ready(rel_ready), .out_frame(rel_frame),
    .occupied(held), .overrun_count(hold_overrun_count)
  );

  assign rel_ready = out_ready;
  assign in_ready  = direct ? (out_ready && !rel_valid) : 1'b1;
  assign accept    = in_valid && in_ready;

  always_comb begin
    dir_frame = in_frame;
    if (en && restore_iscopy) dir_frame.iscopy = 1'b0;
  end

  assign out_valid = rel_valid || (in_valid && direct);
  always_comb begin
    out_frame = rel_valid ? rel_frame : dir_frame;
    if (rel_valid && restore_iscopy) out_frame.iscopy = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_FLOWS; i++) begin
        fseq_q[i]   <= '0;
        jitter_q[i] <= '0;
      end
      en_q       <= '0;
      drop_count <= '0;
      hold_count <= '0;
    end else begin
      if (accept && en && !drop) fseq_q[in_frame.flow_id[IW-1:0]] <= in_frame.seq;
      if (accept && drop) drop_count <= drop_count + 1;
      if (accept && hold) hold_count <= hold_count + 1;
      if (cfg_we && 32'(cfg_flow) < NUM_FLOWS) begin
        fseq_q[cfg_flow[IW-1:0]]   <= '0;
        jitter_q[cfg_flow[IW-1:0]] <= cfg_jitter;
        en_q[cfg_flow[IW-1:0]]     <= cfg_filter_en;
      end
    end
  end
endmodule

// release_slots: one holding slot per flow, released at a programmed time.
//
// A frame written into the slot of its flow stays there until the
// synchronised time reaches the slot's release time; it is then offered on
// the output. When several slots are due in the same cycle, the lowest flow
// index goes first, one frame per cycle. A write into a slot that is still
// occupied replaces the old frame and is counted as an overrun; with a TT
// schedule a flow has at most one frame waiting per period, so this does not
// happen in correct operation. This helper serves both the TT timer and the
// jitter hold of arrival filtering; its structure is this design's choice.
module release_slots
  import swa_pkg::*;
#(
  parameter int NUM_FLOWS = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  time_ns_t now,
  input  logic     wr_en,
  input  frame_t   wr_frame,    // slot index is wr_frame.flow_id
  input  time_ns_t wr_time,
  output logic     out_valid,
  input  logic     out_ready,
  output frame_t   out_frame,
  output logic [NUM_FLOWS-1:0] occupied,
  output logic [31:0] overrun_count
);
  localparam int IW = $clog2(NUM_FLOWS);

  frame_t   frame_q [NUM_FLOWS];
  time_ns_t time_q  [NUM_FLOWS];
  logic [NUM_FLOWS-1:0] due;
  logic [IW-1:0]        sel;
  logic                 take, wr_ok;
  logic [IW-1:0]        wr_idx;

  always_comb begin
    sel = '0;
    for (int i = NUM_FLOWS - 1; i >= 0; i--) begin
      due[i] = occupied[i] && (now >= time_q[i]);
      if (due[i]) sel = IW'(i);
    end
  end

  assign out_valid = |due;
  assign out_frame = frame_q[sel];
  assign take      = out_valid && out_ready;
  assign wr_ok     = wr_en && (32'(wr_frame.flow_id) < NUM_FLOWS);
  assign wr_idx    = wr_frame.flow_id[IW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occupied      <= '0;
      overrun_count <= '0;
    end else begin
      if (take) occupied[sel] <= 1'b0;
      if (wr_ok) begin
        occupied[wr_idx] <= 1'b1;
        if (occupied[wr_idx] && !(take && sel == wr_idx))
          overrun_count <= overrun_count + 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_ok) begin
      frame_q[wr_idx] <= wr_frame;
      time_q[wr_idx]  <= wr_time;
    end
  end
endmodule

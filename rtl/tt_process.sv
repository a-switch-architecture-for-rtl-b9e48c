// tt_process: step 3 of the forwarding path (admission of TT frames).
//
// A TT frame is looked up in the schedule table by flow-id and accepted only
// if all of these hold: the flow has a row, the frame's length and input port
// match the row, its sequence is larger than the row's sequence (it is a new
// frame), and its arrival time lies inside the row's arrival window
// [arrival-start, arrival-end] of the period it arrived in. An accepted frame
// is tagged with the row's output port and passed to the timer together with
// its release time, offset + m*period for the m-th period; any other frame is
// dropped and counted. The checks are the TT process step of the
// architecture; the timer that fires at the release time is tt_timer.
//
// The m-th period start is taken from the schedule table's period tracker
// (base). If the tracker has already moved on to the next period when the
// frame is checked, the previous period (base - period) is used. This
// handling, the combinational single-cycle check and the handshake are this
// design's choices; the arrival window and offset are taken to lie inside a
// period, as in the evaluated schedule.
module tt_process
  import swa_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  frame_t     in_frame,
  // schedule table read port
  output flow_id_t   rd_flow,
  input  sched_row_t rd_row,
  input  seq_t       rd_seq,
  input  time_ns_t   rd_base,
  // accepted frame with its release time
  output logic       out_valid,
  input  logic       out_ready,
  output frame_t     out_frame,
  output time_ns_t   out_release,
  output logic [31:0] drop_count
);
  time_ns_t base_m, rel;
  logic     in_window, pass;

  assign rd_flow = in_frame.flow_id;

  always_comb begin
    base_m = (in_frame.arrival_time < rd_base) ? rd_base - rd_row.period : rd_base;
    rel    = in_frame.arrival_time - base_m;
  end

  assign in_window = (rel >= rd_row.arrival_start) && (rel <= rd_row.arrival_end);
  assign pass      = rd_row.valid && in_window
                     && (rd_row.length == in_frame.length)
                     && (rd_row.in_port == in_frame.in_port)
                     && (in_frame.seq > rd_seq);

  assign out_valid   = in_valid && pass;
  assign in_ready    = pass ? out_ready : 1'b1;
  assign out_release = base_m + rd_row.offset;
  always_comb begin
    out_frame          = in_frame;
    out_frame.out_port = rd_row.out_port;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 drop_count <= '0;
    else if (in_valid && !pass) drop_count <= drop_count + 1;
  end
endmodule

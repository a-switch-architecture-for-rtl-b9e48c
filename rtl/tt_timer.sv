// tt_timer: the scheduled-release point of the switch (the clock between the
// TT process, sequence checking and arrival filtering).
//
// Each TT frame accepted by the TT process waits in its flow's slot until
// its release time, offset + m*period. At that instant the frame leaves
// towards arrival filtering, and two table updates happen in the same cycle:
// the schedule table's sequence of the flow is set to the frame's sequence,
// and the sequence table's entry is raised to it if smaller, so copies that
// fell behind their TT frame are dropped by sequence checking from then on.
// Copies that passed sequence checking are not held here; they go straight
// through. This is the timer action of the TT process step of the
// architecture.
//
// This design's choices: one slot per flow (release_slots); a released TT
// frame has priority over a copy in the same cycle, and a copy waits; the
// release happens in the first cycle in which the synchronised time is at or
// past the release time, so its precision is one clock period.
module tt_timer
  import swa_pkg::*;
#(
  parameter int NUM_FLOWS = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  time_ns_t now,
  // accepted TT frames from the TT process
  input  logic     tt_valid,
  output logic     tt_ready,
  input  frame_t   tt_frame,
  input  time_ns_t tt_release,
  // checked copies from sequence checking
  input  logic     cp_valid,
  output logic     cp_ready,
  input  frame_t   cp_frame,
  // merged output to arrival filtering
  output logic     out_valid,
  input  logic     out_ready,
  output frame_t   out_frame,
  // table updates at release
  output logic     upd_we,
  output flow_id_t upd_flow,
  output seq_t     upd_seq,
  output logic [NUM_FLOWS-1:0] pending,
  output logic [31:0] overrun_count
);
  logic   rel_valid, rel_ready;
  frame_t rel_frame;

  assign tt_ready = 1'b1;

  release_slots #(.NUM_FLOWS(NUM_FLOWS)) u_slots (
    .clk, .rst_n, .now,
    .wr_en(tt_valid), .wr_frame(tt_frame), .wr_time(tt_release),
    .out_valid(rel_valid), .out_ready(rel_ready), .out_frame(rel_frame),
    .occupied(pending), .overrun_count
  );

  assign rel_ready = out_ready;
  assign cp_ready  = out_ready && !rel_valid;
  assign out_valid = rel_valid || cp_valid;
  assign out_frame = rel_valid ? rel_frame : cp_frame;

  assign upd_we   = rel_valid && rel_ready;
  assign upd_flow = rel_frame.flow_id;
  assign upd_seq  = rel_frame.seq;
endmodule

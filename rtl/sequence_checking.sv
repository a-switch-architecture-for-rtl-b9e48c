// sequence_checking: step 4 of the forwarding path.
//
// A routed copy is forwarded only if its sequence number is exactly one more
// than the flow's entry in the sequence table; the entry is then set to the
// copy's sequence. Any other copy (an older one, a duplicate made by another
// switch, or one that overtook a lost predecessor) is dropped. The strict
// "+1" test is what keeps copies in order and lets at most one copy of each
// TT frame travel through the network. This follows the sequence checking
// step of the architecture.
//
// This design's choices: the table is a separate block (sequence_table), read
// combinationally, so a copy is checked and the table written in the cycle
// the copy is taken. A passing copy waits for out_ready before the table is
// written; a failing copy is consumed at once and counted.
module sequence_checking
  import swa_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  frame_t   in_frame,
  output logic     out_valid,
  input  logic     out_ready,
  output frame_t   out_frame,
  // sequence table access
  output flow_id_t rd_flow,
  input  seq_t     rd_seq,
  output logic     chk_we,
  output flow_id_t chk_flow,
  output seq_t     chk_seq,
  output logic [31:0] drop_count
);
  logic pass;

  assign rd_flow   = in_frame.flow_id;
  assign pass      = (in_frame.seq == rd_seq + seq_t'(1));
  assign out_valid = in_valid && pass;
  assign out_frame = in_frame;
  assign in_ready  = pass ? out_ready : 1'b1;

  assign chk_we    = in_valid && pass && out_ready;
  assign chk_flow  = in_frame.flow_id;
  assign chk_seq   = in_frame.seq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                drop_count <= '0;
    else if (in_valid && !pass) drop_count <= drop_count + 1;
  end
endmodule

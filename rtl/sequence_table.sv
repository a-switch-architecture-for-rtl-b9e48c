// sequence_table: per-flow sequence number of the last copy forwarded.
//
// Sequence checking reads a flow's entry and, when a copy passes, writes the
// copy's sequence (check port). When a TT frame leaves at its scheduled
// instant, the TT side restores the entry to the TT frame's sequence if that
// is larger (restore port), so copies that fell behind their TT frame are
// dropped afterwards and the next copy is accepted again. Entries reset to
// 0, and a configuration write of a flow clears its entry, as the
// architecture requires sequences to restart from their minimum after
// initialisation or reconfiguration.
//
// This design's choices: a register array, read combinationally; both update
// ports act on the next rising edge. If both ports write the same flow in
// one cycle the larger value is kept; a configuration clear wins over both.
module sequence_table
  import swa_pkg::*;
#(
  parameter int NUM_FLOWS = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cfg_clr,
  input  flow_id_t cfg_flow,
  // read port (sequence checking)
  input  flow_id_t rd_flow,
  output seq_t     rd_seq,
  // check port: set the entry (sequence checking)
  input  logic     chk_we,
  input  flow_id_t chk_flow,
  input  seq_t     chk_seq,
  // restore port: raise the entry if smaller (TT process at release)
  input  logic     rs_we,
  input  flow_id_t rs_flow,
  input  seq_t     rs_seq
);
  localparam int IW = $clog2(NUM_FLOWS);
  seq_t seq_q [NUM_FLOWS];

  assign rd_seq = (32'(rd_flow) < NUM_FLOWS) ? seq_q[rd_flow[IW-1:0]] : '0;

  seq_t nxt [NUM_FLOWS];

  always_comb begin
    for (int i = 0; i < NUM_FLOWS; i++) begin
      nxt[i] = seq_q[i];
      if (chk_we && chk_flow == FLOW_W'(i)) nxt[i] = chk_seq;
      if (rs_we && rs_flow == FLOW_W'(i) && rs_seq > nxt[i]) nxt[i] = rs_seq;
      if (cfg_clr && cfg_flow == FLOW_W'(i)) nxt[i] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_FLOWS; i++) seq_q[i] <= '0;
    end else begin
      for (int i = 0; i < NUM_FLOWS; i++) seq_q[i] <= nxt[i];
    end
  end
endmodule

// be_process: step 2 of the forwarding path, with the static route table.
//
// Copies of TT frames travel as best-effort traffic but must follow the same
// route as their TT frames, so they are forwarded by a static route table
// indexed by flow-id. A row holds the flow's length, input port and output
// port, written from the flow's schedule-table row. A copy whose length and
// input port match its row is tagged with the row's output port and passed
// on; any mismatch, or a flow with no row, drops the copy. This is the BE
// process step of the architecture.
//
// This design's choices: the table is a register array with one row per
// flow (NUM_FLOWS rows, flow ids above NUM_FLOWS-1 have no row and drop), it
// is written through the configuration port and read combinationally, so a
// copy is checked in the cycle it is offered. The output port is written into
// the descriptor. A copy that matches waits for out_ready; a copy that is
// dropped is consumed at once.
module be_process
  import swa_pkg::*;
#(
  parameter int NUM_FLOWS = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  // configuration: write a flow's row from its schedule-table row
  input  logic       cfg_we,
  input  flow_id_t   cfg_flow,
  input  sched_row_t cfg_row,
  // copies from the classifier
  input  logic       in_valid,
  output logic       in_ready,
  input  frame_t     in_frame,
  // routed copies
  output logic       out_valid,
  input  logic       out_ready,
  output frame_t     out_frame,
  output logic [31:0] drop_count
);
  route_row_t table_q [NUM_FLOWS];
  route_row_t row;
  logic       in_range, match;

  assign in_range = (32'(in_frame.flow_id) < NUM_FLOWS);
  assign row      = in_range ? table_q[in_frame.flow_id[$clog2(NUM_FLOWS)-1:0]] : '0;
  assign match    = row.valid && (row.length == in_frame.length)
                              && (row.in_port == in_frame.in_port);

  assign out_valid = in_valid && match;
  assign in_ready  = match ? out_ready : 1'b1;
  always_comb begin
    out_frame          = in_frame;
    out_frame.out_port = row.out_port;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_FLOWS; i++) table_q[i] <= '0;
      drop_count <= '0;
    end else begin
      if (cfg_we && 32'(cfg_flow) < NUM_FLOWS) begin
        table_q[cfg_flow[$clog2(NUM_FLOWS)-1:0]] <= '{valid:    cfg_row.valid,
                                                      length:   cfg_row.length,
                                                      in_port:  cfg_row.in_port,
                                                      out_port: cfg_row.out_port};
      end
      if (in_valid && !match) drop_count <= drop_count + 1;
    end
  end
endmodule

// schedule_table: per-flow TT schedule of the switch, with period tracking.
//
// Each flow's row holds its length, input and output port, period, arrival
// window (arrival-start, arrival-end) and departure offset, as computed by
// an offline TT scheduler, plus a sequence number that the TT side updates
// when the flow's TT frame leaves. These are the schedule-table fields of the
// architecture. The n-th departure of a flow is at n*period + offset of the
// synchronised time, and its arrival window repeats with the same period.
//
// To turn "offset + m*period" into hardware without a divider, the table also
// keeps for every flow the start of its current period (base): whenever the
// synchronised time reaches base + period, base advances by one period. A
// configuration write sets base to 0, so after a write the base catches up
// with the current time by one period per clock cycle. The period tracker,
// the two combinational read ports and the configuration port are this
// design's choices. A configuration write also clears the row's sequence,
// as the architecture asks after reconfiguration.
module schedule_table
  import swa_pkg::*;
#(
  parameter int NUM_FLOWS = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  time_ns_t   now,
  // configuration
  input  logic       cfg_we,
  input  flow_id_t   cfg_flow,
  input  sched_row_t cfg_row,
  // read port A (TT process)
  input  flow_id_t   a_flow,
  output sched_row_t a_row,
  output seq_t       a_seq,
  output time_ns_t   a_base,
  // read port B (arrival filtering)
  input  flow_id_t   b_flow,
  output sched_row_t b_row,
  output time_ns_t   b_base,
  // sequence update at the TT frame's departure
  input  logic       upd_we,
  input  flow_id_t   upd_flow,
  input  seq_t       upd_seq
);
  localparam int IW = $clog2(NUM_FLOWS);

  sched_row_t rows_q [NUM_FLOWS];
  seq_t       seq_q  [NUM_FLOWS];
  time_ns_t   base_q [NUM_FLOWS];

  function automatic logic ok(input flow_id_t f);
    return 32'(f) < NUM_FLOWS;
  endfunction

  assign a_row  = ok(a_flow) ? rows_q[a_flow[IW-1:0]] : '0;
  assign a_seq  = ok(a_flow) ? seq_q[a_flow[IW-1:0]]  : '0;
  assign a_base = ok(a_flow) ? base_q[a_flow[IW-1:0]] : '0;
  assign b_row  = ok(b_flow) ? rows_q[b_flow[IW-1:0]] : '0;
  assign b_base = ok(b_flow) ? base_q[b_flow[IW-1:0]] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_FLOWS; i++) begin
        rows_q[i] <= '0;
        seq_q[i]  <= '0;
        base_q[i] <= '0;
      end
    end else begin
      for (int i = 0; i < NUM_FLOWS; i++) begin
        if (cfg_we && cfg_flow == FLOW_W'(i)) begin
          rows_q[i] <= cfg_row;
          seq_q[i]  <= '0;
          base_q[i] <= '0;
        end else begin
          if (upd_we && upd_flow == FLOW_W'(i)) seq_q[i] <= upd_seq;
          if (rows_q[i].valid && rows_q[i].period != '0 &&
              now >= base_q[i] + rows_q[i].period)
            base_q[i] <= base_q[i] + rows_q[i].period;
        end
      end
    end
  end
endmodule

// tb_schedule_table: self-checking test of the schedule table. Rows of the
// three evaluated flows are written; the time is advanced in large steps and
// each flow's period start must equal the largest multiple of its period not
// above the time (after the one-per-cycle catch-up). Sequence updates, read
// port contents and the clearing of a row's sequence on reconfiguration are
// checked too.
module tb_schedule_table;
  import swa_pkg::*;
  localparam int NF = 4;
  logic clk = 0, rst_n = 0;
  time_ns_t now;
  logic cfg_we, upd_we;
  flow_id_t cfg_flow, a_flow, b_flow, upd_flow;
  sched_row_t cfg_row, a_row, b_row;
  seq_t a_seq, upd_seq;
  time_ns_t a_base, b_base;
  int checks = 0, failures = 0;
  longint periods [3] = '{524288, 1048576, 2097152};
  sched_row_t rows [3];

  always #5 clk = ~clk;
  schedule_table #(.NUM_FLOWS(NF)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    now = 0; cfg_we = 0; upd_we = 0; cfg_flow = '0; a_flow = '0; b_flow = '0;
    upd_flow = '0; upd_seq = '0; cfg_row = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3; i++) begin
      @(negedge clk);
      rows[i] = '0;
      rows[i].valid = 1; rows[i].length = LEN_W'(128 << i);
      rows[i].in_port = 0; rows[i].out_port = 2; rows[i].period = periods[i];
      rows[i].arrival_start = 1000 * (i + 1); rows[i].arrival_end = 1000 * (i + 1) + 1000;
      rows[i].offset = 20000 * (i + 1);
      cfg_we = 1; cfg_flow = FLOW_W'(i + 1); cfg_row = rows[i];
    end
    @(negedge clk);
    cfg_we = 0;
    for (int i = 0; i < 3; i++) begin
      a_flow = FLOW_W'(i + 1); b_flow = FLOW_W'(i + 1);
      #1;
      check(a_row == rows[i] && b_row == rows[i], "row read back on both ports");
      check(a_seq == 0, "sequence starts at 0");
    end
    for (int step = 0; step < 200; step++) begin
      @(negedge clk);
      now = now + time_ns_t'($urandom % 60000);
      repeat (8) @(negedge clk);
      for (int i = 0; i < 3; i++) begin
        longint exp;
        exp = (longint'(now) / periods[i]) * periods[i];
        a_flow = FLOW_W'(i + 1); b_flow = FLOW_W'(i + 1);
        #1;
        check(a_base == time_ns_t'(exp) && b_base == a_base, "period start");
      end
    end
    // exact period boundaries: the new period starts when the time equals it
    for (int k = 1; k <= 3; k++) begin
      longint t;
      t = ((longint'(now) / periods[0]) + 1) * periods[0];
      @(negedge clk);
      now = time_ns_t'(t - 1);
      repeat (4) @(negedge clk);
      a_flow = 1;
      #1 check(a_base == time_ns_t'(t - periods[0]), "one ns before the boundary: old period");
      now = time_ns_t'(t);
      @(negedge clk);
      #1 check(a_base == time_ns_t'(t), "at the boundary: new period");
    end
    // sequence update and clear on reconfiguration
    @(negedge clk);
    upd_we = 1; upd_flow = 2; upd_seq = 77;
    @(negedge clk);
    upd_we = 0; a_flow = 2;
    #1 check(a_seq == 77, "sequence updated at departure");
    a_flow = 1;
    #1 check(a_seq == 0, "other flow untouched");
    @(negedge clk);
    cfg_we = 1; cfg_flow = 2; cfg_row = rows[1];
    @(negedge clk);
    cfg_we = 0; a_flow = 2;
    #1 check(a_seq == 0, "reconfiguration clears sequence");
    a_flow = 9;
    #1 check(a_row.valid == 0, "out-of-range flow has no row");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

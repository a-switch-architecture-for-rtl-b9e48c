// tb_sequence_checking: self-checking test of step 4. The sequence table is
// modelled in the testbench. Copies with sequences equal to, one above, two
// above and below the stored value are offered; only "stored + 1" may pass
// and update the table. Also checks that a passing copy waits for out_ready
// without updating the table.
module tb_sequence_checking;
  import swa_pkg::*;
  localparam int NF = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, chk_we;
  frame_t in_frame, out_frame;
  flow_id_t rd_flow, chk_flow;
  seq_t rd_seq, chk_seq;
  logic [31:0] drop_count;
  int checks = 0, failures = 0, exp_drops = 0, passes = 0;
  seq_t table_m [NF];

  always #5 clk = ~clk;
  sequence_checking dut (.*);
  assign rd_seq = table_m[rd_flow[1:0]];

  always @(posedge clk) if (chk_we) table_m[chk_flow[1:0]] <= chk_seq;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_frame = '0; out_ready = 1;
    for (int i = 0; i < NF; i++) table_m[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      frame_t f; int fl; seq_t cur; int d; bit exp_pass;
      @(negedge clk);
      fl = $urandom % NF; cur = table_m[fl];
      d = int'($urandom % 4) - 1;      // -1, 0, +1, +2
      f = '0; f.flow_id = FLOW_W'(fl); f.iscopy = 1;
      f.seq = (d < 0 && cur == 0) ? 0 : cur + seq_t'(d);
      out_ready = ($urandom % 4) != 0;
      in_frame = f; in_valid = 1;
      #1;
      exp_pass = (f.seq == cur + 1);
      check(out_valid == exp_pass, "pass iff seq == stored + 1");
      check(chk_we == (exp_pass && out_ready), "table written only when taken");
      if (exp_pass) begin
        check(out_frame == f, "frame unchanged");
        check(chk_seq == f.seq && chk_flow == f.flow_id, "table update value");
        if (out_ready) passes++;
      end else begin
        check(in_ready, "failing copy consumed");
        exp_drops++;
      end
      @(posedge clk);
      #1;
      if (exp_pass && out_ready) check(table_m[fl] == f.seq, "table advanced");
      else check(table_m[fl] == cur, "table unchanged");
    end
    @(negedge clk);
    in_valid = 0;
    @(negedge clk);
    check(drop_count == exp_drops, "drop count");
    check(passes > 100, "enough passing copies");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

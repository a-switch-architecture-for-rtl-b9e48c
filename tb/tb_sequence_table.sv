// tb_sequence_table: self-checking test of the sequence table. Random check
// writes, restores (which only raise an entry) and configuration clears are
// applied together and compared with a reference array.
module tb_sequence_table;
  import swa_pkg::*;
  localparam int NF = 8;
  logic clk = 0, rst_n = 0;
  logic cfg_clr, chk_we, rs_we;
  flow_id_t cfg_flow, rd_flow, chk_flow, rs_flow;
  seq_t rd_seq, chk_seq, rs_seq;
  int checks = 0, failures = 0;
  seq_t model [NF];

  always #50 clk = ~clk;
  sequence_table #(.NUM_FLOWS(NF)) dut (.*);

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
    cfg_clr = 0; chk_we = 0; rs_we = 0; cfg_flow = '0; rd_flow = '0;
    chk_flow = '0; rs_flow = '0; chk_seq = '0; rs_seq = '0;
    for (int i = 0; i < NF; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int i = 0; i < NF; i++) begin
        rd_flow = FLOW_W'(i);
        #1;
        check(rd_seq == model[i], "read matches model");
      end
      chk_we = ($urandom % 2); chk_flow = FLOW_W'($urandom % NF); chk_seq = $urandom % 64;
      rs_we = ($urandom % 3) == 0; rs_flow = FLOW_W'($urandom % NF); rs_seq = $urandom % 64;
      cfg_clr = ($urandom % 20) == 0; cfg_flow = FLOW_W'($urandom % NF);
      @(posedge clk);
      begin
        seq_t nxt [NF];
        for (int i = 0; i < NF; i++) begin
          nxt[i] = model[i];
          if (chk_we && chk_flow == i) nxt[i] = chk_seq;
          if (rs_we && rs_flow == i && rs_seq > nxt[i]) nxt[i] = rs_seq;
          if (cfg_clr && cfg_flow == i) nxt[i] = 0;
        end
        model = nxt;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_classifier: self-checking test of step 1. TT frames must go to the TT
// path unchanged and be cloned, with iscopy set, to the BE path; copies must
// go to the BE path only; a full BE path drops the copy or clone without
// stalling; swa_en = 0 must stop cloning and drop copies.
module tb_classifier;
  import swa_pkg::*;
  logic clk = 0, rst_n = 0, swa_en;
  logic in_valid, in_ready, tt_valid, tt_ready, cp_valid, cp_ready;
  frame_t in_frame, tt_frame, cp_frame;
  logic [31:0] clone_count, drop_count;
  int checks = 0, failures = 0;
  int exp_clones = 0, exp_drops = 0;

  always #5 clk = ~clk;
  classifier dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_frame = '0; tt_ready = 1; cp_ready = 1; swa_en = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      bit copy, en, tr, cr;
      frame_t f;
      @(negedge clk);
      copy = 1'($urandom); en = ($urandom % 4) != 0;
      tr = ($urandom % 4) != 0; cr = ($urandom % 4) != 0;
      f = '0;
      f.flow_id = FLOW_W'($urandom); f.seq = $urandom; f.length = LEN_W'($urandom);
      f.iscopy = copy;
      in_frame = f; in_valid = 1; swa_en = en; tt_ready = tr; cp_ready = cr;
      #1;
      if (copy) begin
        check(in_ready, "copy never stalls");
        check(!tt_valid, "copy not on TT path");
        check(cp_valid == en, "copy on BE path iff enabled");
        check(cp_frame == f, "copy unchanged");
        if (!en || !cr) exp_drops++;
      end else begin
        frame_t c;
        c = f; c.iscopy = 1'b1;
        check(in_ready == tr, "TT frame waits for TT path");
        check(tt_valid && tt_frame == f, "TT frame on TT path");
        check(cp_valid == (en && tr), "clone offered with the TT frame");
        check(cp_frame == c, "clone has iscopy set");
        if (tr && en && cr) exp_clones++;
        if (tr && en && !cr) exp_drops++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    @(negedge clk);
    check(clone_count == exp_clones, "clone count");
    check(drop_count == exp_drops, "drop count");
    $display("clones=%0d drops=%0d", clone_count, drop_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

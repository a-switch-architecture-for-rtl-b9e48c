// tb_frame_fifo: self-checking test of the frame descriptor queue.
// Random pushes and pops with random back-pressure are compared against a
// reference queue; the full flag, the count and the one-cycle latency from
// an empty queue are checked as well.
module tb_frame_fifo;
  import swa_pkg::*;
  localparam int DEPTH = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  frame_t in_frame, out_frame;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  frame_t model [$];

  always #5 clk = ~clk;

  frame_fifo #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic frame_t rnd_frame();
    frame_t f;
    f = '0;
    f.flow_id = FLOW_W'($urandom);
    f.seq     = $urandom;
    f.buf_id  = BUF_W'($urandom);
    f.iscopy  = 1'($urandom);
    return f;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_frame = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid && count == 0, "empty after reset");
    // one-cycle latency
    in_valid = 1; in_frame = rnd_frame();
    @(negedge clk);
    in_valid = 0;
    check(out_valid && out_frame == in_frame, "visible one cycle after write");
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    check(!out_valid, "empty again");
    // fill up
    for (int i = 0; i < DEPTH; i++) begin
      in_valid = 1; in_frame = rnd_frame(); model.push_back(in_frame);
      @(negedge clk);
    end
    in_valid = 0;
    check(!in_ready && count == DEPTH, "full after DEPTH writes");
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      in_valid  = 1'($urandom);
      in_frame  = rnd_frame();
      out_ready = 1'($urandom);
      @(posedge clk);
      if (out_valid && out_ready) begin
        frame_t exp;
        exp = model.pop_front();
        check(out_frame == exp, "order and content");
      end
      if (in_valid && in_ready) model.push_back(in_frame);
      @(negedge clk);
      check(32'(count) == model.size(), "count tracks occupancy");
      check(in_ready == (model.size() < DEPTH), "in_ready iff not full");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

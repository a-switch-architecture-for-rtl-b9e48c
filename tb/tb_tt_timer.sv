// tb_tt_timer: self-checking test of the TT timer. The synchronised time
// advances 8 ns per clock. TT frames written with release times must appear
// in the first cycle in which the time has reached their release time (not
// earlier, not later), together with the schedule/sequence table update;
// copies pass straight through but yield to a TT frame released in the same
// cycle; several flows due at once leave one per cycle.
module tb_tt_timer;
  import swa_pkg::*;
  localparam int NF = 4;
  logic clk = 0, rst_n = 0;
  time_ns_t now;
  logic tt_valid, tt_ready, cp_valid, cp_ready, out_valid, out_ready, upd_we;
  frame_t tt_frame, cp_frame, out_frame;
  time_ns_t tt_release;
  flow_id_t upd_flow;
  seq_t upd_seq;
  logic [NF-1:0] pending;
  logic [31:0] overrun_count;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 8;
  tt_timer #(.NUM_FLOWS(NF)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic frame_t mk(input int flow, input int seq, input bit copy);
    frame_t f;
    f = '0; f.flow_id = FLOW_W'(flow); f.seq = seq_t'(seq); f.iscopy = copy;
    f.buf_id = BUF_W'(flow * 100 + seq);
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
    now = 0; tt_valid = 0; cp_valid = 0; out_ready = 1;
    tt_frame = '0; cp_frame = '0; tt_release = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. single release at an exact time
    @(negedge clk);
    tt_valid = 1; tt_frame = mk(1, 3, 0); tt_release = now + 400;
    check(tt_ready, "timer always accepts");
    @(negedge clk);
    tt_valid = 0;
    check(pending == 4'b0010, "slot of flow 1 occupied");
    while (now < tt_release) begin
      check(!out_valid, "nothing before release time");
      @(negedge clk);
    end
    check(out_valid && out_frame == mk(1, 3, 0), "released at first cycle at release time");
    check(upd_we && upd_flow == 1 && upd_seq == 3, "table update at release");
    @(negedge clk);
    check(!out_valid && pending == 0, "slot freed");
    // 2. copy passes through when nothing is due
    cp_valid = 1; cp_frame = mk(2, 7, 1);
    #1 check(out_valid && out_frame == cp_frame && cp_ready && !upd_we, "copy passes through");
    // 3. TT release has priority over a waiting copy
    @(negedge clk);
    cp_valid = 0;
    tt_valid = 1; tt_frame = mk(3, 9, 0); tt_release = now + 16;
    @(negedge clk);
    tt_valid = 0;
    cp_valid = 1; cp_frame = mk(2, 8, 1);
    #1;
    while (now < tt_release) begin
      check(out_frame == cp_frame && cp_ready, "copy flows before release");
      @(negedge clk);
    end
    check(out_frame == mk(3, 9, 0) && !cp_ready, "TT frame first, copy waits");
    @(negedge clk);
    check(out_frame == cp_frame && cp_ready, "copy after TT frame");
    cp_valid = 0;
    // 4. three flows due together leave one per cycle, lowest flow first
    begin
      time_ns_t t0;
      t0 = now + 64;
      for (int fl = 3; fl >= 1; fl--) begin
        @(negedge clk);
        tt_valid = 1; tt_frame = mk(fl, 20 + fl, 0); tt_release = t0;
      end
    end
    @(negedge clk);
    tt_valid = 0;
    while (!out_valid) @(negedge clk);
    for (int fl = 1; fl <= 3; fl++) begin
      check(out_valid && out_frame == mk(fl, 20 + fl, 0), "due frames in flow order");
      @(negedge clk);
    end
    check(!out_valid, "all due frames left");
    // 5. back-pressure holds a due frame
    tt_valid = 1; tt_frame = mk(0, 1, 0); tt_release = now;
    @(negedge clk);
    tt_valid = 0; out_ready = 0;
    #1;
    repeat (3) begin
      check(out_valid && !upd_we, "held while output busy, no update");
      @(negedge clk);
    end
    out_ready = 1;
    #1 check(out_valid && upd_we && upd_seq == 1, "leaves when output ready");
    @(negedge clk);
    check(overrun_count == 0, "no overruns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

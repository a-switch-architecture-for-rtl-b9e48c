// tb_arrival_filtering: self-checking test of step 5 and the jitter hold.
// Flow 1 uses the TTS-3 schedule of the evaluation (offset 67584 ns, period
// 524288 ns) with a jitter of 10 us, so copies are held until 57584 ns into
// their period. The test checks: first arrival delivered, later arrival with
// the same sequence dropped; a TT frame is never held; an early copy is held
// and leaves in the first cycle at offset - jitter; a late copy leaves at
// once; jitter < 0 drops copies only; jitter > period means no hold; a flow
// with filtering disabled passes everything; iscopy restoration.
module tb_arrival_filtering;
  import swa_pkg::*;
  localparam int NF = 4;
  localparam longint PERIOD = 524288, OFFSET = 67584, JIT = 10000;
  logic clk = 0, rst_n = 0;
  time_ns_t now;
  logic restore_iscopy, cfg_we, cfg_filter_en;
  flow_id_t cfg_flow, rd_flow;
  logic signed [TIME_W-1:0] cfg_jitter;
  logic in_valid, in_ready, out_valid, out_ready;
  frame_t in_frame, out_frame;
  sched_row_t rd_row;
  time_ns_t rd_base;
  logic [31:0] drop_count, hold_count, hold_overrun_count;
  logic [NF-1:0] held;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 8;
  assign rd_base = time_ns_t'((longint'(now) / PERIOD) * PERIOD);
  arrival_filtering #(.NUM_FLOWS(NF)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic frame_t mk(input int flow, input int seq, input bit copy);
    frame_t f;
    f = '0; f.flow_id = FLOW_W'(flow); f.seq = seq_t'(seq); f.iscopy = copy;
    f.out_port = 2;
    return f;
  endfunction

  task automatic config_flow(input int fl, input bit en, input longint jit);
    @(negedge clk);
    cfg_we = 1; cfg_flow = FLOW_W'(fl); cfg_filter_en = en; cfg_jitter = jit;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // offer one frame; returns 1 if it was delivered directly in that cycle
  task automatic offer(input frame_t f, output bit direct);
    @(negedge clk);
    in_valid = 1; in_frame = f;
    #1 direct = out_valid && !held[f.flow_id[1:0]] && out_frame.seq == f.seq;
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic wait_until(input longint t);
    while (longint'(now) < t) @(negedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit d;
    longint rel;
    now = 0; restore_iscopy = 0; cfg_we = 0; cfg_flow = '0; cfg_filter_en = 0;
    cfg_jitter = '0; in_valid = 0; in_frame = '0; out_ready = 1;
    rd_row = '0; rd_row.valid = 1; rd_row.period = PERIOD; rd_row.offset = OFFSET;
    repeat (2) @(posedge clk);
    rst_n = 1;
    config_flow(1, 1, JIT);
    // early copy of seq 1: held until offset - jitter
    wait_until(30000);
    offer(mk(1, 1, 1), d);
    check(!d, "early copy not delivered at once");
    check(held[1] && hold_count == 1, "early copy held");
    rel = OFFSET - JIT;
    while (longint'(now) < rel) begin
      check(!out_valid, "held copy waits");
      @(negedge clk);
    end
    check(out_valid && out_frame == mk(1, 1, 1), "held copy leaves at offset - jitter");
    check(longint'(now) - rel < 8, "release within one clock of offset - jitter");
    @(negedge clk);
    // the TT frame of seq 1 arrives at its offset: later arrival, dropped
    wait_until(OFFSET);
    offer(mk(1, 1, 0), d);
    check(!d && drop_count == 1, "later TT frame dropped");
    // period 2: TT frame first (copy lost upstream), then the late copy
    wait_until(PERIOD + OFFSET);
    offer(mk(1, 2, 0), d);
    check(d, "TT frame delivered at once, never held");
    offer(mk(1, 2, 1), d);
    check(!d && drop_count == 2, "late copy of delivered frame dropped");
    // a copy arriving after offset - jitter is delivered at once
    wait_until(2 * PERIOD + OFFSET - JIT + 100);
    offer(mk(1, 3, 1), d);
    check(d && hold_count == 1, "copy after offset - jitter not held");
    // restore iscopy
    restore_iscopy = 1;
    @(negedge clk);
    in_valid = 1; in_frame = mk(1, 4, 1);
    #1 check(out_valid && out_frame.iscopy == 0, "iscopy restored to false");
    @(negedge clk);
    in_valid = 0; restore_iscopy = 0;
    // negative jitter: copies dropped, TT frames delivered
    config_flow(1, 1, -1);
    offer(mk(1, 1, 1), d);
    check(!d && drop_count == 3, "jitter < 0 drops copies");
    offer(mk(1, 1, 0), d);
    check(d, "jitter < 0 delivers TT frames");
    // jitter larger than the period: no hold
    config_flow(1, 1, PERIOD + 1);
    wait_until(3 * PERIOD + 1000);
    offer(mk(1, 1, 1), d);
    check(d, "jitter > period: copy delivered at once");
    // filtering disabled: both copies of a sequence pass
    config_flow(2, 0, JIT);
    offer(mk(2, 5, 1), d);
    check(d, "disabled flow passes copy");
    offer(mk(2, 5, 0), d);
    check(d, "disabled flow passes TT frame too");
    // random ordering check on flow 3 without hold (jitter > period)
    config_flow(3, 1, PERIOD * 2);
    begin
      int last = 0;
      for (int n = 0; n < 500; n++) begin
        int s;
        s = last - 2 + int'($urandom % 5);
        if (s < 0) s = 0;
        offer(mk(3, s, 1'($urandom)), d);
        check(d == (s > last), "deliver iff newer than filter table");
        if (s > last) last = s;
      end
    end
    check(hold_overrun_count == 0, "no hold overruns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

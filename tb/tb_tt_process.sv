// tb_tt_process: self-checking test of step 3's admission checks. The
// schedule row, stored sequence and period start are driven by the testbench
// with the TTS-3 values of flow 1 of the evaluation (length 128, input port
// 0, output port 2, window 45456..46456 ns, offset 67584 ns, period 524288
// ns). Frames are offered inside, before and after the window, with wrong
// length, wrong port and old sequence; only good frames may pass, tagged with
// the output port and a release time of base + offset.
module tb_tt_process;
  import swa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  frame_t in_frame, out_frame;
  flow_id_t rd_flow;
  sched_row_t rd_row;
  seq_t rd_seq;
  time_ns_t rd_base, out_release;
  logic [31:0] drop_count;
  int checks = 0, failures = 0, exp_drops = 0, passes = 0;
  localparam longint PERIOD = 524288;

  always #5 clk = ~clk;
  tt_process dut (.*);

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
    rd_row = '0; rd_row.valid = 1; rd_row.length = 128; rd_row.in_port = 0;
    rd_row.out_port = 2; rd_row.period = PERIOD; rd_row.arrival_start = 45456;
    rd_row.arrival_end = 46456; rd_row.offset = 67584;
    rd_seq = 5; rd_base = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      frame_t f; longint m, arr, base_m; int kind; bit exp_pass;
      @(negedge clk);
      m = $urandom % 100;
      kind = $urandom % 8;
      arr = m * PERIOD + 45456 + ($urandom % 1001);
      f = '0; f.flow_id = 1; f.length = 128; f.in_port = 0; f.seq = rd_seq + 1;
      case (kind)
        0: arr = m * PERIOD + 45456 - 1 - ($urandom % 1000);   // early
        1: arr = m * PERIOD + 46456 + 1 + ($urandom % 1000);   // late
        2: f.length = 129;
        3: f.in_port = 3;
        4: f.seq = rd_seq - seq_t'($urandom % 2);              // old or repeated
        default: ;
      endcase
      if (kind == 4 && ($urandom % 2)) f.seq = rd_seq;
      f.arrival_time = time_ns_t'(arr);
      // the period tracker may already be in the next period
      base_m = m * PERIOD;
      rd_base = time_ns_t'(($urandom % 4 == 0) ? base_m + PERIOD : base_m);
      out_ready = ($urandom % 4) != 0;
      in_frame = f; in_valid = 1;
      #1;
      exp_pass = (kind >= 5);
      check(rd_flow == 1, "looks up the frame's flow");
      check(out_valid == exp_pass, "admission decision");
      if (exp_pass) begin
        passes++;
        check(out_release == time_ns_t'(base_m + 67584), "release = offset + m*period");
        check(out_frame.out_port == 2, "output port tagged");
        check(in_ready == out_ready, "waits for timer");
      end else begin
        check(in_ready, "dropped frame consumed");
        exp_drops++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    @(negedge clk);
    check(drop_count == exp_drops, "drop count");
    check(passes > 100, "enough passing frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

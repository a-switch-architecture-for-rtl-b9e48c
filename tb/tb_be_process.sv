// tb_be_process: self-checking test of step 2 and the static route table.
// Rows are written for some flows; random copies with matching and
// mismatching length and input port are offered. A copy must come out
// tagged with its row's output port exactly when flow, length and input
// port match, and be dropped (and counted) otherwise.
module tb_be_process;
  import swa_pkg::*;
  localparam int NF = 16;
  logic clk = 0, rst_n = 0;
  logic cfg_we; flow_id_t cfg_flow; sched_row_t cfg_row;
  logic in_valid, in_ready, out_valid, out_ready;
  frame_t in_frame, out_frame;
  logic [31:0] drop_count;
  int checks = 0, failures = 0, exp_drops = 0;
  sched_row_t ref_rows [NF];

  always #5 clk = ~clk;
  be_process #(.NUM_FLOWS(NF)) dut (.*);

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
    cfg_we = 0; cfg_flow = '0; cfg_row = '0; in_valid = 0; in_frame = '0; out_ready = 1;
    for (int i = 0; i < NF; i++) ref_rows[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NF; i += 2) begin
      @(negedge clk);
      cfg_we = 1; cfg_flow = FLOW_W'(i);
      cfg_row = '0;
      cfg_row.valid = 1; cfg_row.length = LEN_W'(64 + 16 * i);
      cfg_row.in_port = PORT_W'(i % 24); cfg_row.out_port = PORT_W'((i * 7 + 3) % 24);
      ref_rows[i] = cfg_row;
    end
    @(negedge clk);
    cfg_we = 0;
    for (int n = 0; n < 2000; n++) begin
      frame_t f; int fl; bit m;
      @(negedge clk);
      fl = $urandom % (NF + 4);
      f = '0; f.flow_id = FLOW_W'(fl); f.seq = $urandom; f.iscopy = 1;
      if (fl < NF && ($urandom % 3) != 0) begin
        f.length = ref_rows[fl].length; f.in_port = ref_rows[fl].in_port;
      end else begin
        f.length = LEN_W'($urandom % 600); f.in_port = PORT_W'($urandom % 24);
      end
      if (($urandom % 8) == 0 && fl < NF) f.in_port = f.in_port + 1;
      out_ready = ($urandom % 5) != 0;
      in_frame = f; in_valid = 1;
      #1;
      m = fl < NF && ref_rows[fl].valid && ref_rows[fl].length == f.length
          && ref_rows[fl].in_port == f.in_port;
      check(out_valid == m, "forward iff route row matches");
      if (m) begin
        check(out_frame.out_port == ref_rows[fl].out_port, "output port from table");
        check(out_frame.seq == f.seq && out_frame.flow_id == f.flow_id, "frame kept");
        check(in_ready == out_ready, "match waits for output");
      end else begin
        check(in_ready, "mismatch consumed");
        exp_drops++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    @(negedge clk);
    check(drop_count == exp_drops, "drop count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

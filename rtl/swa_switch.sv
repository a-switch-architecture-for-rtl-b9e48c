// swa_switch: forwarding core of a time-triggered switch that also sends a
// best-effort copy of every TT frame.
//
// Each received TT frame is cloned. The original follows the TT path: it is
// checked against the schedule table (TT process) and held until its
// scheduled departure offset + m*period (TT timer). The clone follows the
// best-effort path: it is routed by the static route table (BE process) and
// kept only if its sequence number is exactly the next one of its flow
// (sequence checking), then leaves at once. Both kinds are sorted into one
// queue of TT frames and one queue of copies per output port. A port that
// can transmit is served from its TT queue first, then from its copy queue,
// and the chosen frame passes arrival filtering as it leaves: at the last
// switch of a route only the first of a TT frame and its copy is delivered,
// and copies can be held to bound the jitter. Filtering at the moment of
// delivery means a copy that waited in its queue past the TT frame is
// dropped, so the TT schedule stays the latency bound. This is the
// arrangement of processing steps, per-port queues and tables of the
// architecture; the queues between the steps, the handshakes and all widths
// are this design's choices.
//
// Interface: frames arrive as descriptors (swa_pkg::frame_t) on one rx port
// with a valid/ready handshake, already carrying their arrival timestamp;
// the per-port Ethernet MACs, the header parser, the IEEE 1588 clock (now)
// and the egress gate control are outside this block. tx_ready[port] says
// that the port's transmitter can take a frame now (for TT frames the gate
// control keeps the link free at their slot); only ports that are ready are
// served, so tx_valid[port] depends on tx_ready[port]. One frame per cycle
// is delivered over all ports: TT queues before copy queues, lower port
// numbers first. A configuration write (cfg_we) loads one flow's schedule
// row and from it the static route table, and clears the flow's sequence in
// all four tables; cfg_filter_en and cfg_jitter set the flow's filter-table
// entry. swa_en = 0 turns the switch into a plain TT switch (no copies).
//
// Timing: a copy that meets empty queues passes two FIFO stages on the
// copy path and its port queue, so it is offered on tx three clock cycles
// after it is received. A TT frame leaves the timer in the first cycle in
// which now has reached its release time and is offered on tx one cycle
// later.
module swa_switch
  import swa_pkg::*;
#(
  parameter int NUM_FLOWS   = 16,
  parameter int NUM_PORTS   = 24,
  parameter int QUEUE_DEPTH = 8,
  parameter int EGRESS_DEPTH = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  time_ns_t   now,
  input  logic       swa_en,
  input  logic       restore_iscopy,
  // configuration
  input  logic       cfg_we,
  input  flow_id_t   cfg_flow,
  input  sched_row_t cfg_row,
  input  logic       cfg_filter_en,
  input  logic signed [TIME_W-1:0] cfg_jitter,
  // received descriptors
  input  logic       rx_valid,
  output logic       rx_ready,
  input  frame_t     rx_frame,
  // delivered descriptors per output port
  output logic       tx_valid [NUM_PORTS],
  input  logic       tx_ready [NUM_PORTS],
  output frame_t     tx_frame [NUM_PORTS],
  output swa_stats_t stats
);
  localparam int QCW = $clog2(QUEUE_DEPTH + 1);
  localparam int ECW = $clog2(EGRESS_DEPTH + 1);

  // ---------------- step 1: classifier ----------------
  logic   c_tt_valid, c_tt_ready, c_cp_valid, c_cp_ready;
  frame_t c_tt_frame, c_cp_frame;

  classifier u_classifier (
    .clk, .rst_n, .swa_en,
    .in_valid(rx_valid), .in_ready(rx_ready), .in_frame(rx_frame),
    .tt_valid(c_tt_valid), .tt_ready(c_tt_ready), .tt_frame(c_tt_frame),
    .cp_valid(c_cp_valid), .cp_ready(c_cp_ready), .cp_frame(c_cp_frame),
    .clone_count(stats.clones), .drop_count(stats.classifier_drops)
  );

  // TT queue (TTs) and copy queue (TTcopies)
  logic   q_tt_valid, q_tt_ready, q_cp_valid, q_cp_ready;
  frame_t q_tt_frame, q_cp_frame;
  logic [QCW-1:0] q_tt_count, q_cp_count, q_rt_count;

  frame_fifo #(.DEPTH(QUEUE_DEPTH)) u_q_tt (
    .clk, .rst_n,
    .in_valid(c_tt_valid), .in_ready(c_tt_ready), .in_frame(c_tt_frame),
    .out_valid(q_tt_valid), .out_ready(q_tt_ready), .out_frame(q_tt_frame),
    .count(q_tt_count)
  );
  frame_fifo #(.DEPTH(QUEUE_DEPTH)) u_q_cp (
    .clk, .rst_n,
    .in_valid(c_cp_valid), .in_ready(c_cp_ready), .in_frame(c_cp_frame),
    .out_valid(q_cp_valid), .out_ready(q_cp_ready), .out_frame(q_cp_frame),
    .count(q_cp_count)
  );

  // ---------------- schedule table ----------------
  flow_id_t   st_a_flow, st_b_flow;
  sched_row_t st_a_row, st_b_row;
  seq_t       st_a_seq;
  time_ns_t   st_a_base, st_b_base;
  logic       upd_we;
  flow_id_t   upd_flow;
  seq_t       upd_seq;

  schedule_table #(.NUM_FLOWS(NUM_FLOWS)) u_schedule (
    .clk, .rst_n, .now,
    .cfg_we, .cfg_flow, .cfg_row,
    .a_flow(st_a_flow), .a_row(st_a_row), .a_seq(st_a_seq), .a_base(st_a_base),
    .b_flow(st_b_flow), .b_row(st_b_row), .b_base(st_b_base),
    .upd_we, .upd_flow, .upd_seq
  );

  // ---------------- step 2: BE process (static route table) ----------------
  logic   r_valid, r_ready;
  frame_t r_frame;

  be_process #(.NUM_FLOWS(NUM_FLOWS)) u_be (
    .clk, .rst_n, .cfg_we, .cfg_flow, .cfg_row,
    .in_valid(q_cp_valid), .in_ready(q_cp_ready), .in_frame(q_cp_frame),
    .out_valid(r_valid), .out_ready(r_ready), .out_frame(r_frame),
    .drop_count(stats.route_drops)
  );

  // routed copies (TTcopiesbyport, kept as one queue tagged with the port)
  logic   q_rt_valid, q_rt_ready;
  frame_t q_rt_frame;
  frame_fifo #(.DEPTH(QUEUE_DEPTH)) u_q_rt (
    .clk, .rst_n,
    .in_valid(r_valid), .in_ready(r_ready), .in_frame(r_frame),
    .out_valid(q_rt_valid), .out_ready(q_rt_ready), .out_frame(q_rt_frame),
    .count(q_rt_count)
  );

  // ---------------- step 4: sequence checking ----------------
  flow_id_t sq_rd_flow, sq_chk_flow;
  seq_t     sq_rd_seq, sq_chk_seq;
  logic     sq_chk_we;
  logic     s_valid, s_ready;
  frame_t   s_frame;

  sequence_table #(.NUM_FLOWS(NUM_FLOWS)) u_seq_table (
    .clk, .rst_n, .cfg_clr(cfg_we), .cfg_flow,
    .rd_flow(sq_rd_flow), .rd_seq(sq_rd_seq),
    .chk_we(sq_chk_we), .chk_flow(sq_chk_flow), .chk_seq(sq_chk_seq),
    .rs_we(upd_we), .rs_flow(upd_flow), .rs_seq(upd_seq)
  );

  sequence_checking u_seq_check (
    .clk, .rst_n,
    .in_valid(q_rt_valid), .in_ready(q_rt_ready), .in_frame(q_rt_frame),
    .out_valid(s_valid), .out_ready(s_ready), .out_frame(s_frame),
    .rd_flow(sq_rd_flow), .rd_seq(sq_rd_seq),
    .chk_we(sq_chk_we), .chk_flow(sq_chk_flow), .chk_seq(sq_chk_seq),
    .drop_count(stats.seq_drops)
  );

  // ---------------- step 3: TT process and timer ----------------
  logic     p_valid, p_ready;
  frame_t   p_frame;
  time_ns_t p_release;

  tt_process u_tt (
    .clk, .rst_n,
    .in_valid(q_tt_valid), .in_ready(q_tt_ready), .in_frame(q_tt_frame),
    .rd_flow(st_a_flow), .rd_row(st_a_row), .rd_seq(st_a_seq), .rd_base(st_a_base),
    .out_valid(p_valid), .out_ready(p_ready), .out_frame(p_frame),
    .out_release(p_release), .drop_count(stats.tt_drops)
  );

  logic     m_valid, m_ready;
  frame_t   m_frame;
  logic [NUM_FLOWS-1:0] tt_pending, held;
  logic [31:0] timer_overruns, hold_overruns;

  tt_timer #(.NUM_FLOWS(NUM_FLOWS)) u_timer (
    .clk, .rst_n, .now,
    .tt_valid(p_valid), .tt_ready(p_ready), .tt_frame(p_frame), .tt_release(p_release),
    .cp_valid(s_valid), .cp_ready(s_ready), .cp_frame(s_frame),
    .out_valid(m_valid), .out_ready(m_ready), .out_frame(m_frame),
    .upd_we, .upd_flow, .upd_seq,
    .pending(tt_pending), .overrun_count(timer_overruns)
  );

  // ---------------- per-port queues (framesbyport, TTcopiesbyport) ----------------
  // Frames from the timer are sorted by output port and class: one queue of
  // TT frames and one queue of copies per port. A frame whose queue is full
  // or whose port does not exist is lost and counted.
  logic             tq_in_valid [NUM_PORTS], tq_in_ready [NUM_PORTS];
  logic             tq_valid    [NUM_PORTS], tq_ready    [NUM_PORTS];
  frame_t           tq_frame    [NUM_PORTS];
  logic [ECW-1:0]   tq_count    [NUM_PORTS];
  logic             cq_in_valid [NUM_PORTS], cq_in_ready [NUM_PORTS];
  logic             cq_valid    [NUM_PORTS], cq_ready    [NUM_PORTS];
  frame_t           cq_frame    [NUM_PORTS];
  logic [ECW-1:0]   cq_count    [NUM_PORTS];
  logic             egress_lost;

  assign m_ready = 1'b1;

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    assign tq_in_valid[p] = m_valid && !m_frame.iscopy && (m_frame.out_port == PORT_W'(p));
    assign cq_in_valid[p] = m_valid &&  m_frame.iscopy && (m_frame.out_port == PORT_W'(p));
    frame_fifo #(.DEPTH(EGRESS_DEPTH)) u_q_tt_port (
      .clk, .rst_n,
      .in_valid(tq_in_valid[p]), .in_ready(tq_in_ready[p]), .in_frame(m_frame),
      .out_valid(tq_valid[p]), .out_ready(tq_ready[p]), .out_frame(tq_frame[p]),
      .count(tq_count[p])
    );
    frame_fifo #(.DEPTH(EGRESS_DEPTH)) u_q_cp_port (
      .clk, .rst_n,
      .in_valid(cq_in_valid[p]), .in_ready(cq_in_ready[p]), .in_frame(m_frame),
      .out_valid(cq_valid[p]), .out_ready(cq_ready[p]), .out_frame(cq_frame[p]),
      .count(cq_count[p])
    );
  end

  always_comb begin
    egress_lost = m_valid && (32'(m_frame.out_port) >= NUM_PORTS);
    for (int p = 0; p < NUM_PORTS; p++)
      if ((tq_in_valid[p] && !tq_in_ready[p]) || (cq_in_valid[p] && !cq_in_ready[p]))
        egress_lost = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           stats.egress_drops <= '0;
    else if (egress_lost) stats.egress_drops <= stats.egress_drops + 1;
  end

  // ---------------- delivery selection ----------------
  // One frame at a time is taken from a queue whose port is ready: TT queues
  // before copy queues, lower port numbers first.
  logic                 sel_valid, sel_copy;
  logic [PORT_W-1:0]    sel_port;
  frame_t               sel_frame;
  logic                 a_ready;

  always_comb begin
    sel_valid = 1'b0;
    sel_copy  = 1'b0;
    sel_port  = '0;
    for (int p = NUM_PORTS - 1; p >= 0; p--)
      if (cq_valid[p] && tx_ready[p]) begin
        sel_valid = 1'b1; sel_copy = 1'b1; sel_port = PORT_W'(p);
      end
    for (int p = NUM_PORTS - 1; p >= 0; p--)
      if (tq_valid[p] && tx_ready[p]) begin
        sel_valid = 1'b1; sel_copy = 1'b0; sel_port = PORT_W'(p);
      end
    sel_frame = sel_copy ? cq_frame[sel_port] : tq_frame[sel_port];
  end

  always_comb
    for (int p = 0; p < NUM_PORTS; p++) begin
      tq_ready[p] = a_ready && sel_valid && !sel_copy && (sel_port == PORT_W'(p));
      cq_ready[p] = a_ready && sel_valid &&  sel_copy && (sel_port == PORT_W'(p));
    end

  // ---------------- step 5: arrival filtering ----------------
  logic   f_valid, f_ready;
  frame_t f_frame;

  arrival_filtering #(.NUM_FLOWS(NUM_FLOWS)) u_filter (
    .clk, .rst_n, .now, .restore_iscopy,
    .cfg_we, .cfg_flow, .cfg_filter_en, .cfg_jitter,
    .in_valid(sel_valid), .in_ready(a_ready), .in_frame(sel_frame),
    .rd_flow(st_b_flow), .rd_row(st_b_row), .rd_base(st_b_base),
    .out_valid(f_valid), .out_ready(f_ready), .out_frame(f_frame),
    .drop_count(stats.filter_drops), .hold_count(stats.holds),
    .held, .hold_overrun_count(hold_overruns)
  );

  assign stats.overruns = timer_overruns + hold_overruns;

  // ---------------- delivery (deliveredframes) ----------------
  always_comb begin
    f_ready = 1'b0;
    for (int p = 0; p < NUM_PORTS; p++) begin
      tx_valid[p] = f_valid && (f_frame.out_port == PORT_W'(p));
      tx_frame[p] = f_frame;
      if (f_frame.out_port == PORT_W'(p)) f_ready = tx_ready[p];
    end
  end
endmodule

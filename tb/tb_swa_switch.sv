// tb_swa_switch: end-to-end test of three switches in a line, with the
// flows and schedule of the evaluation platform.
//
// Three swa_switch instances with default parameters stand for TTS-1, TTS-2
// and TTS-3; a source sends flows 1..3 (128, 256 and 512 bytes, periods
// 524288, 1048576 and 2097152 ns) into TTS-1 port 4, TTS-1 port 7 feeds
// TTS-2 port 0, TTS-2 port 1 feeds TTS-3 port 0 and TTS-3 port 2 is the sink.
// Each switch holds the schedule rows of its flows; arrival filtering is
// enabled only in TTS-3, the last switch. A link is modelled at descriptor
// level: a frame that leaves at time t has its first bit timestamped at
// t + 500 ns by the next switch and is handed over once fully received,
// (length + 24) * 80 ns later (100 Mbit/s with preamble, CRC and gap).
//
// Phases, each a few periods long:
//   A  SWA off: every frame must leave TTS-3 exactly at its scheduled
//      offset + m*period (within two clocks).
//   B  SWA on, no jitter bound: copies arrive first, every sequence is
//      delivered exactly once and earlier than its TT frame.
//   C  copies lost on the TTS-1 -> TTS-2 link (congestion): TTS-2 starts new
//      copies, so delivery is still earlier than the TT frame (self-recovery).
//   D  jitter bound of 10 us at TTS-3: copies are held and delivered no
//      earlier than offset - 10 us.
// Throughout, the sink checks order and exactly-once delivery per flow.
// Faulty frames (a copy with a wrong length, a TT frame outside its window)
// are also injected. Each mechanism is counted and must occur at least once.
module tb_swa_switch;
  import swa_pkg::*;
  localparam int NP = 24;
  localparam longint STEP = 16;          // ns of synchronised time per clock
  localparam longint LINK = 500;         // ns, first-bit delay of a link

  logic clk = 0, rst_n = 0;
  time_ns_t now;
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) now <= now + time_ns_t'(STEP);

  // flow data (index 1..3)
  longint period [4] = '{0, 524288, 1048576, 2097152};
  int     flen   [4] = '{0, 128, 256, 512};
  longint src_off[4] = '{0, 0, 28672, 67584};
  // Table II rows: {in, out, arrival-start, arrival-end, offset}
  longint sw_tab [3][4][5] = '{
    '{'{0,0,0,0,0}, '{4,7,400,1400,22528},     '{4,7,29072,30072,61440},    '{4,7,67984,68984,120832}},
    '{'{0,0,0,0,0}, '{0,1,22928,23928,45056},  '{0,1,61840,62840,94208},    '{0,1,121232,122232,174080}},
    '{'{0,0,0,0,0}, '{0,2,45456,46456,67584},  '{0,2,94608,95608,126976},   '{0,2,174480,175480,227328}}};

  // ---------------- switches ----------------
  logic       swa_en [3];
  logic       cfg_we [3];
  flow_id_t   cfg_flow [3];
  sched_row_t cfg_row [3];
  logic       cfg_filter_en [3];
  logic signed [TIME_W-1:0] cfg_jitter [3];
  logic       rx_valid [3], rx_ready [3];
  frame_t     rx_frame [3];
  logic       tx_valid [3][NP], tx_ready [3][NP];
  frame_t     tx_frame [3][NP];
  swa_stats_t stats [3];

  for (genvar s = 0; s < 3; s++) begin : g_sw
    swa_switch u_sw (
      .clk, .rst_n, .now, .swa_en(swa_en[s]), .restore_iscopy(1'b0),
      .cfg_we(cfg_we[s]), .cfg_flow(cfg_flow[s]), .cfg_row(cfg_row[s]),
      .cfg_filter_en(cfg_filter_en[s]), .cfg_jitter(cfg_jitter[s]),
      .rx_valid(rx_valid[s]), .rx_ready(rx_ready[s]), .rx_frame(rx_frame[s]),
      .tx_valid(tx_valid[s]), .tx_ready(tx_ready[s]), .tx_frame(tx_frame[s]),
      .stats(stats[s])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d ns: %s", now, what);
    end
  endtask

  // ---------------- links ----------------
  // pending deliveries into switch s: descriptor and hand-over time
  typedef struct { frame_t f; longint due; } pend_t;
  pend_t pend [3][$];
  bit    lose_copies_12 = 0;       // phase C: copies lost on TTS-1 -> TTS-2
  int    copies_lost = 0;

  function automatic longint wire_time(input frame_t f);
    return (longint'(f.length) + 24) * 80;
  endfunction

  task automatic send_to(input int s, input frame_t f, input int in_port, input longint t_first);
    pend_t p;
    f.in_port = PORT_W'(in_port);
    f.out_port = '0;
    f.arrival_time = time_ns_t'(t_first);
    p.f = f; p.due = t_first + wire_time(f);
    pend[s].push_back(p);
  endtask

  // hand over the earliest due descriptor to each switch, one per clock:
  // the handshake is sampled at the rising edge, the queue advanced and the
  // next descriptor presented at the falling edge
  bit took [3];
  always @(posedge clk) begin
    for (int s = 0; s < 3; s++) took[s] = rx_valid[s] && rx_ready[s];
  end
  always @(negedge clk) begin
    for (int s = 0; s < 3; s++) begin
      if (took[s]) void'(pend[s].pop_front());
      took[s] = 0;
      rx_valid[s] = pend[s].size() > 0 && pend[s][0].due <= longint'(now);
      rx_frame[s] = pend[s].size() > 0 ? pend[s][0].f : '0;
    end
  end

  // ---------------- sink and statistics ----------------
  seq_t   last_seq [4];
  int     delivered [4];
  int     early_deliveries = 0, on_time_deliveries = 0, held_ok = 0;
  int     phase = 0;
  longint jitter_cfg = 0;
  longint lat_min [4], lat_max [4];

  always_comb begin
    for (int s = 0; s < 3; s++)
      for (int p = 0; p < NP; p++) tx_ready[s][p] = 1'b1;
  end

  always @(posedge clk) if (rst_n) begin
    // TTS-1 port 7 -> TTS-2 port 0
    if (tx_valid[0][7]) begin
      if (tx_frame[0][7].iscopy && lose_copies_12) copies_lost++;
      else send_to(1, tx_frame[0][7], 0, longint'(now) + LINK);
    end
    // TTS-2 port 1 -> TTS-3 port 0
    if (tx_valid[1][1]) send_to(2, tx_frame[1][1], 0, longint'(now) + LINK);
    // TTS-3 port 2 -> sink
    if (tx_valid[2][2]) begin
      frame_t f; int fl; longint m, dep, lat;
      f = tx_frame[2][2]; fl = int'(f.flow_id);
      check(fl >= 1 && fl <= 3, "sink sees a known flow");
      if (fl >= 1 && fl <= 3) begin
        check(f.seq > last_seq[fl], "order preserved, delivered once");
        if (f.seq != last_seq[fl] + 1 && last_seq[fl] != 0)
          $display("note: flow %0d jumped %0d -> %0d", fl, last_seq[fl], f.seq);
        last_seq[fl] = f.seq;
        delivered[fl]++;
        m = longint'(f.seq) - 1;
        dep = m * period[fl] + sw_tab[2][fl][4];          // TTS-3 scheduled departure
        lat = longint'(now) - (m * period[fl] + src_off[fl]);
        if (lat < lat_min[fl]) lat_min[fl] = lat;
        if (lat > lat_max[fl]) lat_max[fl] = lat;
        case (phase)
          1: begin
            check(longint'(now) >= dep && longint'(now) <= dep + 2 * STEP,
                  "SWA off: delivered at the scheduled instant");
            on_time_deliveries++;
          end
          2, 3: begin
            check(longint'(now) < dep, "SWA on: delivered before the TT frame");
            if (longint'(now) < dep) early_deliveries++;
          end
          4: begin
            check(longint'(now) >= dep - jitter_cfg && longint'(now) <= dep + 2 * STEP,
                  "jitter bound: delivered within [offset - jitter, offset]");
            if (longint'(now) < dep) held_ok++;
          end
          default: ;
        endcase
      end
    end
    for (int s = 0; s < 3; s++)
      for (int p = 0; p < NP; p++)
        if (tx_valid[s][p] && !((s == 0 && p == 7) || (s == 1 && p == 1) || (s == 2 && p == 2)))
          check(0, "frame on an unexpected port");
  end

  // ---------------- source ----------------
  seq_t   src_seq [4];
  longint next_send [4];
  bit     src_on = 0;
  always @(posedge clk) if (rst_n && src_on) begin
    for (int fl = 1; fl <= 3; fl++) begin
      if (longint'(now) >= next_send[fl]) begin
        frame_t f;
        f = '0;
        src_seq[fl] = src_seq[fl] + 1;
        f.flow_id = FLOW_W'(fl); f.seq = src_seq[fl]; f.length = LEN_W'(flen[fl]);
        f.buf_id = BUF_W'(src_seq[fl]);
        send_to(0, f, 4, next_send[fl] + LINK);
        next_send[fl] = next_send[fl] + period[fl];
      end
    end
  end

  // ---------------- configuration ----------------
  task automatic configure(input int s, input longint jitter);
    for (int fl = 1; fl <= 3; fl++) begin
      sched_row_t r;
      @(negedge clk);
      r = '0;
      r.valid = 1; r.length = LEN_W'(flen[fl]); r.period = time_ns_t'(period[fl]);
      r.in_port = PORT_W'(sw_tab[s][fl][0]); r.out_port = PORT_W'(sw_tab[s][fl][1]);
      r.arrival_start = time_ns_t'(sw_tab[s][fl][2]);
      r.arrival_end   = time_ns_t'(sw_tab[s][fl][3]);
      r.offset        = time_ns_t'(sw_tab[s][fl][4]);
      cfg_we[s] = 1; cfg_flow[s] = FLOW_W'(fl); cfg_row[s] = r;
      cfg_filter_en[s] = (s == 2); cfg_jitter[s] = jitter;
    end
    @(negedge clk);
    cfg_we[s] = 0;
  endtask

  task automatic run_until(input longint t);
    while (longint'(now) < t) @(negedge clk);
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam longint HP = 2097152;       // longest period
  longint no_bound;

  initial begin
    int tt_drops_before, route_drops_before;
    now = 0;
    for (int s = 0; s < 3; s++) begin rx_valid[s] = 0; rx_frame[s] = '0; took[s] = 0; end
    no_bound = 64'd1 << 40;
    for (int s = 0; s < 3; s++) begin
      swa_en[s] = 0; cfg_we[s] = 0; cfg_flow[s] = '0; cfg_row[s] = '0;
      cfg_filter_en[s] = 0; cfg_jitter[s] = '0;
    end
    for (int fl = 0; fl < 4; fl++) begin
      last_seq[fl] = 0; delivered[fl] = 0; src_seq[fl] = 0; next_send[fl] = src_off[fl];
      lat_min[fl] = 64'h7fffffff; lat_max[fl] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 3; s++) configure(s, no_bound);
    src_on = 1;

    // A: plain TT transmission
    phase = 1;
    run_until(2 * HP);
    $display("phase A (SWA off): flow1 latency %0d..%0d ns", lat_min[1], lat_max[1]);
    check(stats[0].clones == 0, "no copies when SWA is off");

    // B: SWA on
    for (int s = 0; s < 3; s++) swa_en[s] = 1;
    phase = 0;                                   // frames in flight at the switch-over
    run_until(3 * HP);
    for (int fl = 0; fl < 4; fl++) begin lat_min[fl] = 64'h7fffffff; lat_max[fl] = 0; end
    phase = 2;
    run_until(5 * HP);
    $display("phase B (SWA on): flow1 latency %0d..%0d ns", lat_min[1], lat_max[1]);
    check(lat_max[1] < sw_tab[2][1][4] - src_off[1], "copies beat the TT schedule");

    // C: copies lost between TTS-1 and TTS-2
    lose_copies_12 = 1;
    phase = 3;
    run_until(7 * HP);
    lose_copies_12 = 0;
    $display("phase C (copies lost on link 1-2): flow1 latency %0d..%0d ns", lat_min[1], lat_max[1]);

    // faulty frames: a copy with a wrong length and a TT frame out of window
    route_drops_before = int'(stats[0].route_drops);
    tt_drops_before    = int'(stats[0].tt_drops);
    begin
      frame_t f;
      f = '0; f.flow_id = 1; f.seq = 1000; f.length = 100; f.iscopy = 1;
      send_to(0, f, 4, longint'(now));
      f = '0; f.flow_id = 2; f.seq = 1000; f.length = 256; f.iscopy = 0;
      send_to(0, f, 4, ((longint'(now) / period[2]) * period[2]) + 200000);
    end

    // D: jitter bound of 10 us at TTS-3
    phase = 0;
    jitter_cfg = 10000;
    configure(2, jitter_cfg);
    run_until(8 * HP);
    for (int fl = 0; fl < 4; fl++) begin lat_min[fl] = 64'h7fffffff; lat_max[fl] = 0; end
    phase = 4;
    run_until(10 * HP);
    $display("phase D (jitter 10 us): flow1 latency %0d..%0d ns", lat_min[1], lat_max[1]);
    check(lat_max[1] - lat_min[1] <= jitter_cfg + 2 * STEP, "jitter within configured bound");
    src_on = 0;
    run_until(10 * HP + 300000);

    // every frame sent was delivered exactly once
    for (int fl = 1; fl <= 3; fl++)
      check(last_seq[fl] == src_seq[fl], "last frame of each flow delivered");

    // mechanisms
    $display("mechanisms: clones=%0d/%0d/%0d route_drops=%0d tt_drops=%0d seq_drops(TTS-2)=%0d",
             stats[0].clones, stats[1].clones, stats[2].clones, stats[0].route_drops,
             stats[0].tt_drops, stats[1].seq_drops);
    $display("            filter_drops=%0d holds=%0d copies_lost=%0d on_time=%0d early=%0d held=%0d",
             stats[2].filter_drops, stats[2].holds, copies_lost, on_time_deliveries,
             early_deliveries, held_ok);
    check(on_time_deliveries > 0, "mechanism: TT release at offset + m*period");
    check(stats[0].clones > 0, "mechanism: cloning");
    check(int'(stats[0].route_drops) > route_drops_before, "mechanism: static route check drop");
    check(int'(stats[0].tt_drops) > tt_drops_before, "mechanism: TT window check drop");
    check(stats[1].seq_drops > 0, "mechanism: sequence checking drops duplicate copies");
    check(stats[2].filter_drops > 0, "mechanism: arrival filtering drops later arrival");
    check(early_deliveries > 0, "mechanism: copy delivered before TT frame");
    check(copies_lost > 0, "mechanism: copy loss (self-recovery test)");
    check(stats[2].holds > 0 && held_ok > 0, "mechanism: jitter hold");
    for (int s = 0; s < 3; s++) check(stats[s].overruns == 0 && stats[s].egress_drops == 0, "no overruns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

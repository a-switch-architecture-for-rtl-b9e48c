// tb_swa_scenarios: the four evaluation scenarios, swept over the load of
// other best-effort traffic, on three switches in a line.
//
// The switches, flows and schedule are those of tb_swa_switch (flows of
// 128/256/512 bytes, source -> TTS-1 -> TTS-2 -> TTS-3 -> sink). Here the
// links also carry other BE traffic: 64-byte frames at 0..100 Mbit/s,
// competing with the copies for each 100 Mbit/s link. TT frames are sent at
// their scheduled instant regardless (an ideal guard band). The testbench
// models each link's BE transmission side, which is outside the switch core:
//   * copies at higher priority than other BE traffic: copies first
//     (Scenario One);
//   * copies at the same priority: round robin between the switch and the
//     other BE frames, which wait in a queue of 16 frames with tail drop
//     (Scenarios Two, Three and Four);
//   * a stress sweep with other BE traffic always first, so that copies
//     queue in the switch, go stale and are dropped.
// Other BE traffic is broadcast (all three links) in Scenarios One, Two and
// Four and unicast over the TTS-1 -> TTS-2 link only in Scenario Three;
// Scenario Four bounds the jitter at TTS-3 to 10 us.
//
// For every load point the latency of each flow (source departure to the
// first bit at the sink) is measured and printed. The checks are those the
// architecture promises: order and exactly-once delivery; latency never
// above the TT schedule (200 ns of slack: a copy taken in a TT slot whose
// TT frame is missing may wait for the frame on the wire); with high-priority copies a latency far below it at
// any load; with congestion confined to one link the next switch restores
// the improvement; with a jitter bound all latencies within the bound.
module tb_swa_scenarios;
  import swa_pkg::*;
  localparam int NP = 24;
  localparam longint STEP = 16;
  localparam longint LINK = 500;
  localparam longint HP = 2097152;
  localparam int QD = 16;

  logic clk = 0, rst_n = 0;
  time_ns_t now;
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) now <= now + time_ns_t'(STEP);

  longint period [4] = '{0, 524288, 1048576, 2097152};
  int     flen   [4] = '{0, 128, 256, 512};
  longint src_off[4] = '{0, 0, 28672, 67584};
  longint sw_tab [3][4][5] = '{
    '{'{0,0,0,0,0}, '{4,7,400,1400,22528},     '{4,7,29072,30072,61440},    '{4,7,67984,68984,120832}},
    '{'{0,0,0,0,0}, '{0,1,22928,23928,45056},  '{0,1,61840,62840,94208},    '{0,1,121232,122232,174080}},
    '{'{0,0,0,0,0}, '{0,2,45456,46456,67584},  '{0,2,94608,95608,126976},   '{0,2,174480,175480,227328}}};
  int out_port [3] = '{7, 1, 2};

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

  function automatic longint wire_time(input int len);
    return (longint'(len) + 24) * 80;
  endfunction

  // ---------------- switch inputs ----------------
  typedef struct { frame_t f; longint due; } pend_t;
  pend_t pend [3][$];
  bit took [3];

  task automatic send_to(input int s, input frame_t f, input int in_port, input longint t_first);
    pend_t p;
    f.in_port = PORT_W'(in_port);
    f.out_port = '0;
    f.arrival_time = time_ns_t'(t_first);
    p.f = f; p.due = t_first + wire_time(int'(f.length));
    pend[s].push_back(p);
  endtask

  always @(posedge clk)
    for (int s = 0; s < 3; s++) took[s] = rx_valid[s] && rx_ready[s];
  always @(negedge clk)
    for (int s = 0; s < 3; s++) begin
      if (took[s]) void'(pend[s].pop_front());
      took[s] = 0;
      rx_valid[s] = pend[s].size() > 0 && pend[s][0].due <= longint'(now);
      rx_frame[s] = pend[s].size() > 0 ? pend[s][0].f : '0;
    end

  // ---------------- links with other BE traffic ----------------
  // Each link's transmitter: other BE frames wait in a counter-modelled queue
  // of QD frames (tail drop); the switch's frames are taken through tx_ready.
  // TT frames own their slots (the guard band keeps the link free for them),
  // so a TT frame is sent at once and does not occupy the BE link time;
  // copies and other BE frames share the rest of the link, one at a time.
  // Around each TT departure the switch is always offered the link so its
  // TT frame leaves on time; a copy taken then while the link is busy waits
  // in the transmitter for the frame on the wire.
  longint busy_until [3];
  longint next_be [3];
  int     be_cnt [3];
  bit     serve_be_next [3];
  bit     offered_empty [3];
  int     load_mbps = 0;
  int     prio_mode = 0;             // 0: copies first, 1: round robin, 2: other BE first
  bit     unicast = 0;
  int     be_drops = 0;
  frame_t mac_q [3][$];              // switch frames taken, waiting for the gate

  // latency statistics, flow 1..3
  seq_t   last_seq [4];
  longint lat_min [4], lat_max [4];
  int     n_lat [4];
  int     phase = 0;                 // 0: no checks at the sink
  longint jitter_cfg = 0;

  // next TT departure of link l at or after t
  function automatic longint next_dep(input int l, input longint t);
    longint best, off, per, k, d;
    best = 64'h7fffffffffffffff;
    for (int fl = 1; fl <= 3; fl++) begin
      off = sw_tab[l][fl][4]; per = period[fl];
      k = (t > off) ? (t - off + per - 1) / per : 0;
      d = off + k * per;
      if (d < best) best = d;
    end
    return best;
  endfunction

  function automatic bit in_slot(input int l, input longint t);
    return next_dep(l, t - 96) <= t - 32;
  endfunction


  task automatic deliver(input int link, input frame_t f, input longint t_first);
    if (link < 2) send_to(link + 1, f, 0, t_first);
    else begin
      int fl; longint m, lat, tt_lat;
      fl = int'(f.flow_id);
      check(f.seq > last_seq[fl], "order preserved, delivered once");
      last_seq[fl] = f.seq;
      m = longint'(f.seq) - 1;
      lat = t_first - (m * period[fl] + src_off[fl]);
      tt_lat = sw_tab[2][fl][4] - src_off[fl] + LINK;
      if (phase != 0) begin
        if (lat < lat_min[fl]) lat_min[fl] = lat;
        if (lat > lat_max[fl]) lat_max[fl] = lat;
        n_lat[fl]++;
        check(lat <= tt_lat + 200, "latency never above the TT schedule");
        if (lat > tt_lat + 200 && failures < 6)
          $display("  late flow %0d seq %0d copy %0d lat %0d", fl, f.seq, f.iscopy, lat);
      end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < 3; l++) begin
      int p;
      longint t;
      p = out_port[l];
      t = longint'(now);
      // other BE traffic arrives at this link's queue
      if (load_mbps > 0 && (!unicast || l == 0)) begin
        if (t >= next_be[l]) begin
          if (be_cnt[l] < QD) be_cnt[l]++; else be_drops++;
          next_be[l] = next_be[l] + (wire_time(64) * 100) / load_mbps;
        end
      end else next_be[l] = t;
      // the switch's frame, if one was offered and taken
      if (tx_ready[l][p]) begin
        if (tx_valid[l][p]) begin
          frame_t f;
          f = tx_frame[l][p];
          if (!f.iscopy) deliver(l, f, t + LINK);          // reserved slot
          else begin
            serve_be_next[l] = 1;
            if (t < busy_until[l]) mac_q[l].push_back(f);
            else begin
              deliver(l, f, t + LINK);
              busy_until[l] = t + wire_time(int'(f.length));
            end
          end
          offered_empty[l] = 0;
        end else offered_empty[l] = 1;
      end
    end
  end

  always @(negedge clk)
    for (int l = 0; l < 3; l++) begin
      int p;
      longint t;
      bit free;
      p = out_port[l];
      t = longint'(now);
      free = t >= busy_until[l];
      for (int q = 0; q < NP; q++) tx_ready[l][q] = 1'b1;
      tx_ready[l][p] = in_slot(l, t);
      if (free && mac_q[l].size() > 0) begin
        frame_t f;
        f = mac_q[l].pop_front();
        deliver(l, f, t + LINK);
        busy_until[l] = t + wire_time(int'(f.length));
      end else if (free && be_cnt[l] > 0 &&
                   (prio_mode == 2 || offered_empty[l] || (prio_mode == 1 && serve_be_next[l]))) begin
        be_cnt[l]--;
        busy_until[l] = t + wire_time(64);
        serve_be_next[l] = 0;
        offered_empty[l] = 0;
      end else if (free)
        tx_ready[l][p] = 1'b1;
    end

  // ---------------- source ----------------
  seq_t   src_seq [4];
  longint next_send [4];
  always @(posedge clk) if (rst_n) begin
    for (int fl = 1; fl <= 3; fl++) begin
      if (longint'(now) >= next_send[fl]) begin
        frame_t f;
        f = '0;
        src_seq[fl] = src_seq[fl] + 1;
        f.flow_id = FLOW_W'(fl); f.seq = src_seq[fl]; f.length = LEN_W'(flen[fl]);
        send_to(0, f, 4, next_send[fl] + LINK);
        next_send[fl] = next_send[fl] + period[fl];
      end
    end
  end

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

  task automatic run_for(input longint d);
    longint t;
    t = longint'(now) + d;
    while (longint'(now) < t) @(negedge clk);
  endtask

  // one load point: settle, then measure two longest periods
  task automatic point(input string name, input int load);
    load_mbps = load;
    phase = 0;
    run_for(HP / 2);
    for (int fl = 0; fl < 4; fl++) begin lat_min[fl] = 64'h7fffffff; lat_max[fl] = 0; n_lat[fl] = 0; end
    phase = 1;
    run_for(2 * HP);
    phase = 0;
    $display("%-10s load %3d Mbit/s  latency ns: 128B %6d..%6d  256B %6d..%6d  512B %6d..%6d",
             name, load, lat_min[1], lat_max[1], lat_min[2], lat_max[2], lat_min[3], lat_max[3]);
    for (int fl = 1; fl <= 3; fl++) check(n_lat[fl] > 0, "frames delivered at this load");
  endtask

  initial begin
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int loads [5] = '{0, 30, 60, 90, 100};
  longint tt_lat1;

  initial begin
    now = 0;
    for (int s = 0; s < 3; s++) begin
      swa_en[s] = 1; cfg_we[s] = 0; cfg_flow[s] = '0; cfg_row[s] = '0;
      cfg_filter_en[s] = 0; cfg_jitter[s] = '0; rx_valid[s] = 0; rx_frame[s] = '0; took[s] = 0;
    end
    for (int l = 0; l < 3; l++) begin
      busy_until[l] = 0; next_be[l] = 0; be_cnt[l] = 0; serve_be_next[l] = 0; offered_empty[l] = 0;
      for (int q = 0; q < NP; q++) tx_ready[l][q] = 1'b0;
    end
    for (int fl = 0; fl < 4; fl++) begin
      last_seq[fl] = 0; src_seq[fl] = 0; next_send[fl] = src_off[fl];
    end
    tt_lat1 = sw_tab[2][1][4] - src_off[1] + LINK;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 3; s++) configure(s, 64'd1 << 40);
    $display("TT schedule latency of the 128-byte flow: %0d ns", tt_lat1);

    // Scenario One: copies above other BE traffic, broadcast
    prio_mode = 0; unicast = 0;
    foreach (loads[i]) begin
      point("one", loads[i]);
      check(lat_max[1] < tt_lat1 - 10000, "high-priority copies keep latency low at any load");
      check(lat_max[1] - lat_min[1] <= 3 * wire_time(64) + 2000, "other traffic delays a copy by at most one frame per hop");
    end

    // Scenario Two: same priority (round robin with other BE traffic), broadcast
    prio_mode = 1;
    foreach (loads[i]) begin
      point("two", loads[i]);
      check(lat_max[1] < tt_lat1, "same priority: copies still arrive first");
    end

    // Upper bound when copies are lost: other BE traffic always served first
    prio_mode = 2;
    begin
      int lost_before;
      lost_before = stats[0].egress_drops + stats[1].egress_drops + stats[2].egress_drops +
                    stats[1].seq_drops + stats[2].seq_drops + stats[2].filter_drops;
      foreach (loads[i]) point("two-BE1st", loads[i]);
      check(stats[0].egress_drops + stats[1].egress_drops + stats[2].egress_drops +
            stats[1].seq_drops + stats[2].seq_drops + stats[2].filter_drops > lost_before + 50,
            "congested links delay and drop copies");
      check(lat_max[1] >= tt_lat1 - 200, "at full load latency falls back to the TT schedule");
    end
    prio_mode = 1;

    // Scenario Three: same priority, unicast over TTS-1 -> TTS-2 only
    unicast = 1;
    foreach (loads[i]) begin
      point("three", loads[i]);
      check(lat_max[1] < tt_lat1 - 10000, "congestion on one link: next switch restores the gain");
    end

    // Scenario Four: as Two, jitter bound 10 us at TTS-3
    unicast = 0;
    jitter_cfg = 10000;
    configure(2, jitter_cfg);
    foreach (loads[i]) begin
      point("four", loads[i]);
      for (int fl = 1; fl <= 3; fl++)
        check(lat_max[fl] - lat_min[fl] <= jitter_cfg + 2 * STEP, "jitter within the configured bound");
    end

    $display("copies lost at full port queues: %0d/%0d/%0d, stale frames filtered at TTS-3: %0d, other BE frames dropped: %0d",
             stats[0].egress_drops, stats[1].egress_drops, stats[2].egress_drops, stats[2].filter_drops, be_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Shared body of the end-to-end testbenches of bss2_multichip. The including
// module declares N (number of nodes) and NSPK (spikes per sender and rate)
// and instantiates the top as `dut` with these signals.
//
// Every node's transceiver is connected to its Aggregator link through two
// link models (37-cycle latency, clock-compensation pauses). Phases:
//  1. tables and routes are written;
//  2. all nodes run a synchronisation barrier, arriving at different times;
//     all must be released in the same system clock cycle;
//  3. 3:1 fan-in, nodes 1..3 sending regular spike trains to node 0 at three
//     rates; every spike must arrive with the right label, in order, with the
//     current system time, and the latency distribution is reported;
//  4. random all-to-all traffic with disabled table entries and a closed
//     route; delivery must match the model exactly;
//  5. flood: nodes 1..3 send full beats every cycle to node 0; the tap FIFOs
//     and the Aggregator FIFOs must overflow, and nothing unexpected arrives;
//  6. a barrier that only node 0 joins must end in the Aggregator timeout.
// Each mechanism is counted; one that never happened counts as a failure.

  import bss2_mc_pkg::*;
  localparam int TW = 43;
  logic                      sys_clk = 0, sys_rst_n = 0, glb_clk = 0, glb_rst_n = 0;
  logic [N-1:0]              mgt_clk = '0, mgt_rst_n = '0;
  l2_beat_t [N-1:0]          l2_tap, l2_out;
  logic [N-1:0]              l2_out_valid, l2_out_ready, barrier_valid, barrier_done, systime_load;
  logic [N-1:0][TW-1:0]      systime_load_value, systime;
  logic [N-1:0][15:0]        node_tx_drop_cnt, node_rx_drop_cnt, agg_drop_cnt;
  logic [N-1:0]              tx_lut_we, rx_lut_we;
  logic [N-1:0][15:0]        tx_lut_addr, tx_lut_data;
  logic [N-1:0][14:0]        rx_lut_addr;
  logic [N-1:0][16:0]        rx_lut_data;
  link_word_t [N-1:0]        node_mgt_tx_data, node_mgt_rx_data, agg_rx_data, agg_tx_data;
  logic [N-1:0]              node_mgt_tx_valid, node_mgt_tx_ready, node_mgt_rx_valid;
  logic [N-1:0]              agg_rx_valid, agg_tx_valid, agg_tx_ready;
  logic [N-1:0][N-1:0]       route_en;
  logic [N-1:0]              sync_participate, sync_pending;
  logic [15:0]               sync_timeout, sync_refractory;
  logic                      sync_signal, sync_timeout_pulse;
  int unsigned               up_pauses[N], down_pauses[N];
  int checks = 0, failures = 0;

  always #4 sys_clk = ~sys_clk;     // 125 MHz system clock
  always #2 glb_clk = ~glb_clk;     // Aggregator global clock
  for (genvar i = 0; i < N; i++) begin : g_clk
    initial begin
      #(0.1 + 0.3 * i) forever #2 mgt_clk[i] = ~mgt_clk[i];
    end
    mgt_link_model #(.LATENCY(37), .CC_PERIOD(2500), .CC_LEN(2)) u_up (
      .clk(mgt_clk[i]), .rst_n(mgt_rst_n[i]),
      .tx_data(node_mgt_tx_data[i]), .tx_valid(node_mgt_tx_valid[i]), .tx_ready(node_mgt_tx_ready[i]),
      .rx_data(agg_rx_data[i]), .rx_valid(agg_rx_valid[i]), .pauses(up_pauses[i]));
    mgt_link_model #(.LATENCY(37), .CC_PERIOD(2500), .CC_LEN(2)) u_down (
      .clk(mgt_clk[i]), .rst_n(mgt_rst_n[i]),
      .tx_data(agg_tx_data[i]), .tx_valid(agg_tx_valid[i]), .tx_ready(agg_tx_ready[i]),
      .rx_data(node_mgt_rx_data[i]), .rx_valid(node_mgt_rx_valid[i]), .pauses(down_pauses[i]));
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ---------------- independent model of the mapping ----------------
  function automatic bit tx_en(input int i, input logic [10:0] l);  return (int'(l) % 13) != 7; endfunction
  function automatic logic [14:0] tx_map(input int i, input logic [10:0] l); return {4'(i), l}; endfunction
  function automatic bit rx_en(input int j, input logic [14:0] x);  return (int'(x[10:0]) % 17) != 5; endfunction
  function automatic logic [15:0] rx_map(input int j, input logic [14:0] x); return {1'(j), x} ^ 16'h2468; endfunction
  function automatic logic [15:0] asic_label(input logic [10:0] l); return {5'h15, l}; endfunction

  longint cyc = 0;
  always @(posedge sys_clk) cyc <= cyc + 1;

  // expected arrivals per destination: key = output label, value = send cycles
  longint pend [N][logic [15:0]][$];
  int npend = 0, delivered = 0, unexpected = 0, ts_bad = 0, packed_beats = 0;
  longint lat_min, lat_max, lat_sum; int lat_n;
  bit measuring = 0;

  task automatic lat_reset(); lat_min = 1 << 30; lat_max = 0; lat_sum = 0; lat_n = 0; endtask

  // sender side: record expected arrivals for each tapped event
  task automatic expect_event(input int i, input logic [10:0] l, input longint t);
    if (!tx_en(i, l)) return;
    for (int j = 0; j < N; j++) begin
      logic [14:0] x; x = tx_map(i, l);
      if (route_en[i][j] && rx_en(j, x)) begin
        pend[j][rx_map(j, x)].push_back(t);
        npend++;
      end
    end
  endtask

  always @(posedge sys_clk) if (sys_rst_n) begin
    for (int j = 0; j < N; j++) if (l2_out_valid[j] && l2_out_ready[j]) begin
      int n; n = 0;
      for (int k = 0; k < 3; k++) if (l2_out[j][k].valid) begin
        logic [15:0] lab; lab = l2_out[j][k].label; n++;
        if (l2_out[j][k].ts != systime[j][7:0]) ts_bad++;
        if (pend[j].exists(lab) && pend[j][lab].size() > 0) begin
          longint lt; lt = cyc - pend[j][lab].pop_front();
          npend--; delivered++;
          if (measuring) begin
            lat_n++; lat_sum += lt;
            if (lt < lat_min) lat_min = lt;
            if (lt > lat_max) lat_max = lt;
          end
        end else unexpected++;
      end
      if (n > 1) packed_beats++;
    end
  end

  // sender drive: per node a number of events to put into the next beat
  int want[N];
  int seqn[N];
  always @(negedge sys_clk) begin
    for (int i = 0; i < N; i++) begin
      l2_tap[i] <= '0;
      for (int k = 0; k < 3; k++) if (k < want[i]) begin
        logic [10:0] l; l = 11'(seqn[i] + k);
        l2_tap[i][k].valid <= 1'b1;
        l2_tap[i][k].label <= asic_label(l);
        l2_tap[i][k].ts    <= 8'(cyc);
      end
    end
  end
  // bookkeeping at the sampling edge; outside the flood phase no beat may be
  // dropped at the tap, which is checked through the drop counters
  always @(posedge sys_clk) if (sys_rst_n) begin
    for (int i = 0; i < N; i++) if (l2_tap[i][0].valid) begin
      for (int k = 0; k < 3; k++) if (l2_tap[i][k].valid) expect_event(i, l2_tap[i][k].label[10:0], cyc);
      seqn[i] <= seqn[i] + want[i];
    end
  end

  // ---------------- barrier monitor ----------------
  longint done_cycle[N];
  always @(posedge sys_clk) for (int i = 0; i < N; i++) if (barrier_done[i]) begin
    done_cycle[i] = cyc; barrier_valid[i] <= 1'b0;
  end

  int m_barrier = 0, m_timeout = 0, m_fanin = 0, m_tx_disabled = 0, m_rx_disabled = 0,
      m_route_closed = 0, m_tap_drop = 0, m_agg_drop = 0, m_pack = 0, m_ccpause = 0;

  initial begin : watchdog
    #(WATCHDOG_US * 1us); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wait_sys(input int n); repeat (n) @(posedge sys_clk); endtask

  task automatic drain_and_check(input string what);
    int t; t = 0;
    while (npend > 0 && t < 20000) begin @(posedge sys_clk); t++; end
    chk(npend == 0, $sformatf("%s: %0d spikes missing", what, npend));
    if (npend > 0) for (int j = 0; j < N; j++) foreach (pend[j][k]) if (pend[j][k].size()) $display("  missing at node %0d: label %h sent in cycle %0d", j, k, pend[j][k][0]);
    chk(unexpected == 0, $sformatf("%s: %0d unexpected spikes", what, unexpected));
  endtask

  task automatic clear_pending();
    for (int j = 0; j < N; j++) pend[j].delete();
    npend = 0; unexpected = 0;
  endtask

  int rate_p [3] = '{12, 4, 2};    // one event every P system cycles per sender

  initial begin : main
    longint t0; int d0, d1;
    l2_out_ready = '1; barrier_valid = '0; systime_load = '0; systime_load_value = '0;
    tx_lut_we = '0; rx_lut_we = '0; tx_lut_addr = '0; tx_lut_data = '0; rx_lut_addr = '0; rx_lut_data = '0;
    for (int i = 0; i < N; i++) begin want[i] = 0; seqn[i] = 0; done_cycle[i] = -1; end
    // all-to-all except self, one route closed
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) route_en[i][j] = (i != j);
    route_en[2][1] = 1'b0;
    sync_participate = '1; sync_timeout = 16'd4000; sync_refractory = 16'd100;
    #30 sys_rst_n = 1; glb_rst_n = 1; mgt_rst_n = '1;

    // ---- 1. tables: tx for the 2048 local labels, rx for every node's link labels
    for (int a = 0; a < 2048; a++) begin
      @(negedge mgt_clk[0]);
      for (int i = 0; i < N; i++) begin
        tx_lut_we[i] = 1; tx_lut_addr[i] = asic_label(11'(a));
        tx_lut_data[i] = {tx_en(i, 11'(a)), tx_map(i, 11'(a))};
      end
    end
    @(negedge mgt_clk[0]);
    for (int i = 0; i < N; i++) tx_lut_we[i] = 0;
    for (int s = 0; s < N; s++) for (int a = 0; a < 2048; a++) begin
      @(negedge mgt_clk[0]);
      for (int j = 0; j < N; j++) begin
        logic [14:0] x; x = tx_map(s, 11'(a));
        rx_lut_we[j] = 1; rx_lut_addr[j] = x; rx_lut_data[j] = {rx_en(j, x), rx_map(j, x)};
      end
    end
    @(negedge mgt_clk[0]); rx_lut_we = '0;
    wait_sys(20);

    // ---- 2. barrier, nodes arriving at different times
    for (int i = 0; i < N; i++) begin
      @(negedge sys_clk); barrier_valid[i] = 1'b1; wait_sys($urandom_range(1, 30));
    end
    wait_sys(400);
    chk(barrier_valid == '0, "all barriers released");
    d0 = 0;
    for (int i = 1; i < N; i++) if (done_cycle[i] != done_cycle[0]) d0++;
    chk(d0 == 0 && done_cycle[0] > 0, "all nodes released in the same system clock cycle");
    if (d0 == 0 && done_cycle[0] > 0) m_barrier++;

    // ---- 3. 3:1 fan-in at three regular rates
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) route_en[i][j] = (j == 0 && i >= 1 && i <= 3);
    wait_sys(10);
    foreach (rate_p[r]) begin
      lat_reset(); measuring = 1;
      for (int n = 0; n < NSPK * rate_p[r]; n++) begin
        @(negedge sys_clk);
        for (int i = 1; i <= 3; i++) want[i] = ((n + i) % rate_p[r] == 0) ? 1 : 0;
      end
      @(negedge sys_clk); for (int i = 0; i < N; i++) want[i] = 0;
      drain_and_check($sformatf("fan-in P=%0d", rate_p[r]));
      measuring = 0;
      $display("3:1 fan-in, receiver rate %0d MHz: %0d spikes, latency min %0d mean %0d max %0d system cycles",
               375 / rate_p[r], lat_n, lat_min, lat_sum / (lat_n ? lat_n : 1), lat_max);
      chk(lat_n > 0, "spikes measured");
      if (r == 0) chk(lat_max - lat_min <= 4, $sformatf("low-rate latency spread %0d cycles", lat_max - lat_min));
      m_fanin++;
      wait_sys(50);
    end
    chk(ts_bad == 0, "timestamps are the current system time");

    // ---- 4. random all-to-all with disabled entries and a closed route
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) route_en[i][j] = (i != j);
    route_en[2][1] = 1'b0; m_route_closed++;
    wait_sys(10);
    d0 = delivered;
    for (int n = 0; n < 1500; n++) begin
      @(negedge sys_clk);
      for (int i = 0; i < N; i++) want[i] = ($urandom_range(0, 8 * N) == 0) ? $urandom_range(1, 3) : 0;
    end
    @(negedge sys_clk); for (int i = 0; i < N; i++) want[i] = 0;
    drain_and_check("all-to-all");
    for (int a = 0; a < 2048; a++) begin
      if (!tx_en(0, 11'(a))) m_tx_disabled++;
      if (!rx_en(0, 15'(a))) m_rx_disabled++;
    end
    m_pack = packed_beats;
    for (int i = 0; i < N; i++) chk(node_rx_drop_cnt[i] == 0, "no receive-side drops");
    for (int i = 0; i < N; i++) chk(node_tx_drop_cnt[i] == 0 && agg_drop_cnt[i] == 0, "no drops before the flood");
    $display("all-to-all: %0d spikes delivered, %0d packed beats", delivered - d0, packed_beats);

    // ---- 5. flood
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) route_en[i][j] = (j == 0 && i >= 1 && i <= 3);
    wait_sys(10);
    d0 = 0; for (int i = 0; i < N; i++) d0 += agg_drop_cnt[i];
    d1 = 0; for (int i = 0; i < N; i++) d1 += node_tx_drop_cnt[i];
    for (int n = 0; n < 600; n++) begin
      @(negedge sys_clk);
      for (int i = 1; i <= 3; i++) want[i] = 3;
    end
    @(negedge sys_clk); for (int i = 0; i < N; i++) want[i] = 0;
    wait_sys(1000);
    begin
      int a, t; a = 0; t = 0;
      for (int i = 0; i < N; i++) begin a += agg_drop_cnt[i]; t += node_tx_drop_cnt[i]; end
      $display("flood: tap drops %0d, aggregator drops %0d", t - d1, a - d0);
      chk(t - d1 > 0, "tap FIFO overflow under flood"); if (t - d1 > 0) m_tap_drop++;
      chk(a - d0 > 0, "aggregator FIFO overflow under flood"); if (a - d0 > 0) m_agg_drop++;
    end
    chk(unexpected == 0, "flood: nothing unexpected");
    clear_pending();

    // ---- 6. barrier timeout: only node 0 joins
    @(negedge sys_clk); barrier_valid[0] = 1'b1;
    t0 = cyc;
    while (!sync_timeout_pulse && cyc - t0 < 10000) @(posedge glb_clk);
    chk(sync_timeout_pulse, "sync timeout fired");
    if (sync_timeout_pulse) m_timeout++;
    wait_sys(10);
    chk(barrier_valid[0] && sync_pending == '0, "node 0 still waiting, collected set cleared");

    for (int i = 0; i < N; i++) m_ccpause += up_pauses[i] + down_pauses[i];

    $display("mechanisms: barrier %0d timeout %0d fan-in %0d tx-disabled %0d rx-disabled %0d closed-route %0d tap-drop %0d agg-drop %0d packed %0d cc-pauses %0d",
             m_barrier, m_timeout, m_fanin, m_tx_disabled, m_rx_disabled, m_route_closed, m_tap_drop, m_agg_drop, m_pack, m_ccpause);
    chk(m_barrier > 0, "mechanism: synchronisation barrier");
    chk(m_timeout > 0, "mechanism: sync timeout");
    chk(m_fanin > 0, "mechanism: 3:1 fan-in arbitration");
    chk(m_tx_disabled > 0 && m_rx_disabled > 0, "mechanism: lookup enables");
    chk(m_route_closed > 0, "mechanism: closed route");
    chk(m_tap_drop > 0, "mechanism: tap overflow");
    chk(m_agg_drop > 0, "mechanism: aggregator overflow");
    chk(m_pack > 0, "mechanism: packing");
    chk(m_ccpause > 0, "mechanism: clock-compensation pause");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

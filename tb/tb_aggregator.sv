// Testbench for the aggregator with four links. Phase 1: random route
// enables and random spike traffic; every destination must receive exactly
// the spikes of the sources routed to it, each source's spikes in order, and
// nothing from a disabled route. Phase 2: 3:1 fan-in at full rate into one
// destination; its rx spike FIFOs overflow, and received plus dropped spikes
// must equal those sent. Phase 3: sync-request commands from the three
// participants toggle the sync signal; commands never reach a destination.
module tb_aggregator;
  import bss2_mc_pkg::*;
  localparam int N = 4;
  logic glb_clk = 0, glb_rst_n = 0;
  logic [N-1:0] link_clk = '0, link_rst_n = '0;
  link_word_t [N-1:0] rx_data, tx_data;
  logic [N-1:0] rx_valid, tx_valid, tx_ready;
  logic [N-1:0][N-1:0] route_en;
  logic [N-1:0] sync_participate, sync_pending;
  logic [15:0] sync_timeout, sync_refractory;
  logic sync_signal, sync_timeout_pulse;
  logic [N-1:0][15:0] drop_cnt;
  int checks = 0, failures = 0;

  always #2 glb_clk = ~glb_clk;
  initial begin
    #0.7 forever #2 link_clk[0] = ~link_clk[0];
  end
  initial begin
    #1.3 forever #2 link_clk[1] = ~link_clk[1];
  end
  initial begin
    #0.4 forever #2 link_clk[2] = ~link_clk[2];
  end
  initial begin
    #1.9 forever #2 link_clk[3] = ~link_clk[3];
  end

  aggregator #(.N(N)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #400us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // spike label = {src[1:0], seq[12:0]}
  int seq[N];
  int last_seq[N][N];      // [dst][src]
  int received[N][N];
  int sent_routed[N][N];
  int cmd_leaks = 0;

  for (genvar d = 0; d < N; d++) begin : g_mon
    always @(posedge link_clk[d]) if (link_rst_n[d] && tx_valid[d] && tx_ready[d]) begin
      int s, q;
      if (tx_data[d][15]) cmd_leaks++;
      s = int'(tx_data[d][14:13]); q = int'(tx_data[d][12:0]);
      chk(route_en[s][d], $sformatf("spike from %0d at %0d without route", s, d));
      chk(q > last_seq[d][s], $sformatf("order %0d->%0d", s, d));
      last_seq[d][s] = q;
      received[d][s]++;
    end
  end

  bit phase_random, phase_flood, phase_cmd;
  logic [N-1:0] flood_src;
  int cmd_src_go[N];
  for (genvar s = 0; s < N; s++) begin : g_src
    always @(negedge link_clk[s]) begin
      rx_valid[s] <= 1'b0;
      tx_ready[s] <= ($urandom_range(0, 99) != 0);
      if (cmd_src_go[s] > 0) begin
        rx_valid[s] <= 1'b1; rx_data[s] <= make_cmd_word(CMD_SYNC_REQ); cmd_src_go[s] <= 0;
      end else if ((phase_random && $urandom_range(0, 5) == 0) || (phase_flood && flood_src[s])) begin
        rx_valid[s] <= 1'b1;
        rx_data[s]  <= make_spike_word({2'(s), 13'(seq[s])});
        seq[s] <= seq[s] + 1;
        for (int d = 0; d < N; d++) if (route_en[s][d]) sent_routed[d][s]++;
      end
    end
  end

  int tot_recv, tot_sent, tot_drop, s0;
  int drop0[N];
  initial begin
    rx_valid = '0; rx_data = '0; tx_ready = '1;
    phase_random = 0; phase_flood = 0; flood_src = '0;
    for (int i = 0; i < N; i++) begin
      seq[i] = 1; cmd_src_go[i] = 0;
      for (int j = 0; j < N; j++) begin last_seq[i][j] = 0; received[i][j] = 0; sent_routed[i][j] = 0; end
    end
    route_en = '0;
    for (int s = 0; s < N; s++) for (int d = 0; d < N; d++) route_en[s][d] = ($urandom_range(0, 2) != 0);
    route_en[0][1] = 1'b0;   // one route certainly closed
    sync_participate = 4'b1011; sync_timeout = 16'd1000; sync_refractory = 16'd10;
    #20 glb_rst_n = 1; link_rst_n = '1;
    repeat (5) @(posedge glb_clk);
    // phase 1
    phase_random = 1;
    repeat (4000) @(posedge glb_clk);
    phase_random = 0;
    repeat (200) @(posedge glb_clk);
    for (int d = 0; d < N; d++) for (int s = 0; s < N; s++)
      chk(received[d][s] == sent_routed[d][s],
          $sformatf("route %0d->%0d: got %0d of %0d", s, d, received[d][s], sent_routed[d][s]));
    chk(received[1][0] == 0, "closed route carries nothing");
    for (int s = 0; s < N; s++) chk(drop_cnt[s] == 0, "no drops at one sixth load");
    // phase 2: sources 0,1,2 -> destination 3 only
    for (int s = 0; s < N; s++) for (int d = 0; d < N; d++) route_en[s][d] = (d == 3 && s != 3);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin received[i][j] = 0; sent_routed[i][j] = 0; end
    for (int s = 0; s < N; s++) drop0[s] = drop_cnt[s];
    flood_src = 4'b0111; phase_flood = 1;
    repeat (2000) @(posedge glb_clk);
    phase_flood = 0;
    repeat (300) @(posedge glb_clk);
    tot_recv = 0; tot_sent = 0; tot_drop = 0;
    for (int s = 0; s < 3; s++) begin tot_recv += received[3][s]; tot_sent += sent_routed[3][s]; tot_drop += drop_cnt[s] - drop0[s]; end
    $display("3:1 fan-in: sent %0d received %0d dropped %0d", tot_sent, tot_recv, tot_drop);
    chk(tot_drop > 0, "congestion drops at 3:1 fan-in");
    chk(tot_recv + tot_drop == tot_sent, "received + dropped == sent");
    chk(tot_recv > 1900 && tot_recv <= 2300, "destination link runs near one spike per cycle");
    for (int s = 0; s < 3; s++) chk(received[3][s] > 550, $sformatf("fair share for source %0d", s));
    // phase 3: sync
    s0 = sync_signal;
    cmd_src_go[0] = 1; repeat (20) @(posedge glb_clk);
    cmd_src_go[3] = 1; repeat (20) @(posedge glb_clk);
    chk(sync_signal == s0, "not all participants yet");
    cmd_src_go[2] = 1; repeat (20) @(posedge glb_clk);
    chk(sync_signal == s0, "node 2 does not participate");
    cmd_src_go[1] = 1; repeat (20) @(posedge glb_clk);
    chk(sync_signal != s0, "sync signal toggled");
    chk(cmd_leaks == 0, "commands are stripped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

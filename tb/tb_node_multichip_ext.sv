// Testbench for node_multichip_ext in loopback: its transceiver output is fed
// back to its own receiver through a link model. Spikes tapped from the
// layer-2 stream must come back as rx_map(tx_map(label)) when both lookup
// entries are enabled, and not at all otherwise, in order, with the low
// system-time bits as timestamp. A barrier request must appear as one
// command word on the link and must not come back as a spike. A flood of
// full beats (375 M events/s against 250 M/s) must overflow the tap FIFO and
// be counted; every beat not dropped must be delivered.
module tb_node_multichip_ext;
  import bss2_mc_pkg::*;
  logic sys_clk = 0, mgt_clk = 0, sys_rst_n = 0, mgt_rst_n = 0;
  l2_beat_t l2_tap, l2_out;
  logic l2_out_valid, l2_out_ready;
  logic [7:0] systime;
  logic sync_req_toggle;
  logic [15:0] tx_drop_cnt, rx_drop_cnt;
  link_word_t mgt_tx_data, mgt_rx_data;
  logic mgt_tx_valid, mgt_tx_ready, mgt_rx_valid;
  logic tx_lut_we, rx_lut_we;
  logic [15:0] tx_lut_addr; logic [15:0] tx_lut_data;
  logic [14:0] rx_lut_addr; logic [16:0] rx_lut_data;
  int unsigned pauses;
  int checks = 0, failures = 0;

  always #4 sys_clk = ~sys_clk;   // 125 MHz
  always #2 mgt_clk = ~mgt_clk;   // 250 MHz

  node_multichip_ext dut (.*);

  mgt_link_model #(.LATENCY(37), .CC_PERIOD(300), .CC_LEN(2)) u_link (
    .clk(mgt_clk), .rst_n(mgt_rst_n), .tx_data(mgt_tx_data), .tx_valid(mgt_tx_valid),
    .tx_ready(mgt_tx_ready), .rx_data(mgt_rx_data), .rx_valid(mgt_rx_valid), .pauses(pauses));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #400us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // independent mapping functions
  function automatic bit tx_en(input logic [15:0] l); return l[2:0] != 3'd5; endfunction
  function automatic logic [14:0] tx_map(input logic [15:0] l); return 15'((l * 7 + 3) & 16'h7fff); endfunction
  function automatic bit rx_en(input logic [14:0] x); return x[1:0] != 2'd2; endfunction
  function automatic logic [15:0] rx_map(input logic [14:0] x); return {1'b1, x} ^ 16'h5a5a; endfunction

  logic [15:0] labels[64];
  asic_label_t exp_q[$];
  int delivered = 0, cmds_seen = 0, spikes_on_link = 0, packed_beats = 0;

  // system time
  always @(posedge sys_clk) systime <= systime + 8'd1;

  // expected stream: events of every accepted beat that are enabled both ways
  always @(posedge sys_clk) if (sys_rst_n) begin
    bit any; any = 0;
    for (int i = 0; i < 3; i++) any |= l2_tap[i].valid;
    if (any && !dut.tap_full)
      for (int i = 0; i < 3; i++)
        if (l2_tap[i].valid && tx_en(l2_tap[i].label) && rx_en(tx_map(l2_tap[i].label)))
          exp_q.push_back(rx_map(tx_map(l2_tap[i].label)));
  end

  // receiver side of the layer-2 link
  always @(posedge sys_clk) if (sys_rst_n && l2_out_valid && l2_out_ready) begin
    int n; n = 0;
    for (int i = 0; i < 3; i++) if (l2_out[i].valid) begin
      n++;
      chk(exp_q.size() > 0 && l2_out[i].label == exp_q[0],
          $sformatf("label %h exp %h", l2_out[i].label, exp_q.size() ? exp_q[0] : 0));
      chk(l2_out[i].ts == systime, "timestamp is the current system time");
      if (exp_q.size()) void'(exp_q.pop_front());
      delivered++;
    end
    if (n > 1) packed_beats++;
  end

  always @(posedge mgt_clk) if (mgt_rst_n && mgt_tx_valid && mgt_tx_ready) begin
    if (mgt_tx_data[15]) begin cmds_seen++; chk(mgt_tx_data[14:0] == CMD_SYNC_REQ, "sync request code"); end
    else spikes_on_link++;
  end

  task automatic send_beat(input int nev);
    for (int i = 0; i < 3; i++) begin
      l2_tap[i].valid = (i < nev);
      l2_tap[i].label = labels[$urandom_range(0, 63)];
      l2_tap[i].ts    = 8'($urandom);
    end
  endtask

  int t_lat, t_start, d0;
  initial begin
    l2_tap = '0; l2_out_ready = 1; systime = 0; sync_req_toggle = 0;
    tx_lut_we = 0; rx_lut_we = 0; tx_lut_addr = 0; tx_lut_data = 0; rx_lut_addr = 0; rx_lut_data = 0;
    for (int i = 0; i < 64; i++) labels[i] = 16'($urandom);
    labels[0] = 16'h0010;   // tx enabled, rx enabled (tx_map = 0x0073)
    #20 sys_rst_n = 1; mgt_rst_n = 1;
    // program both tables for the label set and its images
    for (int i = 0; i < 64; i++) begin
      @(negedge mgt_clk);
      tx_lut_we = 1; tx_lut_addr = labels[i]; tx_lut_data = {tx_en(labels[i]), tx_map(labels[i])};
      rx_lut_we = 1; rx_lut_addr = tx_map(labels[i]);
      rx_lut_data = {rx_en(tx_map(labels[i])), rx_map(tx_map(labels[i]))};
    end
    @(negedge mgt_clk); tx_lut_we = 0; rx_lut_we = 0;
    repeat (10) @(negedge sys_clk);

    // single-event latency
    l2_tap[0].valid = 1; l2_tap[0].label = labels[0]; l2_tap[0].ts = 0;
    @(negedge sys_clk); l2_tap = '0; t_lat = 1;
    while (!l2_out_valid && t_lat < 200) begin @(negedge sys_clk); t_lat++; end
    // budget: link 37 mgt cycles (18.5 sys) + two CDC FIFOs and about 10 pipeline stages
    $display("node loopback latency: %0d system clock cycles", t_lat);
    chk(t_lat >= 19 && t_lat <= 40, $sformatf("loopback latency %0d sys cycles", t_lat));
    repeat (5) @(negedge sys_clk);

    // barrier request
    sync_req_toggle = 1;
    repeat (60) @(negedge sys_clk);
    chk(cmds_seen == 1, $sformatf("one command on the link (%0d)", cmds_seen));

    // moderate random traffic: at most 2 events per sys cycle on average below 250 M/s
    repeat (3000) begin
      send_beat($urandom_range(0, 3) == 0 ? $urandom_range(1, 3) : 0);
      @(negedge sys_clk);
    end
    l2_tap = '0;
    repeat (100) @(negedge sys_clk);
    chk(tx_drop_cnt == 0, "no drops at moderate load");

    // flood: a full beat every cycle
    repeat (400) begin send_beat(3); @(negedge sys_clk); end
    l2_tap = '0;
    repeat (200) @(negedge sys_clk);
    $display("tap overflow drops: %0d, delivered %0d, packed beats %0d, link pauses %0d",
             tx_drop_cnt, delivered, packed_beats, pauses);
    chk(tx_drop_cnt > 0, "tap FIFO overflows under a flood");
    chk(rx_drop_cnt == 0, "receive side keeps up");
    chk(exp_q.size() == 0, $sformatf("all accepted events delivered (%0d left)", exp_q.size()));
    chk(packed_beats > 0, "receive packer fills beats");
    chk(pauses > 0, "clock-compensation pauses happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

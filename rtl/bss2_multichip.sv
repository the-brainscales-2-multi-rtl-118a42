// One backplane of the BrainScaleS-2 multi-chip system: N Node-FPGAs, each
// with its multi-chip extension, synchronisation barrier and system timer,
// star-connected to one Aggregator.
//
// Spikes leaving BSS-2 chip i on its layer-2 link are tapped by node i, mapped
// and sent over node i's transceiver to the Aggregator, broadcast there to
// every destination whose route is enabled, and mapped, packed and
// time-stamped by the destination node for its own layer-2 link. The
// transceivers themselves (8b10b, 5 Gbit/s) are vendor hard IP and stay
// outside: node_mgt_tx_* must be carried to agg_rx_* and agg_tx_* to
// node_mgt_rx_* by the transceiver pairs. The Aggregator's sync signal is
// wired to every node's barrier, as the IO boards route it on the real system.
// All nodes share one system clock, as they derive it from a common
// reference clock. Each node has a transceiver clock and so does each
// Aggregator link; the Aggregator also has a global clock.
module bss2_multichip
  import bss2_mc_pkg::*;
#(
  parameter int unsigned N          = 12,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned TIME_W     = 43
) (
  input  logic                       sys_clk,
  input  logic                       sys_rst_n,
  input  logic [N-1:0]               node_mgt_clk,
  input  logic [N-1:0]               node_mgt_rst_n,
  input  logic                       glb_clk,
  input  logic                       glb_rst_n,
  input  logic [N-1:0]               agg_link_clk,
  input  logic [N-1:0]               agg_link_rst_n,
  // layer-2 side of each node (system clock)
  input  l2_beat_t [N-1:0]           l2_tap,
  output l2_beat_t [N-1:0]           l2_out,
  output logic [N-1:0]               l2_out_valid,
  input  logic [N-1:0]               l2_out_ready,
  input  logic [N-1:0]               barrier_valid,
  output logic [N-1:0]               barrier_done,
  input  logic [N-1:0]               systime_load,
  input  logic [N-1:0][TIME_W-1:0]   systime_load_value,
  output logic [N-1:0][TIME_W-1:0]   systime,
  output logic [N-1:0][15:0]         node_tx_drop_cnt,
  // node lookup tables (node transceiver clock)
  input  logic [N-1:0]               tx_lut_we,
  input  logic [N-1:0][ASIC_LABEL_W-1:0] tx_lut_addr,
  input  logic [N-1:0][LINK_LABEL_W:0]   tx_lut_data,
  input  logic [N-1:0]               rx_lut_we,
  input  logic [N-1:0][LINK_LABEL_W-1:0] rx_lut_addr,
  input  logic [N-1:0][ASIC_LABEL_W:0]   rx_lut_data,
  output logic [N-1:0][15:0]         node_rx_drop_cnt,
  // node transceivers
  output link_word_t [N-1:0]         node_mgt_tx_data,
  output logic [N-1:0]               node_mgt_tx_valid,
  input  logic [N-1:0]               node_mgt_tx_ready,
  input  link_word_t [N-1:0]         node_mgt_rx_data,
  input  logic [N-1:0]               node_mgt_rx_valid,
  // Aggregator transceivers
  input  link_word_t [N-1:0]         agg_rx_data,
  input  logic [N-1:0]               agg_rx_valid,
  output link_word_t [N-1:0]         agg_tx_data,
  output logic [N-1:0]               agg_tx_valid,
  input  logic [N-1:0]               agg_tx_ready,
  // Aggregator configuration and status
  input  logic [N-1:0][N-1:0]        route_en,
  input  logic [N-1:0]               sync_participate,
  input  logic [15:0]                sync_timeout,
  input  logic [15:0]                sync_refractory,
  output logic                       sync_signal,
  output logic                       sync_timeout_pulse,
  output logic [N-1:0]               sync_pending,
  output logic [N-1:0][15:0]         agg_drop_cnt
);

  for (genvar i = 0; i < N; i++) begin : g_node
    logic req_toggle;

    systime_counter #(.WIDTH(TIME_W)) u_systime (
      .clk(sys_clk), .rst_n(sys_rst_n), .load(systime_load[i]),
      .load_value(systime_load_value[i]), .time_o(systime[i])
    );

    sync_barrier u_barrier (
      .clk(sys_clk), .rst_n(sys_rst_n), .barrier_valid(barrier_valid[i]),
      .barrier_done(barrier_done[i]), .req_toggle(req_toggle), .sync_signal(sync_signal)
    );

    node_multichip_ext #(.FIFO_DEPTH(FIFO_DEPTH)) u_ext (
      .sys_clk(sys_clk), .sys_rst_n(sys_rst_n),
      .l2_tap(l2_tap[i]), .l2_out(l2_out[i]), .l2_out_valid(l2_out_valid[i]), .l2_out_ready(l2_out_ready[i]),
      .systime(systime[i][TS_W-1:0]), .sync_req_toggle(req_toggle), .tx_drop_cnt(node_tx_drop_cnt[i]),
      .mgt_clk(node_mgt_clk[i]), .mgt_rst_n(node_mgt_rst_n[i]),
      .mgt_tx_data(node_mgt_tx_data[i]), .mgt_tx_valid(node_mgt_tx_valid[i]), .mgt_tx_ready(node_mgt_tx_ready[i]),
      .mgt_rx_data(node_mgt_rx_data[i]), .mgt_rx_valid(node_mgt_rx_valid[i]),
      .tx_lut_we(tx_lut_we[i]), .tx_lut_addr(tx_lut_addr[i]), .tx_lut_data(tx_lut_data[i]),
      .rx_lut_we(rx_lut_we[i]), .rx_lut_addr(rx_lut_addr[i]), .rx_lut_data(rx_lut_data[i]),
      .rx_drop_cnt(node_rx_drop_cnt[i])
    );
  end

  aggregator #(.N(N), .FIFO_DEPTH(FIFO_DEPTH), .CNT_W(16)) u_agg (
    .glb_clk(glb_clk), .glb_rst_n(glb_rst_n), .link_clk(agg_link_clk), .link_rst_n(agg_link_rst_n),
    .rx_data(agg_rx_data), .rx_valid(agg_rx_valid),
    .tx_data(agg_tx_data), .tx_valid(agg_tx_valid), .tx_ready(agg_tx_ready),
    .route_en(route_en), .sync_participate(sync_participate),
    .sync_timeout(sync_timeout), .sync_refractory(sync_refractory),
    .sync_signal(sync_signal), .sync_timeout_pulse(sync_timeout_pulse),
    .sync_pending(sync_pending), .drop_cnt(agg_drop_cnt)
  );

endmodule

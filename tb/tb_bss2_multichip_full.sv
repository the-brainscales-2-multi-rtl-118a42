// Full-size end-to-end testbench of bss2_multichip: all parameters at their
// defaults (12 nodes), 2^15 spikes per fan-in rate as in the latency
// measurement. The test itself is in tb_multichip_body.svh.
module tb_bss2_multichip_full;
  localparam int N = 12;
  localparam int NSPK = 10923;   // 3 x 10923 = 2^15 spikes per rate
  localparam int WATCHDOG_US = 20000;
`include "tb_multichip_body.svh"
  bss2_multichip dut (
    .sys_clk, .sys_rst_n, .node_mgt_clk(mgt_clk), .node_mgt_rst_n(mgt_rst_n),
    .glb_clk, .glb_rst_n, .agg_link_clk(mgt_clk), .agg_link_rst_n(mgt_rst_n),
    .l2_tap, .l2_out, .l2_out_valid, .l2_out_ready, .barrier_valid, .barrier_done,
    .systime_load, .systime_load_value, .systime, .node_tx_drop_cnt,
    .tx_lut_we, .tx_lut_addr, .tx_lut_data, .rx_lut_we, .rx_lut_addr, .rx_lut_data, .node_rx_drop_cnt,
    .node_mgt_tx_data, .node_mgt_tx_valid, .node_mgt_tx_ready, .node_mgt_rx_data, .node_mgt_rx_valid,
    .agg_rx_data, .agg_rx_valid, .agg_tx_data, .agg_tx_valid, .agg_tx_ready,
    .route_en, .sync_participate, .sync_timeout, .sync_refractory,
    .sync_signal, .sync_timeout_pulse, .sync_pending, .agg_drop_cnt);
endmodule

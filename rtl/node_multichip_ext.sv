// Multi-chip extension of a Node-FPGA.
//
// Transmit path (BSS-2 -> Aggregator). The layer-2 stream of neuron output
// spikes (beats of up to three events, 16-bit label and 8-bit timestamp each)
// is tapped in the system clock domain. Timestamps are discarded and the beat
// crosses into the 250 MHz transceiver clock through an asynchronous FIFO.
// The tap cannot stall the layer-2 stream: a beat that finds the FIFO full is
// dropped and counted in tx_drop_cnt. The unpacker turns beats into single
// events, the transmit lookup maps each 16-bit label to a 15-bit link label
// or drops it if the entry's enable is clear, and a FIFO feeds the link
// multiplexer, which sends one 16-bit word per cycle except during the
// transceiver's clock-compensation pauses. A barrier request (req_toggle from
// the system clock domain) is sent as a command word ahead of spikes.
//
// Receive path (Aggregator -> BSS-2). Words from the transceiver are split
// into commands (unused on the node) and spike labels; each label passes the
// 15-bit -> 16-bit receive lookup with its enable bit, enabled labels are
// packed into beats of up to three, and the beats cross into the system clock
// domain. A beat that finds that FIFO full is dropped and counted in
// rx_drop_cnt. On the system side the low eight bits of the system time are
// attached to each event and the beat is offered to the layer-2 link with a
// valid/ready handshake.
//
// The block structure is the paper's; FIFO depths, framing, the flush rule of
// the packer and the drop counters are this design's choice. Lookup tables
// are written in the transceiver clock domain. The command output of the
// receive demultiplexer stays open because a node has no use for commands
// from the Aggregator; lint reports those two signals as unused.
module node_multichip_ext
  import bss2_mc_pkg::*;
#(
  parameter int unsigned LUT_TX_ADDR_W = ASIC_LABEL_W,   // 16 -> 15 (+enable)
  parameter int unsigned LUT_RX_ADDR_W = LINK_LABEL_W,   // 15 -> 16 (+enable)
  parameter int unsigned FIFO_DEPTH    = 16
) (
  // system clock domain
  input  logic        sys_clk,
  input  logic        sys_rst_n,
  input  l2_beat_t    l2_tap,          // tapped layer-2 output beat
  output l2_beat_t    l2_out,          // beat for the layer-2 link towards the ASIC
  output logic        l2_out_valid,
  input  logic        l2_out_ready,
  input  logic [TS_W-1:0] systime,
  input  logic        sync_req_toggle,
  output logic [15:0] tx_drop_cnt,
  // transceiver clock domain
  input  logic        mgt_clk,
  input  logic        mgt_rst_n,
  output link_word_t  mgt_tx_data,
  output logic        mgt_tx_valid,
  input  logic        mgt_tx_ready,
  input  link_word_t  mgt_rx_data,
  input  logic        mgt_rx_valid,
  input  logic        tx_lut_we,
  input  logic [LUT_TX_ADDR_W-1:0] tx_lut_addr,
  input  logic [LINK_LABEL_W:0]    tx_lut_data,    // {enable, link label}
  input  logic        rx_lut_we,
  input  logic [LUT_RX_ADDR_W-1:0] rx_lut_addr,
  input  logic [ASIC_LABEL_W:0]    rx_lut_data,    // {enable, BSS-2 label}
  output logic [15:0] rx_drop_cnt
);
  localparam int unsigned BEAT_W = $bits(beat_t);

  // ------------------------------------------------------------------
  // transmit path
  // ------------------------------------------------------------------
  beat_t tap_beat;
  logic  tap_any, tap_full;

  always_comb begin
    for (int i = 0; i < EVENTS_PER_BEAT; i++) begin
      tap_beat[i].valid = l2_tap[i].valid;
      tap_beat[i].label = l2_tap[i].label;
    end
    tap_any = 1'b0;
    for (int i = 0; i < EVENTS_PER_BEAT; i++) tap_any |= l2_tap[i].valid;
  end

  always_ff @(posedge sys_clk or negedge sys_rst_n) begin
    if (!sys_rst_n)              tx_drop_cnt <= '0;
    else if (tap_any && tap_full) tx_drop_cnt <= tx_drop_cnt + 16'd1;
  end

  logic  txf_empty, txf_rd;
  beat_t txf_beat;

  async_fifo #(.WIDTH(BEAT_W), .DEPTH(FIFO_DEPTH)) u_tx_cdc (
    .wr_clk(sys_clk), .wr_rst_n(sys_rst_n), .wr_en(tap_any), .wr_data(tap_beat), .wr_full(tap_full),
    .rd_clk(mgt_clk), .rd_rst_n(mgt_rst_n), .rd_en(txf_rd), .rd_data(txf_beat), .rd_empty(txf_empty)
  );

  logic        unp_in_ready, unp_valid, unp_ready;
  asic_label_t unp_label;
  assign txf_rd = !txf_empty && unp_in_ready;

  event_unpacker u_unpacker (
    .clk(mgt_clk), .rst_n(mgt_rst_n),
    .in_valid(!txf_empty), .in_ready(unp_in_ready), .in_beat(txf_beat),
    .out_valid(unp_valid), .out_ready(unp_ready), .out_label(unp_label)
  );

  logic        txl_valid, txl_ready;
  link_label_t txl_label;

  address_lut #(.ADDR_W(LUT_TX_ADDR_W), .DATA_W(LINK_LABEL_W)) u_tx_lut (
    .clk(mgt_clk), .rst_n(mgt_rst_n),
    .cfg_we(tx_lut_we), .cfg_addr(tx_lut_addr), .cfg_data(tx_lut_data),
    .in_valid(unp_valid), .in_ready(unp_ready), .in_label(LUT_TX_ADDR_W'(unp_label)),
    .out_valid(txl_valid), .out_ready(txl_ready), .out_label(txl_label)
  );

  logic        spk_valid, spk_ready;
  link_label_t spk_label;

  sync_fifo #(.WIDTH(LINK_LABEL_W), .DEPTH(FIFO_DEPTH)) u_tx_fifo (
    .clk(mgt_clk), .rst_n(mgt_rst_n),
    .in_valid(txl_valid), .in_ready(txl_ready), .in_data(txl_label),
    .out_valid(spk_valid), .out_ready(spk_ready), .out_data(spk_label)
  );

  logic        cmd_valid, cmd_ready;
  link_label_t cmd_data;

  sync_request_gen u_sync_req (
    .mgt_clk(mgt_clk), .mgt_rst_n(mgt_rst_n), .req_toggle(sync_req_toggle),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_data(cmd_data)
  );

  node_link_mux u_mux (
    .clk(mgt_clk), .rst_n(mgt_rst_n),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_data(cmd_data),
    .spk_valid(spk_valid), .spk_ready(spk_ready), .spk_label(spk_label),
    .tx_data(mgt_tx_data), .tx_valid(mgt_tx_valid), .tx_ready(mgt_tx_ready)
  );

  // ------------------------------------------------------------------
  // receive path
  // ------------------------------------------------------------------
  logic        rx_cmd_valid, rx_spk_valid;
  link_label_t rx_cmd_data, rx_spk_label;

  link_demux u_demux (
    .clk(mgt_clk), .rst_n(mgt_rst_n), .rx_data(mgt_rx_data), .rx_valid(mgt_rx_valid),
    .cmd_valid(rx_cmd_valid), .cmd_data(rx_cmd_data),
    .spk_valid(rx_spk_valid), .spk_label(rx_spk_label)
  );

  logic        rxl_valid, rxl_in_ready;
  asic_label_t rxl_label;

  address_lut #(.ADDR_W(LUT_RX_ADDR_W), .DATA_W(ASIC_LABEL_W)) u_rx_lut (
    .clk(mgt_clk), .rst_n(mgt_rst_n),
    .cfg_we(rx_lut_we), .cfg_addr(rx_lut_addr), .cfg_data(rx_lut_data),
    .in_valid(rx_spk_valid), .in_ready(rxl_in_ready), .in_label(LUT_RX_ADDR_W'(rx_spk_label)),
    .out_valid(rxl_valid), .out_ready(1'b1), .out_label(rxl_label)
  );

  logic  pk_valid, rxf_full;
  beat_t pk_beat;

  event_packer u_packer (
    .clk(mgt_clk), .rst_n(mgt_rst_n), .in_valid(rxl_valid), .in_label(rxl_label),
    .out_valid(pk_valid), .out_beat(pk_beat)
  );

  always_ff @(posedge mgt_clk or negedge mgt_rst_n) begin
    if (!mgt_rst_n)               rx_drop_cnt <= '0;
    else if (pk_valid && rxf_full) rx_drop_cnt <= rx_drop_cnt + 16'd1;
  end

  logic  rxf_empty;
  beat_t rxf_beat;

  async_fifo #(.WIDTH(BEAT_W), .DEPTH(FIFO_DEPTH)) u_rx_cdc (
    .wr_clk(mgt_clk), .wr_rst_n(mgt_rst_n), .wr_en(pk_valid), .wr_data(pk_beat), .wr_full(rxf_full),
    .rd_clk(sys_clk), .rd_rst_n(sys_rst_n), .rd_en(l2_out_ready), .rd_data(rxf_beat), .rd_empty(rxf_empty)
  );

  assign l2_out_valid = !rxf_empty;
  always_comb begin
    for (int i = 0; i < EVENTS_PER_BEAT; i++) begin
      l2_out[i].valid = rxf_beat[i].valid && !rxf_empty;
      l2_out[i].label = rxf_beat[i].label;
      l2_out[i].ts    = systime;
    end
  end

  // the receive lookup never stalls: the transceiver cannot be held
  a_rx_no_stall: assert property (@(posedge mgt_clk) disable iff (!mgt_rst_n) rxl_in_ready);

endmodule

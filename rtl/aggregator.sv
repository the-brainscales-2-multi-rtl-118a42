// Aggregator routing logic: all-to-all spike broadcast between N links.
//
// Per link, in the link's own transceiver clock domain, received words are
// split into commands and spikes. Commands cross into the global clock domain
// through a command FIFO; a sync-request command there becomes a request
// pulse for the system sync logic, every other command is discarded. Each
// received spike is written into one rx spike FIFO per destination link whose
// static route enable route_en[src][dst] is set; these N x N FIFOs also make
// the crossing into the global clock. A spike that finds its FIFO full is
// dropped and counted in drop_cnt[src]. In the global domain, per destination
// a round-robin N:1 multiplexer picks one spike per cycle from the N FIFOs
// routed to it and writes it into that link's tx spike FIFO, which crosses
// into the destination's transceiver clock, where a link multiplexer frames
// it as a 16-bit word, one per cycle except during clock-compensation pauses.
// The system sync logic toggles sync_signal, the external signal wired to all
// Node-FPGAs.
// The block map is the paper's; FIFO depths, the drop policy and the
// round-robin arbitration are this design's choice. route_en, participate and
// the periods are static configuration and are used without synchronisation.
module aggregator
  import bss2_mc_pkg::*;
#(
  parameter int unsigned N          = 12,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned CNT_W      = 16
) (
  input  logic                 glb_clk,
  input  logic                 glb_rst_n,
  input  logic [N-1:0]         link_clk,
  input  logic [N-1:0]         link_rst_n,
  // transceiver user interfaces, link i in link_clk[i]
  input  link_word_t [N-1:0]   rx_data,
  input  logic [N-1:0]         rx_valid,
  output link_word_t [N-1:0]   tx_data,
  output logic [N-1:0]         tx_valid,
  input  logic [N-1:0]         tx_ready,
  // static configuration
  input  logic [N-1:0][N-1:0]  route_en,        // [src][dst]
  input  logic [N-1:0]         sync_participate,
  input  logic [CNT_W-1:0]     sync_timeout,
  input  logic [CNT_W-1:0]     sync_refractory,
  // synchronisation and status
  output logic                 sync_signal,
  output logic                 sync_timeout_pulse,
  output logic [N-1:0]         sync_pending,     // requests collected so far
  output logic [N-1:0][15:0]   drop_cnt          // per source, link clock
);
  // rx spike FIFO outputs, global domain, indexed [dst][src]
  logic        [N-1:0][N-1:0]              sf_empty, sf_rd;
  link_label_t [N-1:0][N-1:0]              sf_data;
  logic        [N-1:0]                     sync_req;

  for (genvar s = 0; s < N; s++) begin : g_src
    logic        cmd_valid, spk_valid;
    link_label_t cmd_data, spk_label;
    logic [N-1:0] full;

    link_demux u_demux (
      .clk(link_clk[s]), .rst_n(link_rst_n[s]), .rx_data(rx_data[s]), .rx_valid(rx_valid[s]),
      .cmd_valid(cmd_valid), .cmd_data(cmd_data), .spk_valid(spk_valid), .spk_label(spk_label)
    );

    // command FIFO -> global domain; it is read every global cycle and so
    // cannot fill while the global clock is at least as fast as the link,
    // which is why its full flag is left unused
    logic        cf_empty, cf_full;
    link_label_t cf_data;
    async_fifo #(.WIDTH(LINK_LABEL_W), .DEPTH(FIFO_DEPTH)) u_cmd_fifo (
      .wr_clk(link_clk[s]), .wr_rst_n(link_rst_n[s]), .wr_en(cmd_valid), .wr_data(cmd_data), .wr_full(cf_full),
      .rd_clk(glb_clk), .rd_rst_n(glb_rst_n), .rd_en(!cf_empty), .rd_data(cf_data), .rd_empty(cf_empty)
    );
    assign sync_req[s] = !cf_empty && (cf_data == CMD_SYNC_REQ);

    // one rx spike FIFO per destination
    for (genvar d = 0; d < N; d++) begin : g_dst
      async_fifo #(.WIDTH(LINK_LABEL_W), .DEPTH(FIFO_DEPTH)) u_spk_fifo (
        .wr_clk(link_clk[s]), .wr_rst_n(link_rst_n[s]),
        .wr_en(spk_valid && route_en[s][d]), .wr_data(spk_label), .wr_full(full[d]),
        .rd_clk(glb_clk), .rd_rst_n(glb_rst_n),
        .rd_en(sf_rd[d][s]), .rd_data(sf_data[d][s]), .rd_empty(sf_empty[d][s])
      );
    end

    logic [15:0] drops;
    logic        lclk, lrst_n;
    assign lclk   = link_clk[s];
    assign lrst_n = link_rst_n[s];
    always_ff @(posedge lclk or negedge lrst_n) begin
      if (!lrst_n) drops <= '0;
      else if (spk_valid && ((route_en[s] & full) != '0)) drops <= drops + 16'd1;
    end
    assign drop_cnt[s] = drops;
  end

  for (genvar d = 0; d < N; d++) begin : g_dst_link
    logic        m_valid, tf_full, tf_empty, lm_ready;
    link_label_t m_data, tf_data;

    rr_mux #(.N(N), .WIDTH(LINK_LABEL_W)) u_mux (
      .clk(glb_clk), .rst_n(glb_rst_n),
      .in_valid(~sf_empty[d]), .in_ready(sf_rd[d]), .in_data(sf_data[d]),
      .out_valid(m_valid), .out_ready(!tf_full), .out_data(m_data)
    );

    async_fifo #(.WIDTH(LINK_LABEL_W), .DEPTH(FIFO_DEPTH)) u_tx_fifo (
      .wr_clk(glb_clk), .wr_rst_n(glb_rst_n), .wr_en(m_valid), .wr_data(m_data), .wr_full(tf_full),
      .rd_clk(link_clk[d]), .rd_rst_n(link_rst_n[d]),
      .rd_en(lm_ready && !tf_empty), .rd_data(tf_data), .rd_empty(tf_empty)
    );

    logic unused_cmd_ready;
    node_link_mux u_link_mux (
      .clk(link_clk[d]), .rst_n(link_rst_n[d]),
      .cmd_valid(1'b0), .cmd_ready(unused_cmd_ready), .cmd_data('0),
      .spk_valid(!tf_empty), .spk_ready(lm_ready), .spk_label(tf_data),
      .tx_data(tx_data[d]), .tx_valid(tx_valid[d]), .tx_ready(tx_ready[d])
    );
  end

  system_sync_logic #(.N(N), .CNT_W(CNT_W)) u_sync (
    .clk(glb_clk), .rst_n(glb_rst_n), .req(sync_req), .participate(sync_participate),
    .timeout_cycles(sync_timeout), .refractory_cycles(sync_refractory),
    .sync_signal(sync_signal), .timeout_pulse(sync_timeout_pulse), .pending(sync_pending)
  );

endmodule

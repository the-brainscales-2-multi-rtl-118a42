// Receive demultiplexer behind a transceiver (Node-FPGA and Aggregator).
//
// Splits each received 16-bit link word by bit 15: set means a 15-bit command
// payload, clear a 15-bit spike label. Both outputs are registered one-cycle
// pulses; there is no backpressure because the transceiver delivers a word
// every cycle it has one. On the Node-FPGA the command output is left
// unconnected. Latency: one cycle.
module link_demux
  import bss2_mc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  link_word_t  rx_data,
  input  logic        rx_valid,
  output logic        cmd_valid,
  output link_label_t cmd_data,
  output logic        spk_valid,
  output link_label_t spk_label
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_valid <= 1'b0;
      spk_valid <= 1'b0;
      cmd_data  <= '0;
      spk_label <= '0;
    end else begin
      cmd_valid <= rx_valid &&  rx_data[LINK_W-1];
      spk_valid <= rx_valid && !rx_data[LINK_W-1];
      cmd_data  <= rx_data[LINK_LABEL_W-1:0];
      spk_label <= rx_data[LINK_LABEL_W-1:0];
    end
  end
endmodule

// Transmit multiplexer in front of the Node-FPGA transceiver.
//
// Merges the command stream (sync requests) and the spike stream into 16-bit
// link words: bit 15 set marks a command, bit 15 clear a spike with its 15-bit
// label. One word is sent per transceiver clock cycle; a pending command goes
// before spikes. The output is a register that advances only while tx_ready
// is high, so the transceiver's clock-compensation pauses simply hold the
// word and back-pressure both input streams. The Aggregator uses the same
// module, with no commands, for its transmit side.
// Interface: valid/ready inputs; tx_valid/tx_data registered, a word counts as
// sent in a cycle with tx_valid && tx_ready. Latency: one cycle.
// Command priority and the bit-15 framing are this design's choice.
module node_link_mux
  import bss2_mc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  link_label_t cmd_data,
  input  logic        spk_valid,
  output logic        spk_ready,
  input  link_label_t spk_label,
  output link_word_t  tx_data,
  output logic        tx_valid,
  input  logic        tx_ready
);
  logic adv;
  assign adv       = !tx_valid || tx_ready;
  assign cmd_ready = adv;
  assign spk_ready = adv && !cmd_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_valid <= 1'b0;
      tx_data  <= '0;
    end else if (adv) begin
      tx_valid <= cmd_valid || spk_valid;
      tx_data  <= cmd_valid ? make_cmd_word(cmd_data) : make_spike_word(spk_label);
    end
  end

  property p_tx_hold;
    @(posedge clk) disable iff (!rst_n) tx_valid && !tx_ready |=> tx_valid && $stable(tx_data);
  endproperty
  a_tx_hold: assert property (p_tx_hold);

endmodule

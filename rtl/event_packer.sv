// Packer: single received spike labels -> layer-2 beats of up to three.
//
// On the receive path the Node-FPGA re-packs events for bandwidth efficiency
// before they cross into the system clock domain. Events are collected in
// slot order; a beat is emitted as soon as three are held, or in the first
// cycle that brings no new event while at least one is held. A continuous
// stream is therefore packed three to a beat, and an isolated event waits
// only one cycle. The flush rule is this design's choice.
// Interface: in_valid/in_label, no backpressure (the transceiver cannot be
// stalled); out_valid/out_beat is a registered one-cycle pulse. Latency: an
// event that completes a beat appears at the output one cycle later.
module event_packer
  import bss2_mc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  asic_label_t in_label,
  output logic        out_valid,
  output beat_t       out_beat
);
  beat_t acc, acc_next;
  logic [1:0] cnt;
  logic emit;

  always_comb begin
    acc_next = acc;
    emit     = 1'b0;
    if (in_valid) begin
      acc_next[cnt].valid = 1'b1;
      acc_next[cnt].label = in_label;
      emit = (cnt == 2'(EVENTS_PER_BEAT-1));
    end else begin
      emit = (cnt != '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      out_beat  <= '0;
    end else begin
      out_valid <= emit;
      if (emit) begin
        out_beat <= acc_next;
        acc      <= '0;
        cnt      <= '0;
      end else begin
        acc <= acc_next;
        if (in_valid) cnt <= cnt + 2'd1;
      end
    end
  end

endmodule

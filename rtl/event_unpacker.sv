// Unpacker: layer-2 beats of up to three parallel events -> single events.
//
// The tapped layer-2 stream carries up to three spike labels per system clock
// beat; behind the tap FIFO every unit works on one event per transceiver
// clock cycle. A beat is held in a register and its valid slots are sent in
// slot order 0, 1, 2, empty slots being skipped. A new beat is taken in the
// cycle the last pending event of the held one leaves, so a stream of beats
// comes out without gaps.
// Interface: valid/ready on both sides; in_ready depends combinationally on
// out_ready. Latency: one cycle from accepting a beat to its first event.
// The slot order is this design's choice.
module event_unpacker
  import bss2_mc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  beat_t       in_beat,
  output logic        out_valid,
  input  logic        out_ready,
  output asic_label_t out_label
);
  beat_t hold;
  logic [EVENTS_PER_BEAT-1:0] pend, lowest, pend_after;

  // lowest pending slot, one-hot
  assign lowest = pend & (~pend + EVENTS_PER_BEAT'(1));

  always_comb begin
    out_label = '0;
    for (int i = 0; i < EVENTS_PER_BEAT; i++)
      if (lowest[i]) out_label = hold[i].label;
  end

  assign out_valid  = |pend;
  assign pend_after = (out_valid && out_ready) ? (pend & ~lowest) : pend;
  assign in_ready   = (pend_after == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0;
      hold <= '0;
    end else if (in_valid && in_ready) begin
      hold <= in_beat;
      for (int i = 0; i < EVENTS_PER_BEAT; i++) pend[i] <= in_beat[i].valid;
    end else begin
      pend <= pend_after;
    end
  end

endmodule

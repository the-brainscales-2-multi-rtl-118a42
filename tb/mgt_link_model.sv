// Behavioural model of one direction of a multi-gigabit transceiver link
// (8b10b, 5 Gbit/s, 16-bit user interface at 250 MHz); not synthesizable
// hardware of this design, only a stand-in for the vendor transceiver pair.
// A word accepted at the transmitter (tx_valid && tx_ready) appears at the
// receiver LATENCY user-clock cycles later. Every CC_PERIOD cycles the
// transmitter is not ready for CC_LEN cycles, as a clock-compensation
// sequence would occupy the link. Both ends run on the same user clock.
// LATENCY = 37 cycles (148 ns) stands for one of the two link hops the
// measurements put at 0.3 us together; the pause pattern is an assumption.
module mgt_link_model #(
  parameter int unsigned LATENCY   = 37,
  parameter int unsigned CC_PERIOD = 2500,
  parameter int unsigned CC_LEN    = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] tx_data,
  input  logic        tx_valid,
  output logic        tx_ready,
  output logic [15:0] rx_data,
  output logic        rx_valid,
  output int unsigned pauses
);
  logic [16:0] pipe [LATENCY];
  int unsigned cyc;

  assign tx_ready = (CC_PERIOD == 0) || (cyc % CC_PERIOD) >= CC_LEN;
  assign rx_valid = pipe[LATENCY-1][16];
  assign rx_data  = pipe[LATENCY-1][15:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc    <= 1;
      pauses <= 0;
      for (int i = 0; i < LATENCY; i++) pipe[i] <= '0;
    end else begin
      cyc <= cyc + 1;
      if (!tx_ready && (cyc % CC_PERIOD) == 0) pauses <= pauses + 1;
      pipe[0] <= {tx_valid && tx_ready, tx_data};
      for (int i = 1; i < LATENCY; i++) pipe[i] <= pipe[i-1];
    end
  end
endmodule

// System time counter of a Node-FPGA (system clock domain, 8 ns period).
//
// Counts system clock cycles. Its value is kept in step with the ASIC's own
// system time, which is modelled here by a synchronous load; the low eight
// bits time-stamp the spikes the multi-chip extension hands to the layer-2
// link. The width and the load port are this design's choice.
module systime_counter #(
  parameter int unsigned WIDTH = 43
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] load_value,
  output logic [WIDTH-1:0] time_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    time_o <= '0;
    else if (load) time_o <= load_value;
    else           time_o <= time_o + WIDTH'(1);
  end
endmodule

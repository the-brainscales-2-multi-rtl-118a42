// Address lookup table: label remapping with a routing-enable bit.
//
// A Block-RAM table indexed by the incoming label holds {enable, new label}.
// On the Node-FPGA transmit path it maps every 16-bit BSS-2 label to a 15-bit
// link label (16 bit per entry including the enable); on the receive path it
// maps each 15-bit link label back to a 16-bit BSS-2 label (17 bit per entry).
// Labels whose entry has the enable bit (the entry's MSB) cleared are dropped.
// Two pipeline stages: the registered RAM read and an output register. The
// whole pipeline stalls while the output is held (out_valid && !out_ready),
// so in_ready = !out_valid || out_ready. Latency: two cycles.
// The table is written through cfg_we/cfg_addr/cfg_data in the same clock;
// it is not cleared by reset, like a Block RAM. The position of the enable
// bit and the write port are this design's choice; the table sizes are the
// paper's.
module address_lut #(
  parameter int unsigned ADDR_W = 16,
  parameter int unsigned DATA_W = 15   // label bits, the enable comes on top
) (
  input  logic              clk,
  input  logic              rst_n,
  // table write port
  input  logic              cfg_we,
  input  logic [ADDR_W-1:0] cfg_addr,
  input  logic [DATA_W:0]   cfg_data,   // {enable, label}
  // lookup stream
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [ADDR_W-1:0] in_label,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_label
);
  logic [DATA_W:0] table_q [2**ADDR_W];
  logic [DATA_W:0] rd_q;
  logic            v1;
  logic            adv;

  assign adv      = !out_valid || out_ready;
  assign in_ready = adv;

  always_ff @(posedge clk) begin
    if (cfg_we) table_q[cfg_addr] <= cfg_data;
  end

  always_ff @(posedge clk) begin
    if (adv) rd_q <= table_q[in_label];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
      out_label <= '0;
    end else if (adv) begin
      v1        <= in_valid;
      out_valid <= v1 && rd_q[DATA_W];
      out_label <= rd_q[DATA_W-1:0];
    end
  end

endmodule

// Clock-domain-crossing FIFO.
//
// Used wherever spike or command traffic changes clock domain: from the
// Node-FPGA system clock into the transceiver clock and back, and in the
// Aggregator between each link's local transceiver clock and the global clock.
// Write and read pointers are binary counters one bit wider than the address;
// each side passes its pointer to the other in Gray code through a two-flop
// synchroniser, the counter synchronisation the routing latency is dominated
// by. Full and empty are therefore pessimistic by the synchroniser delay.
//
// Interface: first-word-fall-through. rd_data shows the oldest word whenever
// rd_empty is low; rd_en pops it. wr_en while wr_full is high is ignored.
// Timing: a word written in one wr_clk cycle is visible at the read side after
// the pointer has passed the synchroniser, about three rd_clk edges.
// Depth and reset scheme (asynchronous, active low, one per side) are this
// design's choice.
module async_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16   // power of two
) (
  input  logic             wr_clk,
  input  logic             wr_rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             wr_full,

  input  logic             rd_clk,
  input  logic             rd_rst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wr_bin, wr_gray, rd_bin, rd_gray;
  logic [AW:0] rd_gray_w1, rd_gray_w2;   // read pointer in write domain
  logic [AW:0] wr_gray_r1, wr_gray_r2;   // write pointer in read domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write side ----------------
  logic [AW:0] wr_bin_next;
  assign wr_bin_next = wr_bin + (AW+1)'(1);
  assign wr_full = (wr_gray == {~rd_gray_w2[AW:AW-1], rd_gray_w2[AW-2:0]});

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wr_bin     <= '0;
      wr_gray    <= '0;
      rd_gray_w1 <= '0;
      rd_gray_w2 <= '0;
    end else begin
      rd_gray_w1 <= rd_gray;
      rd_gray_w2 <= rd_gray_w1;
      if (wr_en && !wr_full) begin
        wr_bin  <= wr_bin_next;
        wr_gray <= bin2gray(wr_bin_next);
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && !wr_full) mem[wr_bin[AW-1:0]] <= wr_data;
  end

  // ---------------- read side ----------------
  logic [AW:0] rd_bin_next;
  assign rd_bin_next = rd_bin + (AW+1)'(1);
  assign rd_empty = (rd_gray == wr_gray_r2);
  assign rd_data  = mem[rd_bin[AW-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rd_bin     <= '0;
      rd_gray    <= '0;
      wr_gray_r1 <= '0;
      wr_gray_r2 <= '0;
    end else begin
      wr_gray_r1 <= wr_gray;
      wr_gray_r2 <= wr_gray_r1;
      if (rd_en && !rd_empty) begin
        rd_bin  <= rd_bin_next;
        rd_gray <= bin2gray(rd_bin_next);
      end
    end
  end

  initial begin
    assert (DEPTH >= 4 && (1 << AW) == DEPTH)
      else $error("async_fifo: DEPTH must be a power of two, at least 4");
  end

endmodule

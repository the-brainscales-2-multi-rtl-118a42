// Single-clock FIFO with valid/ready handshakes.
//
// On the Node-FPGA it sits between the transmit address lookup and the link
// multiplexer, absorbing spikes while the multiplexer sends a command word or
// the transceiver makes a clock-compensation pause. First-word-fall-through:
// out_data is valid in the cycle out_valid is high; a word pushed in one cycle
// can be popped in the next. in_ready is low only when all DEPTH entries are
// occupied. Depth is this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 15,
  parameter int unsigned DEPTH = 16   // power of two
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wr_ptr, rd_ptr;
  logic push, pop;

  assign in_ready  = (wr_ptr - rd_ptr) != (AW+1)'(DEPTH);
  assign out_valid = (wr_ptr != rd_ptr);
  assign out_data  = mem[rd_ptr[AW-1:0]];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + (AW+1)'(1);
      if (pop)  rd_ptr <= rd_ptr + (AW+1)'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr[AW-1:0]] <= in_data;
  end

  // A word offered but not taken must stay offered with the same data.
  property p_out_stable;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  a_out_stable: assert property (p_out_stable);

endmodule

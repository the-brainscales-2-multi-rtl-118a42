// Round-robin N:1 multiplexer (Aggregator, global clock domain).
//
// Each destination link collects the spikes that all sources route to it.
// Per cycle one non-empty source is granted, searching from the source after
// the last grant, so under congestion every source gets an equal share; this
// arbitration is where the latency grows by a few cycles at high rates. The
// output is a register: one word per cycle while out_ready is high.
// Interface: per-input valid/ready/data, output valid/ready/data.
// Latency: one cycle. The round-robin policy is this design's choice.
module rr_mux #(
  parameter int unsigned N     = 12,
  parameter int unsigned WIDTH = 15
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N-1:0]          in_valid,
  output logic [N-1:0]          in_ready,
  input  logic [N-1:0][WIDTH-1:0] in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [WIDTH-1:0]      out_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr, sel;
  logic          any;
  logic          adv;

  assign adv = !out_valid || out_ready;

  always_comb begin
    sel = '0;
    any = 1'b0;
    for (int k = N-1; k >= 0; k--) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(ptr) + k) % N);
      if (in_valid[idx]) begin
        sel = idx;
        any = 1'b1;
      end
    end
  end

  always_comb begin
    in_ready = '0;
    if (adv && any) in_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (adv) begin
      out_valid <= any;
      if (any) begin
        out_data <= in_data[sel];
        ptr      <= (int'(sel) == N-1) ? '0 : sel + IW'(1);
      end
    end
  end

  a_onehot_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(in_ready));
endmodule

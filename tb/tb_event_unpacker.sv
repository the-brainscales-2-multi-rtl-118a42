// Testbench for event_unpacker: random beats with random slot occupancy and a
// random sink; events must leave in slot order. With full beats and a ready
// sink, 3*K events must leave in 3*K cycles (one per cycle, no gaps).
module tb_event_unpacker;
  import bss2_mc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  beat_t in_beat;
  asic_label_t out_label;
  int checks = 0, failures = 0;
  asic_label_t q[$];
  always #2 clk = ~clk;

  event_unpacker dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int outs = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      chk(q.size() > 0 && out_label == q[0], $sformatf("label %h exp %h", out_label, q.size() ? q[0] : 0));
      if (q.size()) void'(q.pop_front());
      outs++;
    end
    if (in_valid && in_ready)
      for (int i = 0; i < 3; i++) if (in_beat[i].valid) q.push_back(in_beat[i].label);
  end

  task automatic rand_beat(input bit full);
    for (int i = 0; i < 3; i++) begin
      in_beat[i].valid = full ? 1'b1 : 1'($urandom_range(0, 1));
      in_beat[i].label = asic_label_t'($urandom);
    end
  endtask

  int t0, n0;
  initial begin
    in_valid = 0; in_beat = '0; out_ready = 0;
    #10 rst_n = 1;
    // throughput: 20 full beats
    @(negedge clk); out_ready = 1; in_valid = 1; rand_beat(1);
    n0 = outs; t0 = 0;
    for (int k = 0; k < 20; ) begin
      @(posedge clk); if (in_ready) k++;
      @(negedge clk); rand_beat(1);
      t0++;
    end
    in_valid = 0;
    // beat 0 is taken at once, each later beat after its predecessor's three events
    chk(t0 == 1 + 19*3, $sformatf("20 full beats took %0d cycles, expected 58", t0));
    repeat (5) @(negedge clk);
    chk(outs - n0 == 60, $sformatf("60 events out, got %0d", outs - n0));
    // random
    repeat (3000) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin in_valid = $urandom_range(0, 1); rand_beat(0); end
      out_ready = $urandom_range(0, 3) != 0;
      @(posedge clk);
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (10) @(negedge clk);
    chk(q.size() == 0, "all events delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

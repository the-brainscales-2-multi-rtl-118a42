// Testbench for event_packer: every event must come out once, in order; a
// continuous run of 3*K events must give exactly K full beats; an isolated
// event must be flushed alone two cycles after it enters.
module tb_event_packer;
  import bss2_mc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  asic_label_t in_label;
  beat_t out_beat;
  int checks = 0, failures = 0, beats = 0, full_beats = 0;
  asic_label_t q[$];
  always #2 clk = ~clk;

  event_packer dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      beats++;
      if (out_beat[0].valid && out_beat[1].valid && out_beat[2].valid) full_beats++;
      chk(out_beat[0].valid, "slot 0 used first");
      for (int i = 0; i < 3; i++) if (out_beat[i].valid) begin
        chk(q.size() > 0 && out_beat[i].label == q[0], "label order");
        if (q.size()) void'(q.pop_front());
      end
    end
    if (in_valid) q.push_back(in_label);
  end

  int b0, f0, lat;
  initial begin
    in_valid = 0; in_label = 0;
    #10 rst_n = 1;
    @(negedge clk);
    // isolated event
    in_valid = 1; in_label = 16'h00aa;
    @(negedge clk); in_valid = 0; lat = 1;
    while (!out_valid && lat < 20) begin @(negedge clk); lat++; end
    chk(lat == 2 && out_beat[0].label == 16'h00aa && !out_beat[1].valid, $sformatf("isolated event after %0d cycles", lat));
    repeat (3) @(negedge clk);
    // continuous 30 events -> 10 full beats
    b0 = beats; f0 = full_beats;
    repeat (30) begin in_valid = 1; in_label = asic_label_t'($urandom); @(negedge clk); end
    in_valid = 0;
    repeat (4) @(negedge clk);
    chk(beats - b0 == 10 && full_beats - f0 == 10, $sformatf("30 events gave %0d beats", beats - b0));
    // random gaps
    repeat (3000) begin
      in_valid = $urandom_range(0, 2) != 0; in_label = asic_label_t'($urandom);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (5) @(negedge clk);
    chk(q.size() == 0, "all events delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

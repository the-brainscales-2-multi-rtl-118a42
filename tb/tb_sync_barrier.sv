// Testbench for sync_barrier: a barrier must toggle the request once, must
// not finish before the sync signal toggles, and must finish three cycles
// after it does (two-flop synchroniser plus edge detection). A toggle with
// no barrier pending must be ignored.
module tb_sync_barrier;
  logic clk = 0, rst_n = 0;
  logic barrier_valid, barrier_done, req_toggle, sync_signal;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  sync_barrier dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic t0; int lat, dones = 0;
  always @(posedge clk) if (barrier_done) dones++;
  initial begin
    barrier_valid = 0; sync_signal = 0;
    #20 rst_n = 1;
    repeat (5) @(negedge clk);
    // stray toggle: ignored
    sync_signal = 1; repeat (6) @(negedge clk);
    chk(dones == 0, "stray toggle ignored");
    for (int r = 0; r < 6; r++) begin
      t0 = req_toggle;
      barrier_valid = 1;
      @(negedge clk);
      chk(req_toggle != t0, "request toggled");
      repeat ($urandom_range(5, 40)) begin @(negedge clk); chk(!barrier_done, "waits for sync signal"); end
      chk(req_toggle != t0, "only one toggle per barrier");
      sync_signal = ~sync_signal; lat = 0;
      while (!barrier_done) begin @(negedge clk); lat++; end
      chk(lat == 3, $sformatf("barrier released after %0d cycles", lat));
      barrier_valid = 0;
      @(negedge clk);
      chk(!barrier_done, "done is a pulse");
    end
    chk(dones == 6, "six barriers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

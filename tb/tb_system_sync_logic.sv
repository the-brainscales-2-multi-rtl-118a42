// Testbench for system_sync_logic with four links: the sync signal must
// toggle one cycle after the last participant's request and not before;
// non-participants are ignored; an incomplete set is discarded after the
// timeout; requests inside the refractory period are ignored.
module tb_system_sync_logic;
  localparam int N = 4, CW = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, participate, pending;
  logic [CW-1:0] timeout_cycles, refractory_cycles;
  logic sync_signal, timeout_pulse;
  int checks = 0, failures = 0, timeouts = 0;
  always #2 clk = ~clk;

  system_sync_logic #(.N(N), .CNT_W(CW)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (timeout_pulse) timeouts++;

  task automatic pulse(input logic [N-1:0] m);
    req = m; @(negedge clk); req = '0;
  endtask

  logic s0; int t;
  initial begin
    req = 0; participate = 4'b0111; timeout_cycles = 50; refractory_cycles = 20;
    #10 rst_n = 1;
    repeat (3) @(negedge clk);
    // requests from 0, 2, then 1 (3 does not participate)
    s0 = sync_signal;
    pulse(4'b1001); repeat (5) @(negedge clk);
    chk(sync_signal == s0 && pending == 4'b0001, "partial set held");
    pulse(4'b0100); repeat (5) @(negedge clk);
    chk(sync_signal == s0, "no toggle before the last participant");
    pulse(4'b0010);
    chk(sync_signal != s0, "toggle one cycle after the last request");
    // refractory: a full set right away is ignored
    s0 = sync_signal;
    pulse(4'b0111); repeat (3) @(negedge clk);
    chk(sync_signal == s0 && pending == '0, "refractory period ignores requests");
    repeat (20) @(negedge clk);
    // simultaneous full set after refractory
    pulse(4'b0111);
    chk(sync_signal != s0, "simultaneous requests toggle");
    repeat (25) @(negedge clk);
    // timeout: only node 0 asks
    s0 = sync_signal;
    pulse(4'b0001); t = 1;
    while (!timeout_pulse && t < 200) begin @(negedge clk); t++; end
    chk(timeout_pulse && t >= 49 && t <= 52, $sformatf("timeout after %0d cycles", t));
    @(negedge clk);
    chk(pending == '0 && sync_signal == s0, "timeout clears the set, no toggle");
    // after the timeout a new complete round works again
    pulse(4'b0011); pulse(4'b0100);
    chk(sync_signal != s0, "round after timeout");
    // timeout disabled
    timeout_cycles = 0; repeat (25) @(negedge clk);
    s0 = sync_signal; pulse(4'b0001);
    repeat (300) @(negedge clk);
    chk(timeouts == 1 && pending == 4'b0001, "timeout 0 waits forever");
    pulse(4'b0110);
    chk(sync_signal != s0, "late completion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench for systime_counter: counts one per cycle from reset and from a
// loaded value, including the carry out of the low eight bits.
module tb_systime_counter;
  localparam int W = 43;
  logic clk = 0, rst_n = 0, load;
  logic [W-1:0] load_value, time_o, exp_t;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  systime_counter #(.WIDTH(W)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    load = 0; load_value = 0;
    #20 @(negedge clk); rst_n = 1;
    chk(time_o == 0, "zero after reset");
    exp_t = 0;
    repeat (300) begin @(negedge clk); exp_t++; chk(time_o == exp_t, "count"); end
    load = 1; load_value = 43'h3ff_ffff_fff0; @(negedge clk); load = 0;
    exp_t = load_value;
    chk(time_o == exp_t, "load");
    repeat (40) begin @(negedge clk); exp_t++; chk(time_o == exp_t, "count after load"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

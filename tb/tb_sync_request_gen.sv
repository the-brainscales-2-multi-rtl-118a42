// Testbench for sync_request_gen: each toggle of the request level (driven
// from an 8 ns clock) must yield exactly one CMD_SYNC_REQ command in the 4 ns
// clock, offered four clock edges after the toggle and held until taken.
module tb_sync_request_gen;
  import bss2_mc_pkg::*;
  logic sclk = 0, mgt_clk = 0, mgt_rst_n = 0;
  logic req_toggle, cmd_valid, cmd_ready;
  link_label_t cmd_data;
  int checks = 0, failures = 0, cmds = 0;
  always #4 sclk = ~sclk;
  always #2 mgt_clk = ~mgt_clk;

  sync_request_gen dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge mgt_clk) if (mgt_rst_n && cmd_valid && cmd_ready) begin
    cmds++;
    chk(cmd_data == CMD_SYNC_REQ, "command code");
  end

  int lat;
  initial begin
    req_toggle = 0; cmd_ready = 0;
    #20 mgt_rst_n = 1;
    repeat (5) @(posedge mgt_clk);
    chk(!cmd_valid, "no command without a request");
    for (int r = 0; r < 8; r++) begin
      @(posedge sclk); req_toggle <= ~req_toggle;
      lat = 0;
      @(posedge mgt_clk);
      while (!cmd_valid) begin @(posedge mgt_clk); lat++; end
      chk(lat >= 2 && lat <= 5, $sformatf("command after %0d mgt cycles", lat));
      repeat ($urandom_range(0, 5)) begin @(posedge mgt_clk); chk(cmd_valid, "held until taken"); end
      @(negedge mgt_clk) cmd_ready = 1;
      @(negedge mgt_clk) cmd_ready = 0;
      repeat (10) @(posedge mgt_clk);
      chk(!cmd_valid && cmds == r + 1, $sformatf("one command per toggle (%0d)", cmds));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench for link_demux: random link words; words with bit 15 set must
// appear on the command output, the others on the spike output, one cycle
// later, with the low 15 bits intact.
module tb_link_demux;
  import bss2_mc_pkg::*;
  logic clk = 0, rst_n = 0;
  link_word_t rx_data; logic rx_valid;
  logic cmd_valid, spk_valid; link_label_t cmd_data, spk_label;
  int checks = 0, failures = 0, ncmd = 0, nspk = 0;
  always #2 clk = ~clk;

  link_demux dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic pv; link_word_t pd;
  initial begin
    rx_data = 0; rx_valid = 0;
    #10 rst_n = 1;
    @(negedge clk);
    repeat (2000) begin
      rx_valid = $urandom_range(0, 3) != 0; rx_data = link_word_t'($urandom);
      pv = rx_valid; pd = rx_data;
      @(negedge clk);
      chk(cmd_valid == (pv && pd[15]), "command valid");
      chk(spk_valid == (pv && !pd[15]), "spike valid");
      if (cmd_valid) begin ncmd++; chk(cmd_data == pd[14:0], "command payload"); end
      if (spk_valid) begin nspk++; chk(spk_label == pd[14:0], "spike label"); end
    end
    chk(ncmd > 100 && nspk > 100, "both kinds seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

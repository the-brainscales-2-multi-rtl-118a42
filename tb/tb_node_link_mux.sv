// Testbench for node_link_mux: random command and spike streams and random
// clock-compensation pauses; every item must be framed correctly (bit 15 for
// commands), commands must go first when both wait, and with tx_ready high a
// word must leave every cycle.
module tb_node_link_mux;
  import bss2_mc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, spk_valid, spk_ready, tx_valid, tx_ready;
  link_label_t cmd_data, spk_label;
  link_word_t tx_data;
  int checks = 0, failures = 0;
  link_word_t q[$];
  always #2 clk = ~clk;

  node_link_mux dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) begin
      chk(q.size() > 0 && tx_data == q[0], $sformatf("word %h exp %h", tx_data, q.size() ? q[0] : 0));
      if (q.size()) void'(q.pop_front());
    end
    if (cmd_valid && cmd_ready) q.push_back({1'b1, cmd_data});
    else if (spk_valid && spk_ready) q.push_back({1'b0, spk_label});
    if (cmd_valid && spk_valid) chk(!spk_ready, "command before spike");
  end

  int sent;
  initial begin
    cmd_valid = 0; spk_valid = 0; cmd_data = 0; spk_label = 0; tx_ready = 1;
    #10 rst_n = 1;
    // full rate: 50 spikes in 50 cycles
    @(negedge clk); spk_valid = 1; sent = 0;
    for (int i = 0; i < 50; i++) begin spk_label = link_label_t'(i); @(negedge clk); if (spk_ready) sent++; end
    spk_valid = 0;
    chk(sent == 50, $sformatf("50 spikes accepted in 50 cycles: %0d", sent));
    repeat (3) @(negedge clk);
    repeat (4000) begin
      if (!cmd_valid || cmd_ready) begin cmd_valid = $urandom_range(0, 9) == 0; cmd_data = link_label_t'($urandom); end
      if (!spk_valid || spk_ready) begin spk_valid = $urandom_range(0, 1); spk_label = link_label_t'($urandom); end
      tx_ready = $urandom_range(0, 7) != 0;
      @(negedge clk);
    end
    cmd_valid = 0; spk_valid = 0; tx_ready = 1;
    repeat (5) @(negedge clk);
    chk(q.size() == 0 && !tx_valid, "all words sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

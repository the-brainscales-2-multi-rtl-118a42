// Testbench for address_lut at its full 16-bit address width: writes random
// entries (some disabled), streams lookups with a random sink, and checks the
// mapped labels, that disabled labels vanish, and the two-cycle latency.
module tb_address_lut;
  localparam int AW = 16, DW = 15;
  logic clk = 0, rst_n = 0;
  logic cfg_we; logic [AW-1:0] cfg_addr; logic [DW:0] cfg_data;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [AW-1:0] in_label; logic [DW-1:0] out_label;
  int checks = 0, failures = 0;
  logic [DW:0] model [logic [AW-1:0]];
  logic [DW-1:0] q[$];
  logic [AW-1:0] keys[$];
  always #2 clk = ~clk;

  address_lut #(.ADDR_W(AW), .DATA_W(DW)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #200us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      chk(q.size() > 0 && out_label == q[0], $sformatf("label %h exp %h", out_label, q.size() ? q[0] : 0));
      if (q.size()) void'(q.pop_front());
    end
    if (in_valid && in_ready && model[in_label][DW]) q.push_back(model[in_label][DW-1:0]);
  end

  int lat;
  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_data = 0; in_valid = 0; in_label = 0; out_ready = 1;
    #10 rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = AW'($urandom); cfg_data = (DW+1)'($urandom);
      if (i < 4) cfg_data[DW] = 1'b1;
      model[cfg_addr] = cfg_data; keys.push_back(cfg_addr);
    end
    // entry 0x0000 explicitly disabled
    @(negedge clk); cfg_addr = '0; cfg_data = '0; model[cfg_addr] = cfg_data; keys.push_back(cfg_addr);
    @(negedge clk); cfg_we = 0;
    // latency of one enabled entry
    in_valid = 1; in_label = keys[0];
    @(negedge clk); in_valid = 0; lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    chk(lat == 2, $sformatf("latency %0d, expected 2", lat));
    @(negedge clk);
    // disabled label gives nothing
    in_valid = 1; in_label = '0;
    @(negedge clk); in_valid = 0;
    repeat (4) begin chk(!out_valid, "disabled label dropped"); @(negedge clk); end
    // random stream, random sink
    repeat (4000) begin
      if (!in_valid || in_ready) begin
        in_valid = $urandom_range(0, 3) != 0;
        in_label = keys[$urandom_range(0, keys.size() - 1)];
      end
      out_ready = $urandom_range(0, 2) != 0;
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (6) @(negedge clk);
    chk(q.size() == 0, "all enabled lookups delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

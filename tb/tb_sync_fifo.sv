// Testbench for sync_fifo: random push/pop against a queue, capacity DEPTH,
// and one-cycle fall-through.
module tb_sync_fifo;
  localparam int W = 15, D = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0, n;
  logic [W-1:0] q[$];
  always #2 clk = ~clk;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      chk(q.size() > 0 && out_data == q[0], "pop data");
      if (q.size()) void'(q.pop_front());
    end
    if (in_valid && in_ready) q.push_back(in_data);
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    #10 rst_n = 1;
    @(negedge clk);
    chk(!out_valid && in_ready, "empty after reset");
    // fall-through: pushed word visible next cycle
    in_valid = 1; in_data = 15'h1234;
    @(negedge clk); in_valid = 0;
    chk(out_valid && out_data == 15'h1234, "one-cycle fall-through");
    // fill
    n = 1;
    in_valid = 1;
    repeat (30) begin in_data = W'($urandom); @(negedge clk); end
    in_valid = 0;
    chk(q.size() == D && !in_ready, $sformatf("capacity %0d", q.size()));
    // random traffic
    repeat (4000) begin
      @(negedge clk);
      in_valid = $urandom_range(0, 1); in_data = W'($urandom);
      out_ready = $urandom_range(0, 1);
    end
    in_valid = 0; out_ready = 1;
    repeat (40) @(negedge clk);
    chk(q.size() == 0 && !out_valid, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench for async_fifo: a 125 MHz writer and a 250 MHz reader with random
// enables, compared against a queue; also checks the full flag at DEPTH words
// and the write-to-read latency through the pointer synchronisers.
module tb_async_fifo;
  localparam int W = 16, D = 16;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_en, rd_en, full, empty;
  logic [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  always #4 wclk = ~wclk;
  always #2 rclk = ~rclk;

  async_fifo #(.WIDTH(W), .DEPTH(D)) dut (
    .wr_clk(wclk), .wr_rst_n(wrst_n), .wr_en(wr_en), .wr_data(wdata), .wr_full(full),
    .rd_clk(rclk), .rd_rst_n(rrst_n), .rd_en(rd_en), .rd_data(rdata), .rd_empty(empty));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    #200us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bit rd_random = 0;
  // reader: compare every popped word
  always @(posedge rclk) if (rrst_n) begin
    if (rd_en && !empty) begin
      chk(q.size() > 0 && rdata == q[0], $sformatf("data %h exp %h", rdata, q.size() ? q[0] : 0));
      if (q.size()) void'(q.pop_front());
    end
  end
  always @(negedge rclk) rd_en <= rd_random ? ($urandom_range(0, 2) != 0) : 1'b0;

  int n, t0, lat;
  initial begin
    wr_en = 0; wdata = 0; rd_en = 0;
    #20 wrst_n = 1; rrst_n = 1;
    // fill with reader stopped: exactly D words fit
    n = 0;
    repeat (40) begin
      @(negedge wclk);
      wr_en = 1; wdata = W'($urandom);
      if (!full) begin q.push_back(wdata); n++; end
    end
    @(negedge wclk) wr_en = 0;
    chk(n == D, $sformatf("fill count %0d", n));
    chk(full, "full after fill");
    // drain
    rd_random = 1;
    wait (q.size() == 0);
    repeat (10) @(posedge rclk);
    chk(empty, "empty after drain");
    // latency: a single word appears within 4 read clocks after the write edge
    rd_random = 0;
    @(negedge wclk) begin wr_en = 1; wdata = 16'hbeef; q.push_back(wdata); end
    @(posedge wclk); t0 = $time;
    @(negedge wclk) wr_en = 0;
    wait (!empty); lat = ($time - t0) / 4;
    chk(lat >= 1 && lat <= 4, $sformatf("latency %0d read cycles", lat));
    rd_random = 1;
    // random traffic both ways
    repeat (3000) begin
      @(negedge wclk);
      wr_en = ($urandom_range(0, 1) == 1);
      wdata = W'($urandom);
      if (wr_en && !full) q.push_back(wdata);
    end
    @(negedge wclk) wr_en = 0;
    wait (q.size() == 0);
    repeat (10) @(posedge rclk);
    chk(empty, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

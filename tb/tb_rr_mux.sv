// Testbench for rr_mux with 12 inputs: with all inputs busy the grants must
// visit every input in turn; with random traffic and sink every word must
// arrive once, each input's words in order, and no input may wait more than
// N grants while it is valid.
module tb_rr_mux;
  localparam int N = 12, W = 15;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready;
  logic [N-1:0][W-1:0] in_data;
  logic out_valid, out_ready; logic [W-1:0] out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] q[N][$];
  int seq[N];
  int waitc[N];
  always #2 clk = ~clk;

  rr_mux #(.N(N), .WIDTH(W)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100us; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // data word = {source[3:0], sequence[10:0]}
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      int s; s = int'(out_data[14:11]);
      chk(s < N && q[s].size() > 0 && q[s][0] == out_data, $sformatf("word %h", out_data));
      if (s < N && q[s].size()) void'(q[s].pop_front());
    end
    for (int i = 0; i < N; i++) begin
      if (in_valid[i] && in_ready[i]) begin q[i].push_back(in_data[i]); waitc[i] = 0; end
      else if (in_valid[i] && (out_ready || !out_valid)) begin
        waitc[i]++;
        chk(waitc[i] <= N, $sformatf("input %0d starved", i));
      end else if (!in_valid[i]) waitc[i] = 0;
    end
  end

  int order_ok;
  initial begin
    in_valid = 0; out_ready = 1;
    for (int i = 0; i < N; i++) begin seq[i] = 0; waitc[i] = 0; in_data[i] = '0; end
    #10 rst_n = 1;
    @(negedge clk);
    // all inputs busy: grants rotate 0,1,2,...
    in_valid = '1;
    for (int i = 0; i < N; i++) in_data[i] = {4'(i), 11'(seq[i])};
    order_ok = 1;
    for (int k = 0; k < 3 * N; k++) begin
      #1;
      if (in_ready != (N'(1) << (k % N))) order_ok = 0;
      @(posedge clk);
      @(negedge clk);
      for (int i = 0; i < N; i++) begin seq[i]++; in_data[i] = {4'(i), 11'(seq[i])}; end
    end
    chk(order_ok == 1, "round-robin order under full load");
    in_valid = '0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < N; i++) q[i].delete();
    // random traffic
    repeat (4000) begin
      for (int i = 0; i < N; i++)
        if (!in_valid[i] || in_ready[i]) begin
          if (in_ready[i]) seq[i]++;
          in_valid[i] = $urandom_range(0, 3) == 0;
          in_data[i] = {4'(i), 11'(seq[i])};
        end
      out_ready = $urandom_range(0, 4) != 0;
      @(negedge clk);
    end
    in_valid = '0; out_ready = 1;
    repeat (4) @(negedge clk);
    begin int left = 0; for (int i = 0; i < N; i++) left += q[i].size(); chk(left == 0, "all words delivered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cc_merge_stack: random push / pop / push+pop traffic on an 8-deep Merge
// stack, compared with a queue used as a LIFO.  Checks the top entry, empty,
// full and count every cycle; push+pop must replace the top.
module tb_cc_merge_stack;
  localparam int DW = 4, DEPTH = 8, MW = 2 + 2 * DW;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  logic [MW-1:0] push_data = '0, top_data;
  logic empty, full;
  logic [3:0] count;
  cc_merge_stack #(.DW(DW), .DEPTH(DEPTH)) u_dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [MW-1:0] q[$];
  int n_both = 0, n_full = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 5000; k++) begin
      // Bias toward filling, then toward draining.
      int bias;
      bias = ((k / 200) % 2 == 0) ? 70 : 30;
      push = ($urandom_range(99) < bias);
      pop  = ($urandom_range(99) < 100 - bias) && (q.size() > 0);
      if (push && !pop && q.size() == DEPTH) push = 0;
      push_data = MW'($urandom);
      #1;
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == DEPTH) || int'(count) != q.size()) begin
        failures++; $display("FAIL: flags at step %0d", k);
      end
      if (q.size() > 0) begin
        checks++;
        if (top_data != q[$]) begin failures++; $display("FAIL: top at step %0d", k); end
      end
      if (q.size() == DEPTH) n_full++;
      if (push && pop) n_both++;
      if (pop) void'(q.pop_back());
      if (push) q.push_back(push_data);
      @(negedge clk);
    end
    push = 0; pop = 0;
    checks++;
    if (n_both == 0 || n_full == 0) begin failures++; $display("FAIL: push+pop or full never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

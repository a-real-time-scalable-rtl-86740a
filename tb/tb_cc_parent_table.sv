// tb_cc_parent_table: random writes and reads of the Parent table checked
// against an array model, at its default size (6072 words).
module tb_cc_parent_table;
  localparam int M = 6072;
  logic clk = 0;
  logic we = 0;
  logic [12:0] waddr = '0, wdata = '0, raddr = '0, rdata;
  cc_parent_table u_dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [12:0] model[M];
  bit written[M];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Every defect its own parent, as after Init.
    for (int k = 0; k < M; k++) begin
      @(negedge clk); we = 1; waddr = 13'(k); wdata = 13'(k); model[k] = 13'(k); written[k] = 1;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      we = $urandom_range(1);
      waddr = 13'($urandom_range(M - 1));
      wdata = 13'($urandom_range(M - 1));
      raddr = 13'($urandom_range(M - 1));
      #1;
      checks++;
      if (rdata != model[raddr]) begin
        failures++;
        $display("FAIL: parent[%0d]=%0d expected %0d", raddr, rdata, model[raddr]);
      end
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

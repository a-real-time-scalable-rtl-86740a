// tb_cc_cgs: checks the Cluster Growth Stack against an array model.
// Small size (d=5, 2 rounds, 10 entries): pushes until full, rewrites random
// entries, reads every entry back, checks count/full, clears and refills.
module tb_cc_cgs;
  localparam int D = 5, R = 2, M = 10;
  localparam int EW = 5 + 4 + 1;   // vid(24 vertices) + radius + valid

  logic clk = 0, rst_n = 0;
  logic clear = 0, push = 0, we = 0;
  logic [EW-1:0] push_data = '0, wdata = '0, rdata;
  logic [3:0] waddr = '0, raddr = '0;
  logic [3:0] count;
  logic full;

  cc_cgs #(.D(D), .ROUNDS(R), .MAX_DEFECTS(M)) u_dut (.*);

  always #100 clk = ~clk;  // slow clock: verify_all steps through entries with #1
  int checks = 0, failures = 0;
  logic [EW-1:0] model[M];
  int n = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic verify_all();
    for (int k = 0; k < n; k++) begin
      raddr = 4'(k);
      #1;
      check(rdata == model[k], $sformatf("entry %0d", k));
    end
    check(int'(count) == n, "count");
    check(full == (n == M), "full");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0; n = 0;
      verify_all();
      while (n < M) begin
        push_data = EW'($urandom);
        model[n] = push_data;
        push = 1; @(negedge clk); push = 0;
        n++;
        verify_all();
      end
      for (int k = 0; k < 20; k++) begin
        waddr = 4'($urandom_range(M - 1));
        wdata = EW'($urandom);
        model[waddr] = wdata;
        we = 1; @(negedge clk); we = 0;
        verify_all();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

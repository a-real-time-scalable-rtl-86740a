// tb_cc_match: checks Match passes at d=7, 3 rounds, 16 defects.
// The testbench plays the CGS (random vertices, radii 0..5, valid bits) and
// the Merge stack.  Expected pushes are worked out with the distance written
// out in cc_ref_pkg: pair (i,j), i<j, is pushed when r_i + r_j > dist and
// (r_i - valid_i) + (r_j - valid_j) <= dist, in (i, j) order.  With the stack
// never full a pass over s entries must take s(s-1)/2 + (s-1) cycles and
// report s(s-1)/2 comparisons; with ms_full held high at random the unit must
// stall (counted) and still push the same pairs.
module tb_cc_match;
  import cc_pkg::*;
  import cc_ref_pkg::*;
  localparam int D = 7, R = 3, M = 16, NPR = 24;
  localparam int VW = 7, RW = 4, DW = 4, CW = 5, EW = VW + RW + 1, MW = 2 + 2 * DW;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic [31:0] compares, stalls;
  logic [CW-1:0] cgs_count = '0;
  logic [DW-1:0] cgs_raddr;
  logic [EW-1:0] cgs_rdata;
  logic ms_push, ms_full = 0;
  logic [MW-1:0] ms_push_data;

  cc_match #(.D(D), .ROUNDS(R), .MAX_DEFECTS(M)) u_dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [EW-1:0] cgs[M];
  assign cgs_rdata = cgs[cgs_raddr];
  logic [MW-1:0] pushes[$];
  bit random_full = 0;
  always @(posedge clk) if (ms_push) pushes.push_back(ms_push_data);
  always @(negedge clk) ms_full <= random_full ? 1'($urandom_range(1)) : 1'b0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total_stalls = 0, total_pushes = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      int n, cnt;
      int vid[M], rad[M];
      bit val[M];
      logic [MW-1:0] exp_push[$];
      n = (k % 25 == 0) ? (k % 2) : $urandom_range(M, 2);
      exp_push.delete();
      for (int i = 0; i < n; i++) begin
        vid[i] = $urandom_range(R * NPR - 1);
        rad[i] = $urandom_range(5);
        val[i] = (rad[i] > 0) ? 1'($urandom) : 1'b0;
        cgs[i] = {VW'(vid[i]), RW'(rad[i]), val[i]};
      end
      for (int i = 0; i < n; i++)
        for (int j = i + 1; j < n; j++) begin
          int dd;
          dd = graph_dist(D, vid[i], vid[j]);
          if (rad[i] + rad[j] > dd && rad[i] - val[i] + rad[j] - val[j] <= dd)
            exp_push.push_back({MRG_PAIR, DW'(i), DW'(j)});
        end
      cgs_count = CW'(n);
      random_full = (k % 3 == 2);
      pushes.delete();
      @(negedge clk); start = 1;
      @(posedge clk); #1; start = 0;
      cnt = 0;
      while (!done) begin @(posedge clk); #1; cnt++; end
      if (!random_full)
        check(cnt == (n >= 2 ? n * (n - 1) / 2 + n - 1 : 0), $sformatf("pass %0d: %0d cycles for %0d entries", k, cnt, n));
      check(int'(compares) == (n >= 2 ? n * (n - 1) / 2 : 0), "comparison count s(s-1)/2");
      check(pushes.size() == exp_push.size(), $sformatf("pass %0d: %0d pushes expected %0d", k, pushes.size(), exp_push.size()));
      foreach (exp_push[i]) if (i < pushes.size()) check(pushes[i] == exp_push[i], "pushed pair");
      total_stalls += int'(stalls);
      total_pushes += pushes.size();
    end
    check(total_stalls > 0 && total_pushes > 0, "stalls and pushes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cc_grow: checks one Grow pass at a time, d=7, 3 rounds, 16 defects.
// The testbench plays the memories: a CGS array, a Parent table holding a
// random forest (chains of up to several hops), and random Parity, Boundary
// and Logical bits.  Expected results are worked out here: per entry the
// root, valid = parity & ~boundary of the root, radius + valid, the boundary
// collisions that are new (old radius <= distance < new radius, distance x1
// to the logical boundary and 7-x1 to the other), any_valid, and the
// correction (XOR over roots of parity & logical).  With the Merge stack
// never full the pass must take sum(4 + hops + pushes) cycles; a second run
// holds ms_full high at random and checks the results are unchanged.
module tb_cc_grow;
  import cc_pkg::*;
  localparam int D = 7, R = 3, M = 16, NPR = 24;
  localparam int VW = 7, RW = 4, DW = 4, CW = 5, EW = VW + RW + 1, MW = 2 + 2 * DW;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, any_valid, correction;
  logic [CW-1:0] cgs_count = '0;
  logic [DW-1:0] cgs_raddr, cgs_waddr, pt_raddr;
  logic [EW-1:0] cgs_rdata, cgs_wdata;
  logic cgs_we;
  logic [DW-1:0] pt_rdata;
  logic [M-1:0] parity = '0, boundary = '0, logical = '0;
  logic ms_push, ms_full = 0;
  logic [MW-1:0] ms_push_data;

  cc_grow #(.D(D), .ROUNDS(R), .MAX_DEFECTS(M)) u_dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [EW-1:0] cgs[M];
  logic [DW-1:0] par[M];
  assign cgs_rdata = cgs[cgs_raddr];
  assign pt_rdata  = par[pt_raddr];
  logic [MW-1:0] pushes[$];
  bit random_full = 0;

  always @(posedge clk) begin
    if (cgs_we) cgs[cgs_waddr] <= cgs_wdata;
    if (ms_push) pushes.push_back(ms_push_data);
  end
  always @(negedge clk) ms_full <= random_full ? 1'($urandom_range(1)) : 1'b0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_hits = 0, n_corr = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      int n, exp_cycles, cnt;
      int vid[M], rad[M], x1[M];
      logic [EW-1:0] exp_entry[M];
      logic [MW-1:0] exp_push[$];
      bit exp_any, exp_corr;
      n = (k % 10 == 0) ? 1 : $urandom_range(M, 2);
      exp_push.delete();
      // Random forest: parent of i is i or an earlier defect.
      for (int i = 0; i < n; i++) begin
        vid[i] = $urandom_range(R * NPR - 1);
        x1[i]  = (vid[i] % NPR) % (D - 1) + 1;
        case ($urandom_range(3))
          0: rad[i] = x1[i];
          1: rad[i] = D - x1[i];
          default: rad[i] = $urandom_range(4);
        endcase
        par[i] = ($urandom_range(2) == 0 || i == 0) ? DW'(i) : DW'($urandom_range(i - 1));
        cgs[i] = {VW'(vid[i]), RW'(rad[i]), 1'($urandom)};
        parity[i] = 1'($urandom); boundary[i] = 1'($urandom_range(3) == 0); logical[i] = 1'($urandom);
      end
      cgs_count = CW'(n);
      // Expected.
      exp_any = 0; exp_corr = 0; exp_cycles = 0;
      for (int i = 0; i < n; i++) begin
        int rt, hops, rn, np;
        bit v;
        rt = i; hops = 0;
        while (int'(par[rt]) != rt) begin rt = par[rt]; hops++; end
        v = parity[rt] & ~boundary[rt];
        rn = rad[i] + v;
        exp_entry[i] = {VW'(vid[i]), RW'(rn), v};
        exp_any |= v;
        if (rt == i) exp_corr ^= parity[i] & logical[i];
        np = 0;
        if (v && rn > x1[i] && rad[i] <= x1[i]) begin exp_push.push_back({MRG_LOGICAL, DW'(i), DW'(0)}); np++; end
        if (v && rn > D - x1[i] && rad[i] <= D - x1[i]) begin exp_push.push_back({MRG_BOUNDARY, DW'(i), DW'(0)}); np++; end
        exp_cycles += 4 + hops + np;
        n_hits += np;
      end
      if (exp_corr) n_corr++;
      random_full = (k % 2 == 1);
      pushes.delete();
      @(negedge clk); start = 1;
      @(posedge clk); #1; start = 0;
      cnt = 0;
      do begin @(posedge clk); #1; cnt++; end while (!done);
      if (!random_full) check(cnt == exp_cycles, $sformatf("pass %0d cycles %0d expected %0d", k, cnt, exp_cycles));
      check(any_valid == exp_any, "any_valid");
      check(correction == exp_corr, "correction");
      for (int i = 0; i < n; i++) check(cgs[i] == exp_entry[i], $sformatf("pass %0d entry %0d", k, i));
      check(pushes.size() == exp_push.size(), $sformatf("pass %0d pushes %0d expected %0d", k, pushes.size(), exp_push.size()));
      foreach (exp_push[i]) if (i < pushes.size()) check(pushes[i] == exp_push[i], "push contents");
    end
    check(n_hits > 0 && n_corr > 0, "boundary hits and corrections exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

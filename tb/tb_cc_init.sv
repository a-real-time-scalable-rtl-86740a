// tb_cc_init: checks the Init unit at d=5, 5 rounds (60 vertices), 16 bits
// scanned per cycle, capacity cut to 8 defects.
// For random syndromes it collects every push and checks: entries come in
// ascending vertex order as {vid, radius 0, valid 1}; the k-th defect gets
// parent[k] = k and its parity set; the CGS and registers are cleared at
// start; num_defects and overflow are right; and the scan takes exactly
// (set bits) + ceil(60/16) cycles from start to done.
module tb_cc_init;
  localparam int D = 5, R = 5, N = 60, M = 8, SW = 16, NWORDS = 4;
  localparam int VW = 6, RW = 4, DW = 3, CW = 4, EW = VW + RW + 1;

  logic clk = 0, rst_n = 0, start = 0;
  logic [N-1:0] syndrome = '0;
  logic busy, done, overflow;
  logic [CW-1:0] num_defects;
  logic cgs_clear, cgs_push;
  logic [EW-1:0] cgs_push_data;
  logic pt_we;
  logic [DW-1:0] pt_waddr, pt_wdata;
  logic reg_clear, reg_init_we;
  logic [DW-1:0] reg_init_idx;

  cc_init #(.D(D), .ROUNDS(R), .MAX_DEFECTS(M), .SCAN_W(SW)) u_dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int pushed[$];
  int n_clear = 0, n_overflow = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (cgs_clear && reg_clear) n_clear++;
    if (cgs_push) begin
      automatic int k = pushed.size();
      check(cgs_push_data[RW:0] == {RW'(0), 1'b1}, "entry radius 0 valid 1");
      check(pt_we && int'(pt_waddr) == k && int'(pt_wdata) == k, "parent[k] = k");
      check(reg_init_we && int'(reg_init_idx) == k, "parity[k] set");
      pushed.push_back(int'(cgs_push_data[EW-1 -: VW]));
    end else begin
      check(!pt_we && !reg_init_we, "no stray writes");
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      int exp[$];
      int nset, cnt, pct;
      exp.delete();
      pct = (k % 3 == 0) ? 3 : (k % 3 == 1) ? 10 : 25;
      for (int v = 0; v < N; v++) syndrome[v] = ($urandom_range(99) < pct);
      if (k == 0) syndrome = '0;
      nset = 0;
      for (int v = 0; v < N; v++) if (syndrome[v]) begin nset++; if (exp.size() < M) exp.push_back(v); end
      pushed.delete();
      n_clear = 0;
      @(negedge clk); start = 1;
      @(posedge clk); #1; start = 0;
      cnt = 0;
      do begin @(posedge clk); #1; cnt++; end while (!done);
      check(cnt == nset + NWORDS, $sformatf("scan cycles %0d expected %0d", cnt, nset + NWORDS));
      check(n_clear == 1, "cleared once at start");
      check(pushed.size() == exp.size(), "number of pushes");
      foreach (exp[i]) if (i < pushed.size()) check(pushed[i] == exp[i], $sformatf("push %0d vid %0d expected %0d", i, pushed[i], exp[i]));
      check(int'(num_defects) == exp.size(), "num_defects");
      check(overflow == (nset > M), "overflow flag");
      if (nset > M) n_overflow++;
    end
    check(n_overflow > 0, "overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

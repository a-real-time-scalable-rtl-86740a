// tb_cc_union: checks the Union sub-unit with 16 defects.
// The testbench plays the Merge stack (a queue read as a LIFO) and the Parent
// table, and applies the register operations Union issues to its own copy
// of the Parity/Boundary/Logical bits.  A batch of random requests (pairs,
// logical and other boundary hits) is loaded, then Union is enabled.  The
// expected outcome is replayed here in pop order: roots found by following
// parents, the second root linked under the first, registers folded.  The
// Parent table, the registers and the cycle count (per request 1 + hops(a)+1
// [+ hops(b)+1 for a pair]) must match.  Nothing may be popped while en is 0.
module tb_cc_union;
  import cc_pkg::*;
  localparam int M = 16, DW = 4, MW = 2 + 2 * DW;

  logic clk = 0, rst_n = 0, en = 0;
  logic busy;
  logic [31:0] unions, bnd_hits;
  logic ms_empty, ms_pop;
  logic [MW-1:0] ms_top;
  logic [DW-1:0] pt_raddr, pt_rdata, pt_waddr, pt_wdata;
  logic pt_we;
  logic bnd_we, bnd_logical, uni_we;
  logic [DW-1:0] bnd_idx, uni_root, uni_child;

  cc_union #(.MAX_DEFECTS(M)) u_dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [MW-1:0] q[$];
  logic [DW-1:0] par[M];
  logic [M-1:0] p, b, l;
  assign ms_empty = (q.size() == 0);
  assign ms_top   = ms_empty ? '0 : q[$];
  assign pt_rdata = par[pt_raddr];

  always @(posedge clk) if (rst_n) begin
    if (ms_pop) void'(q.pop_back());
    if (pt_we) par[pt_waddr] <= pt_wdata;
    if (bnd_we) begin b[bnd_idx] <= 1'b1; if (bnd_logical) l[bnd_idx] <= 1'b1; end
    if (uni_we) begin
      p[uni_root] <= p[uni_root] ^ p[uni_child];
      p[uni_child] <= 1'b0;
      b[uni_root] <= b[uni_root] | b[uni_child];
      l[uni_root] <= l[uni_root] | l[uni_child];
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int root_of(ref logic [DW-1:0] pp[M], input int x, output int hops);
    hops = 0;
    while (int'(pp[x]) != x) begin x = pp[x]; hops++; end
    return x;
  endfunction

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total_links = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      logic [DW-1:0] ep[M];
      logic [M-1:0] epar, ebnd, elog;
      logic [MW-1:0] reqs[$];
      int nreq, exp_cycles, cnt, links;
      reqs.delete();
      for (int i = 0; i < M; i++) begin par[i] = DW'(i); ep[i] = DW'(i); end
      p = M'($urandom); b = '0; l = '0;
      epar = p; ebnd = '0; elog = '0;
      nreq = $urandom_range(20, 1);
      for (int r = 0; r < nreq; r++) begin
        logic [MW-1:0] rq;
        int kind;
        kind = $urandom_range(5);
        if (kind == 0)      rq = {MRG_LOGICAL, DW'($urandom), DW'(0)};
        else if (kind == 1) rq = {MRG_BOUNDARY, DW'($urandom), DW'(0)};
        else                rq = {MRG_PAIR, DW'($urandom), DW'($urandom)};
        q.push_back(rq);
        reqs.push_back(rq);
      end
      // Replay in pop order (last pushed first).
      exp_cycles = 0; links = 0;
      for (int r = nreq - 1; r >= 0; r--) begin
        int ra, rb, ha, hb;
        ra = root_of(ep, int'(reqs[r][2*DW-1 -: DW]), ha);
        exp_cycles += 2 + ha;
        if (reqs[r][MW-1 -: 2] == MRG_PAIR) begin
          rb = root_of(ep, int'(reqs[r][DW-1:0]), hb);
          exp_cycles += 1 + hb;
          if (ra != rb) begin
            ep[rb] = DW'(ra);
            epar[ra] ^= epar[rb]; epar[rb] = 0;
            ebnd[ra] |= ebnd[rb]; elog[ra] |= elog[rb];
            links++;
          end
        end else begin
          ebnd[ra] = 1;
          if (reqs[r][MW-1 -: 2] == MRG_LOGICAL) elog[ra] = 1;
        end
      end
      // Disabled: nothing happens.
      repeat (3) @(posedge clk);
      #1;
      check(q.size() == nreq && !busy, "no pop while disabled");
      @(negedge clk); en = 1;
      cnt = 0;
      do begin @(posedge clk); #1; cnt++; end while (q.size() > 0 || busy);
      @(negedge clk); en = 0;
      check(cnt == exp_cycles, $sformatf("batch %0d: %0d cycles expected %0d", k, cnt, exp_cycles));
      for (int i = 0; i < M; i++) check(par[i] == ep[i], $sformatf("batch %0d: parent[%0d]=%0d expected %0d", k, i, par[i], ep[i]));
      check(p == epar && b == ebnd && l == elog, $sformatf("batch %0d: registers", k));
      total_links += links;
    end
    check(total_links > 0, "links exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cc_decoder: end-to-end test of the CC decoder through its register bus.
//
// Runs at d=7, 7 rounds (168 vertices), with the defect capacity cut to 24
// and the Merge stack to 48 so that overflow and Match stalls can be reached.
// Each decode writes the syndrome, starts the decoder, polls STATUS and
// compares correction, defect count, overflow flag and number of Grow passes
// with the behavioural reference in cc_ref_pkg.  Directed cases:
//   - no defects (one pass, correction 0);
//   - single defects at every x1: the defect reaches the nearer boundary
//     first, so the correction is 1 exactly when x1 < d - x1;
//   - a four-defect case shaped like the paper's worked example: an adjacent
//     pair that merges, one defect next to the logical boundary and one next
//     to the other boundary; expected correction 1 after 3 Grow passes, and
//     the final stack contents are checked entry by entry;
//   - random syndromes at several densities, including ones past capacity.
// Mechanisms counted (each must occur): union of two clusters, logical
// boundary hit, other boundary hit, Match stall on a full Merge stack, defect
// overflow, decodes needing more than 2 Grow passes, zero-defect decode.
module tb_cc_decoder;
  import cc_ref_pkg::*;

  localparam int D      = 7;
  localparam int ROUNDS = 7;
  localparam int MAXDEF = 24;
  localparam int N      = ROUNDS * (D * D - 1) / 2;
  localparam int NW     = (N + 31) / 32;

  logic        clk = 0;
  logic        rst_n = 0;
  logic        bus_valid = 0, bus_write = 0;
  logic [15:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0;
  logic [31:0] bus_rdata;
  logic        irq_done;

  cc_decoder #(.D(D), .ROUNDS(ROUNDS), .MAX_DEFECTS(MAXDEF), .MERGE_DEPTH(2 * MAXDEF),
               .SCAN_W(16)) u_dut (
    .clk, .rst_n, .bus_valid, .bus_write, .bus_addr, .bus_wdata, .bus_rdata, .irq_done
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_unions = 0, n_logical = 0, n_other = 0, n_stall = 0, n_overflow = 0;
  int n_multipass = 0, n_empty = 0;
  longint cycles = 0;

  always @(posedge clk) begin
    cycles++;
    if (rst_n) begin
      if (u_dut.uni_we) n_unions++;
      if (u_dut.bnd_we && u_dut.bnd_logical) n_logical++;
      if (u_dut.bnd_we && !u_dut.bnd_logical) n_other++;
      if (u_dut.u_match.stall) n_stall++;
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic bus_wr(logic [15:0] a, logic [31:0] v);
    @(negedge clk);
    bus_valid = 1; bus_write = 1; bus_addr = a; bus_wdata = v;
    @(negedge clk);
    bus_valid = 0; bus_write = 0;
  endtask

  task automatic bus_rd(logic [15:0] a, output logic [31:0] v);
    @(negedge clk);
    bus_valid = 1; bus_write = 0; bus_addr = a;
    @(negedge clk);
    bus_valid = 0;
    v = bus_rdata;
  endtask

  // Decode one syndrome and compare with the reference; returns the cycles
  // from the start pulse to done.
  task automatic run(bit syn[], string name, output int lat);
    logic [31:0] w, st, ps;
    ref_result_t exp;
    longint t0;
    for (int k = 0; k < NW; k++) begin
      w = '0;
      for (int b = 0; b < 32; b++) if (32 * k + b < N) w[b] = syn[32 * k + b];
      bus_wr(16'h0100 + 16'(4 * k), w);
    end
    // Read one syndrome word back.
    bus_rd(16'h0100, w);
    for (int b = 0; b < 32; b++) check(w[b] == syn[b], {name, ": syndrome readback"});
    bus_wr(16'h0000, 32'h1);
    t0 = cycles;
    repeat (2) @(posedge clk);  // start pulse, then done drops
    check(!irq_done, {name, ": done cleared by start"});
    do @(posedge clk); while (!irq_done);
    lat = int'(cycles - t0);
    bus_rd(16'h0004, st);
    bus_rd(16'h0008, ps);
    exp = decode(D, MAXDEF, syn);
    check(st[0] == 1'b0, {name, ": not busy when done"});
    check(st[1] == 1'b1, {name, ": done"});
    check(st[3] == exp.correction, $sformatf("%s: correction %0d expected %0d", name, st[3], exp.correction));
    check(st[2] == exp.overflow, {name, ": overflow flag"});
    check(int'(st[31:16]) == exp.num_defects, $sformatf("%s: defects %0d expected %0d", name, st[31:16], exp.num_defects));
    check(int'(ps) == exp.passes, $sformatf("%s: passes %0d expected %0d", name, ps, exp.passes));
    if (exp.overflow) n_overflow++;
    $display("%s: defects=%0d passes=%0d cycles=%0d", name, exp.num_defects, exp.passes, lat);
    if (exp.passes > 2) n_multipass++;
    if (exp.num_defects == 0) n_empty++;
  endtask

  function automatic int vid_of(int x1, int x2, int t);
    return t * (D * D - 1) / 2 + x2 * (D - 1) + (x1 - 1);
  endfunction

  initial begin
    bit syn[];
    int lat;
    syn = new[N];
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // No defects.
    foreach (syn[v]) syn[v] = 0;
    run(syn, "empty", lat);

    // Single defects: the nearer boundary decides.
    for (int x1 = 1; x1 < D; x1++) begin
      logic [31:0] st;
      foreach (syn[v]) syn[v] = 0;
      syn[vid_of(x1, 1, 3)] = 1;
      run(syn, $sformatf("single x1=%0d", x1), lat);
      bus_rd(16'h0004, st);
      check(st[3] == (x1 < D - x1), $sformatf("single x1=%0d: nearer boundary rule", x1));
    end

    // Worked example: pair at (3,0),(4,0); (1,3) by the logical boundary;
    // (6,3) by the other boundary.
    begin
      logic [31:0] st, ps;
      int exp_vid[4];
      int exp_r[4];
      bit exp_v[4];
      exp_vid = '{vid_of(3, 0, 0), vid_of(4, 0, 0), vid_of(1, 3, 0), vid_of(6, 3, 0)};
      exp_r   = '{1, 1, 2, 2};
      exp_v   = '{0, 0, 0, 0};
      foreach (syn[v]) syn[v] = 0;
      foreach (exp_vid[k]) syn[exp_vid[k]] = 1;
      run(syn, "worked example", lat);
      bus_rd(16'h0004, st);
      bus_rd(16'h0008, ps);
      check(st[3] == 1'b1, "worked example: correction 1");
      check(ps == 3, "worked example: 3 grow passes");
      for (int k = 0; k < 4; k++) begin
        logic [u_dut.EW-1:0] e;
        e = u_dut.u_cgs.mem[k];
        check(int'(e[u_dut.EW-1 -: u_dut.VW]) == exp_vid[k], $sformatf("worked example: entry %0d vid", k));
        check(int'(e[u_dut.RW:1]) == exp_r[k], $sformatf("worked example: entry %0d radius %0d", k, e[u_dut.RW:1]));
        check(e[0] == exp_v[k], $sformatf("worked example: entry %0d valid", k));
      end
      // Roots 0 and 2, 3; 1 linked under 0.
      check(u_dut.u_parent.mem[1] == 0, "worked example: parent[1] = 0");
      check(u_dut.u_regs.logical[2] == 1'b1 && u_dut.u_regs.logical[3] == 1'b0, "worked example: logical register");
      check(u_dut.u_regs.boundary[2] && u_dut.u_regs.boundary[3], "worked example: boundary register");
    end

    // Dense block: many defects close together, fills the Merge stack.
    foreach (syn[v]) syn[v] = 0;
    for (int v = 0; v < 23; v++) syn[v] = 1;  // odd: keeps growing
    run(syn, "dense", lat);

    // Random syndromes.
    for (int k = 0; k < 120; k++) begin
      int pct;
      pct = (k % 4 == 0) ? 2 : (k % 4 == 1) ? 5 : (k % 4 == 2) ? 10 : 18;
      foreach (syn[v]) syn[v] = ($urandom_range(99) < pct);
      run(syn, $sformatf("random %0d (%0d%%)", k, pct), lat);
    end

    $display("mechanisms: unions=%0d logical_hits=%0d other_hits=%0d match_stall_cycles=%0d overflows=%0d multipass=%0d empty=%0d",
             n_unions, n_logical, n_other, n_stall, n_overflow, n_multipass, n_empty);
    check(n_unions > 0, "mechanism: union");
    check(n_logical > 0, "mechanism: logical boundary hit");
    check(n_other > 0, "mechanism: other boundary hit");
    check(n_stall > 0, "mechanism: Match stall on full Merge stack");
    check(n_overflow > 0, "mechanism: defect overflow");
    check(n_multipass > 0, "mechanism: more than 2 grow passes");
    check(n_empty > 0, "mechanism: zero-defect decode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

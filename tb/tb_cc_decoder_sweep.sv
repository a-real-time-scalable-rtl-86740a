// tb_cc_decoder_sweep: the CC decoder built at every code distance of the
// FPGA results table, d = 3, 5, ..., 21, each with d rounds.
//
// One decoder instance per distance runs in parallel with its own register
// bus.  Each decodes a syndrome with no defects and then random syndromes at
// a 1.35% defect rate.  That rate is the one reported for d = 23 at p = 0.1%.
// Using it at every distance is this testbench's approximation; the rate for
// the smaller codes is not given.  Every result (correction, defect count,
// Grow passes, overflow) is compared with the behavioural reference in
// cc_ref_pkg.  The mean decode latency is printed next to the published FPGA
// cycle count for the same distance (execution time per round x d rounds x
// Fmax) and must stay within 4x of it.
module tb_cc_decoder_sweep;
  import cc_ref_pkg::*;

  localparam int NDIST = 10;
  localparam int SHOTS = 20;
  // Published FPGA execution time per round (ns) and Fmax (MHz), d = 3..21.
  localparam int PAPER_NS[NDIST]  = '{70, 60, 60, 70, 110, 160, 250, 370, 550, 810};
  localparam int PAPER_MHZ[NDIST] = '{449, 445, 406, 408, 412, 411, 403, 408, 402, 405};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;
  bit finished[NDIST];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NDIST; g++) begin : g_dist
    localparam int D  = 3 + 2 * g;
    localparam int N  = D * (D * D - 1) / 2;
    localparam int NW = (N + 31) / 32;

    logic        bus_valid = 0, bus_write = 0;
    logic [15:0] bus_addr = '0;
    logic [31:0] bus_wdata = '0;
    logic [31:0] bus_rdata;
    logic        irq_done;

    cc_decoder #(.D(D), .ROUNDS(D)) u_dut (
      .clk, .rst_n, .bus_valid, .bus_write, .bus_addr, .bus_wdata, .bus_rdata, .irq_done
    );

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

    task automatic run(bit syn[], output int lat);
      logic [31:0] w, st, ps;
      ref_result_t exp;
      longint t0;
      for (int k = 0; k < NW; k++) begin
        w = '0;
        for (int b = 0; b < 32; b++) if (32 * k + b < N) w[b] = syn[32 * k + b];
        bus_wr(16'h0100 + 16'(4 * k), w);
      end
      bus_wr(16'h0000, 32'h1);
      t0 = cycles;
      repeat (2) @(posedge clk);
      do @(posedge clk); while (!irq_done);
      lat = int'(cycles - t0);
      bus_rd(16'h0004, st);
      bus_rd(16'h0008, ps);
      exp = decode(D, N, syn);
      check(st[3] == exp.correction, $sformatf("d=%0d: correction %0d expected %0d", D, st[3], exp.correction));
      check(st[2] == 1'b0, $sformatf("d=%0d: no overflow", D));
      check(int'(st[31:16]) == exp.num_defects, $sformatf("d=%0d: defects", D));
      check(int'(ps) == exp.passes, $sformatf("d=%0d: passes %0d expected %0d", D, ps, exp.passes));
    endtask

    initial begin
      bit syn[];
      int lat, paper;
      longint total;
      syn = new[N];
      @(posedge rst_n);
      repeat (2) @(posedge clk);
      foreach (syn[v]) syn[v] = 0;
      run(syn, lat);
      total = 0;
      for (int k = 0; k < SHOTS; k++) begin
        foreach (syn[v]) syn[v] = ($urandom_range(9999) < 135);
        run(syn, lat);
        total += lat;
      end
      paper = PAPER_NS[g] * D * PAPER_MHZ[g] / 1000;
      $display("d=%0d: %0d vertices, mean cycles per decode %0d, published FPGA %0d (%0d ns/round x %0d rounds x %0d MHz)",
               D, N, total / SHOTS, paper, PAPER_NS[g], D, PAPER_MHZ[g]);
      check(total / SHOTS < 4 * paper, $sformatf("d=%0d: mean latency within 4x of the published cycle count", D));
      finished[g] = 1;
    end
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (finished.and() == 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

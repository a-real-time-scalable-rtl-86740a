// tb_cc_decoder_full: the CC decoder at its default size, d=23 with 23
// rounds (6072 vertices, 1057-qubit surface code), driven through the
// register bus.
//
// Decodes a syndrome with no defects, then random syndromes whose defect rate
// is 1.35% (about 82 defects), the rate reported for the circuit-level noise
// model at p=0.1% and d=23, and a few at 3x and 6x that rate.  Each result
// (correction, defect count, Grow passes) is compared with the behavioural
// reference in cc_ref_pkg.  The decode latency in cycles is printed next to
// the paper's figure for this size: 0.24 us per round at 2 GHz over 23
// rounds, about 11,000 cycles on average; the check allows up to 4x that for
// the 1.35% syndromes.
module tb_cc_decoder_full;
  import cc_ref_pkg::*;

  localparam int D      = 23;
  localparam int ROUNDS = 23;
  localparam int N      = ROUNDS * (D * D - 1) / 2;
  localparam int NW     = (N + 31) / 32;

  logic        clk = 0;
  logic        rst_n = 0;
  logic        bus_valid = 0, bus_write = 0;
  logic [15:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0;
  logic [31:0] bus_rdata;
  logic        irq_done;

  cc_decoder u_dut (
    .clk, .rst_n, .bus_valid, .bus_write, .bus_addr, .bus_wdata, .bus_rdata, .irq_done
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  initial begin
    repeat (20000000) @(posedge clk);
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

  task automatic run(bit syn[], string name, output int lat);
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
    check(st[1] == 1'b1, {name, ": done"});
    check(st[3] == exp.correction, $sformatf("%s: correction %0d expected %0d", name, st[3], exp.correction));
    check(st[2] == 1'b0, {name, ": no overflow"});
    check(int'(st[31:16]) == exp.num_defects, $sformatf("%s: defects %0d expected %0d", name, st[31:16], exp.num_defects));
    check(int'(ps) == exp.passes, $sformatf("%s: passes %0d expected %0d", name, ps, exp.passes));
    $display("%s: defects=%0d passes=%0d correction=%0d cycles=%0d (%0d per round)",
             name, exp.num_defects, exp.passes, st[3], lat, lat / ROUNDS);
  endtask

  initial begin
    bit syn[];
    int lat;
    longint total;
    syn = new[N];
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    foreach (syn[v]) syn[v] = 0;
    run(syn, "empty", lat);
    check(lat < 200, "empty decode is short");

    total = 0;
    for (int k = 0; k < 8; k++) begin
      foreach (syn[v]) syn[v] = ($urandom_range(9999) < 135);
      run(syn, $sformatf("rate 1.35%% #%0d", k), lat);
      check(lat < 4 * 11040, "1.35% decode within 4x the paper's average cycle count");
      total += lat;
    end
    $display("average cycles at 1.35%% defect rate: %0d (paper, ASIC d=23: 0.24 us/round x 23 rounds x 2 GHz = 11040)",
             total / 8);

    for (int k = 0; k < 2; k++) begin
      foreach (syn[v]) syn[v] = ($urandom_range(9999) < 405);
      run(syn, $sformatf("rate 4.05%% #%0d", k), lat);
    end
    foreach (syn[v]) syn[v] = ($urandom_range(9999) < 810);
    run(syn, "rate 8.1%", lat);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

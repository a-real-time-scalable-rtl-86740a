// tb_cc_sysreg: checks the register interface at its default size (6072
// syndrome bits, 190 words).  Writes random syndrome words and checks both
// the syndrome output bits and read-back; checks STATUS and PASSES packing;
// start pulses exactly once per CTRL write of 1 while idle and not at all
// while busy; syndrome writes are ignored while busy; unmapped reads give 0.
module tb_cc_sysreg;
  localparam int N = 6072, NW = 190;
  logic clk = 0, rst_n = 0;
  logic bus_valid = 0, bus_write = 0;
  logic [15:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic [N-1:0] syndrome;
  logic start;
  logic busy = 0, done = 0, overflow = 0, correction = 0;
  logic [12:0] num_defects = '0;
  logic [15:0] grow_passes = '0;

  cc_sysreg u_dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_start = 0;
  always @(posedge clk) if (start) n_start++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(logic [15:0] a, logic [31:0] v);
    @(negedge clk); bus_valid = 1; bus_write = 1; bus_addr = a; bus_wdata = v;
    @(negedge clk); bus_valid = 0; bus_write = 0;
  endtask

  task automatic rd(logic [15:0] a, output logic [31:0] v);
    @(negedge clk); bus_valid = 1; bus_write = 0; bus_addr = a;
    @(negedge clk); bus_valid = 0; v = bus_rdata;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] model[NW];
    logic [31:0] v;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < NW; k++) begin
      model[k] = $urandom;
      if (k == NW - 1) model[k][31:N % 32] = '0;
      wr(16'h0100 + 16'(4 * k), model[k]);
    end
    for (int k = 0; k < NW; k++) begin
      rd(16'h0100 + 16'(4 * k), v);
      check(v == model[k], $sformatf("syndrome word %0d readback", k));
    end
    for (int i = 0; i < N; i++) check(syndrome[i] == model[i / 32][i % 32], "syndrome bit");
    // Status packing.
    for (int k = 0; k < 64; k++) begin
      logic [3:0] f;
      f = 4'(k);
      busy = 0; done = f[1]; overflow = f[2]; correction = f[3];
      num_defects = 13'($urandom_range(6072)); grow_passes = 16'd77;
      rd(16'h0004, v);
      check(v == {16'(num_defects), 12'd0, f[3:1], 1'b0}, $sformatf("STATUS %h", v));
    end
    rd(16'h0008, v);
    check(v == 32'd77, "PASSES");
    rd(16'h0ffc, v);
    check(v == 32'd0, "unmapped read");
    // Start.
    n_start = 0;
    wr(16'h0000, 32'h1);
    repeat (2) @(negedge clk);
    check(n_start == 1, "one start pulse");
    wr(16'h0000, 32'h0);
    check(n_start == 1, "writing 0 does not start");
    busy = 1;
    wr(16'h0000, 32'h1);
    check(n_start == 1, "no start while busy");
    wr(16'h0100, ~model[0]);
    rd(16'h0100, v);
    check(v == model[0], "syndrome write ignored while busy");
    busy = 0;
    wr(16'h0100, ~model[0]);
    rd(16'h0100, v);
    check(v == ~model[0], "syndrome write accepted when idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cc_control: checks the decode sequencing.
// The testbench answers for the units: Init finishes after a few cycles,
// each Grow pass finishes after a random delay and reports growth for the
// first K passes (K random per decode), Match finishes after a random delay,
// and Union stays busy / the Merge stack stays non-empty for a while after
// Match is done.  Checked: the phase order INIT, (GROW, MERGE) x K, GROW,
// DONE; one start pulse per phase entry; union_en exactly in MERGE; MERGE is
// left only once Match is done, the stack is empty and Union is idle; done,
// the correction of the last pass and the pass count K+1.
module tb_cc_control;
  import cc_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, correction;
  logic [15:0] grow_passes;
  phase_e phase;
  logic init_start, init_done = 0;
  logic grow_start, grow_done = 0, grow_any_valid = 0, grow_correction = 0;
  logic match_start, match_done = 0;
  logic union_en, union_busy = 0, ms_empty = 1;

  cc_control u_dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_init = 0, n_grow = 0, n_match = 0;
  int valid_passes = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Unit responders.
  always @(posedge clk) if (rst_n) begin
    check(union_en == (phase == PH_MERGE), "union_en only in MERGE");
    if (init_start) begin
      n_init++;
      fork begin repeat (3) @(negedge clk); init_done = 1; @(negedge clk); init_done = 0; end join_none
    end
    if (grow_start) begin
      n_grow++;
      check(phase == PH_GROW, "grow_start in GROW");
      fork begin
        repeat ($urandom_range(8, 1)) @(negedge clk);
        grow_any_valid = (n_grow <= valid_passes);
        grow_correction = 1'($urandom);
        grow_done = 1; @(negedge clk); grow_done = 0;
      end join_none
    end
    if (match_start) begin
      n_match++;
      check(phase == PH_MERGE, "match_start in MERGE");
      fork begin
        ms_empty = 0; union_busy = 1;
        repeat ($urandom_range(8, 1)) @(negedge clk);
        match_done = 1; @(negedge clk); match_done = 0;
        repeat ($urandom_range(5)) begin
          @(negedge clk);
          check(phase == PH_MERGE, "stays in MERGE while stack not empty");
        end
        ms_empty = 1;
        repeat ($urandom_range(3)) begin
          @(negedge clk);
          check(phase == PH_MERGE, "stays in MERGE while Union busy");
        end
        union_busy = 0;
      end join_none
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 100; k++) begin
      bit last_corr;
      valid_passes = $urandom_range(6);
      n_init = 0; n_grow = 0; n_match = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      check(busy && !done, "busy after start");
      while (!done) begin
        @(posedge clk);
        last_corr = grow_correction;
      end
      #1;
      check(phase == PH_DONE && !busy, "DONE phase");
      check(correction == last_corr, "correction of the final pass");
      check(n_init == 1, "one Init");
      check(n_grow == valid_passes + 1, $sformatf("grow passes %0d expected %0d", n_grow, valid_passes + 1));
      check(n_match == valid_passes, "one Match per growing pass");
      check(int'(grow_passes) == valid_passes + 1, "grow_passes register");
      repeat (3) @(negedge clk);
      check(done, "done holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

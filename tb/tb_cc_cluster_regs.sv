// tb_cc_cluster_regs: random sequences of clear / init / boundary / union
// operations on the Parity, Boundary and Logical registers (64 defects),
// compared after every operation with a bit-vector model.
module tb_cc_cluster_regs;
  localparam int M = 64;
  logic clk = 0, rst_n = 0;
  logic clear = 0, init_we = 0, bnd_we = 0, bnd_logical = 0, uni_we = 0;
  logic [5:0] init_idx = '0, bnd_idx = '0, uni_root = '0, uni_child = '0;
  logic [M-1:0] parity, boundary, logical;
  cc_cluster_regs #(.MAX_DEFECTS(M)) u_dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [M-1:0] mp = '0, mb = '0, ml = '0;
  int n_uni = 0, n_bnd = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    checks++;
    if (parity != '0 || boundary != '0 || logical != '0) failures++;
    for (int k = 0; k < 4000; k++) begin
      int op;
      op = $urandom_range(99);
      clear = 0; init_we = 0; bnd_we = 0; uni_we = 0;
      if (op < 2) begin
        clear = 1; mp = '0; mb = '0; ml = '0;
      end else if (op < 40) begin
        init_we = 1; init_idx = 6'($urandom); mp[init_idx] = 1'b1;
      end else if (op < 60) begin
        bnd_we = 1; bnd_idx = 6'($urandom); bnd_logical = 1'($urandom);
        mb[bnd_idx] = 1'b1; if (bnd_logical) ml[bnd_idx] = 1'b1;
        n_bnd++;
      end else begin
        uni_we = 1; uni_root = 6'($urandom);
        do uni_child = 6'($urandom); while (uni_child == uni_root);
        mp[uni_root] = mp[uni_root] ^ mp[uni_child];
        mp[uni_child] = 1'b0;
        mb[uni_root] = mb[uni_root] | mb[uni_child];
        ml[uni_root] = ml[uni_root] | ml[uni_child];
        n_uni++;
      end
      @(negedge clk);
      clear = 0; init_we = 0; bnd_we = 0; uni_we = 0;
      checks++;
      if (parity != mp || boundary != mb || logical != ml) begin
        failures++;
        $display("FAIL: op %0d: parity %h/%h boundary %h/%h logical %h/%h", op, parity, mp, boundary, mb, logical, ml);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

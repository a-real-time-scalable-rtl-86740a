// cc_cluster_regs: the Parity, Boundary and Logical registers.
//
// Three bit vectors, one bit per defect, meaningful at the cluster's root:
//   parity   - the cluster holds an odd number of defects,
//   boundary - the cluster touches a boundary of the decoding graph,
//   logical  - the cluster touches the logical (left) boundary.
// Operations (one per cycle, mutually exclusive):
//   clear                      all bits to 0 (start of a decode);
//   init  idx                  parity[idx] = 1 (a new single-defect cluster);
//   bnd   idx, logical         boundary[idx] = 1, and logical[idx] = 1 if the
//                              logical boundary was reached;
//   uni   root, child          fold cluster child into cluster root:
//                              parity[root] ^= parity[child], parity[child] = 0,
//                              boundary/logical[root] |= boundary/logical[child].
// The registers and their meaning are the paper's; clearing the child's
// parity follows its worked example.  Flip-flops, synchronous active-low
// reset, updates at the clock edge, outputs read directly.
module cc_cluster_regs #(
  parameter int unsigned MAX_DEFECTS = 6072,
  localparam int unsigned DW = $clog2(MAX_DEFECTS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   init_we,
  input  logic [DW-1:0]          init_idx,
  input  logic                   bnd_we,
  input  logic [DW-1:0]          bnd_idx,
  input  logic                   bnd_logical,
  input  logic                   uni_we,
  input  logic [DW-1:0]          uni_root,
  input  logic [DW-1:0]          uni_child,
  output logic [MAX_DEFECTS-1:0] parity,
  output logic [MAX_DEFECTS-1:0] boundary,
  output logic [MAX_DEFECTS-1:0] logical
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      parity   <= '0;
      boundary <= '0;
      logical  <= '0;
    end else if (clear) begin
      parity   <= '0;
      boundary <= '0;
      logical  <= '0;
    end else if (init_we) begin
      parity[init_idx] <= 1'b1;
    end else if (bnd_we) begin
      boundary[bnd_idx] <= 1'b1;
      if (bnd_logical) logical[bnd_idx] <= 1'b1;
    end else if (uni_we) begin
      parity[uni_root]   <= parity[uni_root] ^ parity[uni_child];
      parity[uni_child]  <= 1'b0;
      boundary[uni_root] <= boundary[uni_root] | boundary[uni_child];
      logical[uni_root]  <= logical[uni_root] | logical[uni_child];
    end
  end

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({clear, init_we, bnd_we, uni_we}));
  a_uni_distinct: assert property (@(posedge clk) disable iff (!rst_n)
    uni_we |-> uni_root != uni_child);

endmodule

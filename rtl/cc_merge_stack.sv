// cc_merge_stack: the Merge stack, a LIFO of merge requests.
//
// A request is {kind, a, b}: kind PAIR asks to unite the clusters of defects
// a and b; kind BOUNDARY or LOGICAL asks to mark the cluster of defect a as
// touching the right or the logical (left) boundary (b unused).  Grow and
// Match push, Union pops.  The stack itself is named in the paper; the entry
// encoding (two boundary kinds instead of an auxiliary vertex id) and the
// depth are this design's.
//
// Timing: top_data shows the top entry combinationally while !empty.  pop
// removes it at the clock edge.  push and pop in the same cycle replace the
// top entry, so a producer and a consumer can work in parallel.  push while
// full (without pop) and pop while empty are not allowed.
module cc_merge_stack #(
  parameter int unsigned DW    = 13,
  parameter int unsigned DEPTH = 12144,
  localparam int unsigned MW   = 2 + 2 * DW,
  localparam int unsigned SW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [MW-1:0] push_data,
  input  logic          pop,
  output logic [MW-1:0] top_data,
  output logic          empty,
  output logic          full,
  output logic [SW-1:0] count
);

  logic [MW-1:0] mem [DEPTH];
  logic [SW-1:0] top_idx;

  assign top_idx  = count - 1'b1;
  assign top_data = mem[top_idx[$clog2(DEPTH)-1:0]];
  assign empty    = (count == '0);
  assign full     = (count == SW'(DEPTH));

  always_ff @(posedge clk) begin
    if (!rst_n) count <= '0;
    else if (push && !pop) count <= count + 1'b1;
    else if (pop && !push) count <= count - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (push && pop)  mem[top_idx[$clog2(DEPTH)-1:0]] <= push_data;
    else if (push)    mem[count[$clog2(DEPTH)-1:0]]   <= push_data;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) (push && !pop) |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule

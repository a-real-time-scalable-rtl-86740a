// cc_cgs: the Cluster Growth Stack (CGS).
//
// One entry per defect, in the order the Init unit found them.  An entry is
//   vid    - the decoding-graph vertex of the defect,
//   radius - how far the defect has grown (in edges),
//   valid  - 1 while the cluster containing it is still growing.
// Init appends entries with push; the Grow unit rewrites an entry in place
// through the write port; Grow and Match read entries by index.  The entry
// format is the paper's; the widths are this design's (radius: clog2(D)+1
// bits, enough because no vertex is farther than d/2 from a boundary).
//
// Timing: writes and pushes take effect at the next clock edge; the read port
// is combinational (single-cycle access).  clear empties the stack.  push and
// the write port must not be used in the same cycle.  The array stands for
// the SRAM macro of an ASIC build.
module cc_cgs
  import cc_pkg::*;
#(
  parameter int unsigned D           = 23,
  parameter int unsigned ROUNDS      = 23,
  parameter int unsigned MAX_DEFECTS = num_vertices(D, ROUNDS),
  localparam int unsigned N  = num_vertices(D, ROUNDS),
  localparam int unsigned VW = $clog2(N),
  localparam int unsigned RW = $clog2(D) + 1,
  localparam int unsigned DW = $clog2(MAX_DEFECTS),
  localparam int unsigned CW = $clog2(MAX_DEFECTS + 1),
  localparam int unsigned EW = VW + RW + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  logic [EW-1:0] push_data,
  input  logic          we,
  input  logic [DW-1:0] waddr,
  input  logic [EW-1:0] wdata,
  input  logic [DW-1:0] raddr,
  output logic [EW-1:0] rdata,
  output logic [CW-1:0] count,
  output logic          full
);

  logic [EW-1:0] mem [MAX_DEFECTS];

  always_ff @(posedge clk) begin
    if (!rst_n)      count <= '0;
    else if (clear)  count <= '0;
    else if (push)   count <= count + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (push && !clear) mem[count[DW-1:0]] <= push_data;
    else if (we)        mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
  assign full  = (count == CW'(MAX_DEFECTS));

  a_no_push_when_full: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_push_xor_write:    assert property (@(posedge clk) disable iff (!rst_n) !(push && we));

endmodule

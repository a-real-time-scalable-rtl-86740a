// cc_parent_table: the Parent table of the CC decoder.
//
// One word per defect (addressed by the defect's CGS index) holding the index
// of its parent defect.  A defect whose word holds its own index is the root
// of its cluster.  Init writes parent[k] = k for every defect; the Union
// sub-unit links one root under another; Grow and Union follow parent
// pointers to find roots.  This organisation is the paper's.
//
// Timing: one write port (effective at the next edge) and one combinational
// read port.  The array stands for the SRAM macro of an ASIC build.
module cc_parent_table #(
  parameter int unsigned MAX_DEFECTS = 6072,
  localparam int unsigned DW = $clog2(MAX_DEFECTS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [DW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [DW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [MAX_DEFECTS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule

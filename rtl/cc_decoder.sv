// cc_decoder: Collision Clustering decoder for a distance-D rotated planar
// surface code memory experiment of ROUNDS rounds.
//
// Software writes the syndrome (the defects, one bit per decoding-graph
// vertex) into cc_sysreg and sets CTRL.start.  cc_control then runs Init once
// and alternates Grow and Merge (Match + Union) until a Grow pass finds no
// cluster left to grow; STATUS.done then rises and STATUS.correction holds
// the logical correction bit: 1 if the logical measurement must be flipped.
//
// Blocks and the memory ports they own, by phase (cc_pkg::phase_e):
//   INIT   cc_init   pushes to the Cluster Growth Stack (cc_cgs), writes the
//                    Parent table (cc_parent_table), sets cluster registers;
//   GROW   cc_grow   reads/writes the CGS, reads the Parent table, pushes
//                    boundary hits to the Merge stack (cc_merge_stack);
//   MERGE  cc_match  reads the CGS and pushes colliding pairs, while
//          cc_union  pops the Merge stack, reads/writes the Parent table and
//                    updates the Parity/Boundary/Logical registers
//                    (cc_cluster_regs).
// The block structure follows the paper's micro-architecture; the muxing of
// the single memory ports by phase is this design's.  Clock: one clock, clk;
// reset: synchronous, active low.  irq_done mirrors STATUS.done.
// MERGE_DEPTH must be at least 2*MAX_DEFECTS: during a Grow pass nothing pops
// the Merge stack and every entry may push one hit per boundary, so a smaller
// stack could fill with Grow waiting on it forever.  Elaboration stops with
// an error if it is smaller.
// The units' busy flags and work counters (Match compares and stalls, Union
// unions and boundary hits, Merge stack fill) are left unconnected here; they
// are observation points for simulation and for a metrics block.
module cc_decoder
  import cc_pkg::*;
#(
  parameter int unsigned D           = 23,
  parameter int unsigned ROUNDS      = 23,
  parameter int unsigned MAX_DEFECTS = num_vertices(D, ROUNDS),
  parameter int unsigned MERGE_DEPTH = 2 * MAX_DEFECTS,
  parameter int unsigned SCAN_W      = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bus_valid,
  input  logic        bus_write,
  input  logic [15:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  output logic        irq_done
);

  localparam int unsigned N  = num_vertices(D, ROUNDS);
  localparam int unsigned VW = $clog2(N);
  localparam int unsigned RW = $clog2(D) + 1;
  localparam int unsigned DW = $clog2(MAX_DEFECTS);
  localparam int unsigned CW = $clog2(MAX_DEFECTS + 1);
  localparam int unsigned EW = VW + RW + 1;
  localparam int unsigned MW = 2 + 2 * DW;
  localparam int unsigned SW = $clog2(MERGE_DEPTH + 1);

  // ---------------------------------------------------------------- control
  phase_e        phase;
  logic          start, busy, done, correction;
  logic [15:0]   grow_passes;
  logic          init_start, init_done, init_busy, init_overflow;
  logic [CW-1:0] num_defects;
  logic          grow_start, grow_done, grow_busy, grow_any_valid, grow_correction;
  logic          match_start, match_done, match_busy;
  logic [31:0]   match_compares, match_stalls;
  logic          union_en, union_busy;
  logic [31:0]   union_unions, union_bnd_hits;
  logic [N-1:0]  syndrome;
  logic          ms_push, ms_pop, ms_empty, ms_full;
  logic [MW-1:0] ms_push_data, ms_top;
  logic [SW-1:0] ms_count;

  cc_sysreg #(.D(D), .ROUNDS(ROUNDS), .MAX_DEFECTS(MAX_DEFECTS)) u_sysreg (
    .clk, .rst_n,
    .bus_valid, .bus_write, .bus_addr, .bus_wdata, .bus_rdata,
    .syndrome, .start, .busy, .done,
    .overflow(init_overflow), .correction, .num_defects, .grow_passes
  );

  cc_control u_control (
    .clk, .rst_n, .start, .busy, .done, .correction, .grow_passes, .phase,
    .init_start, .init_done,
    .grow_start, .grow_done, .grow_any_valid, .grow_correction,
    .match_start, .match_done, .union_en, .union_busy, .ms_empty
  );

  assign irq_done = done;

  // ---------------------------------------------------------------- storage
  logic          cgs_clear, cgs_push, cgs_we, cgs_full;
  logic [EW-1:0] cgs_push_data, cgs_wdata, cgs_rdata;
  logic [DW-1:0] cgs_waddr, cgs_raddr;
  logic [CW-1:0] cgs_count;

  cc_cgs #(.D(D), .ROUNDS(ROUNDS), .MAX_DEFECTS(MAX_DEFECTS)) u_cgs (
    .clk, .rst_n,
    .clear(cgs_clear), .push(cgs_push), .push_data(cgs_push_data),
    .we(cgs_we), .waddr(cgs_waddr), .wdata(cgs_wdata),
    .raddr(cgs_raddr), .rdata(cgs_rdata), .count(cgs_count), .full(cgs_full)
  );

  logic          pt_we;
  logic [DW-1:0] pt_waddr, pt_wdata, pt_raddr, pt_rdata;

  cc_parent_table #(.MAX_DEFECTS(MAX_DEFECTS)) u_parent (
    .clk, .we(pt_we), .waddr(pt_waddr), .wdata(pt_wdata),
    .raddr(pt_raddr), .rdata(pt_rdata)
  );

  logic                   reg_clear, reg_init_we;
  logic [DW-1:0]          reg_init_idx;
  logic                   bnd_we, bnd_logical, uni_we;
  logic [DW-1:0]          bnd_idx, uni_root, uni_child;
  logic [MAX_DEFECTS-1:0] parity, boundary, logical;

  cc_cluster_regs #(.MAX_DEFECTS(MAX_DEFECTS)) u_regs (
    .clk, .rst_n, .clear(reg_clear),
    .init_we(reg_init_we), .init_idx(reg_init_idx),
    .bnd_we, .bnd_idx, .bnd_logical,
    .uni_we, .uni_root, .uni_child,
    .parity, .boundary, .logical
  );


  cc_merge_stack #(.DW(DW), .DEPTH(MERGE_DEPTH)) u_mstack (
    .clk, .rst_n, .push(ms_push), .push_data(ms_push_data), .pop(ms_pop),
    .top_data(ms_top), .empty(ms_empty), .full(ms_full), .count(ms_count)
  );

  // ---------------------------------------------------------------- units
  logic          init_cgs_push, init_pt_we;
  logic [EW-1:0] init_cgs_data;
  logic [DW-1:0] init_pt_waddr, init_pt_wdata;

  cc_init #(.D(D), .ROUNDS(ROUNDS), .MAX_DEFECTS(MAX_DEFECTS), .SCAN_W(SCAN_W)) u_init (
    .clk, .rst_n, .start(init_start), .syndrome,
    .busy(init_busy), .done(init_done), .overflow(init_overflow), .num_defects,
    .cgs_clear, .cgs_push(init_cgs_push), .cgs_push_data(init_cgs_data),
    .pt_we(init_pt_we), .pt_waddr(init_pt_waddr), .pt_wdata(init_pt_wdata),
    .reg_clear, .reg_init_we, .reg_init_idx
  );

  logic [DW-1:0] grow_cgs_raddr, grow_pt_raddr;
  logic          grow_ms_push;
  logic [MW-1:0] grow_ms_data;

  cc_grow #(.D(D), .ROUNDS(ROUNDS), .MAX_DEFECTS(MAX_DEFECTS)) u_grow (
    .clk, .rst_n, .start(grow_start), .busy(grow_busy), .done(grow_done),
    .any_valid(grow_any_valid), .correction(grow_correction),
    .cgs_count, .cgs_raddr(grow_cgs_raddr), .cgs_rdata,
    .cgs_we, .cgs_waddr, .cgs_wdata,
    .pt_raddr(grow_pt_raddr), .pt_rdata,
    .parity, .boundary, .logical,
    .ms_push(grow_ms_push), .ms_push_data(grow_ms_data), .ms_full
  );

  logic [DW-1:0] match_cgs_raddr;
  logic          match_ms_push;
  logic [MW-1:0] match_ms_data;

  cc_match #(.D(D), .ROUNDS(ROUNDS), .MAX_DEFECTS(MAX_DEFECTS)) u_match (
    .clk, .rst_n, .start(match_start), .busy(match_busy), .done(match_done),
    .compares(match_compares), .stalls(match_stalls),
    .cgs_count, .cgs_raddr(match_cgs_raddr), .cgs_rdata,
    .ms_push(match_ms_push), .ms_push_data(match_ms_data), .ms_full
  );

  logic [DW-1:0] union_pt_raddr, union_pt_waddr, union_pt_wdata;
  logic          union_pt_we;

  cc_union #(.MAX_DEFECTS(MAX_DEFECTS)) u_union (
    .clk, .rst_n, .en(union_en), .busy(union_busy),
    .unions(union_unions), .bnd_hits(union_bnd_hits),
    .ms_empty, .ms_top, .ms_pop,
    .pt_raddr(union_pt_raddr), .pt_rdata,
    .pt_we(union_pt_we), .pt_waddr(union_pt_waddr), .pt_wdata(union_pt_wdata),
    .bnd_we, .bnd_idx, .bnd_logical,
    .uni_we, .uni_root, .uni_child
  );

  // ---------------------------------------------------------------- port muxes
  assign cgs_push      = init_cgs_push;
  assign cgs_push_data = init_cgs_data;
  assign cgs_raddr     = (phase == PH_GROW) ? grow_cgs_raddr : match_cgs_raddr;

  assign pt_we    = (phase == PH_INIT) ? init_pt_we    : union_pt_we;
  assign pt_waddr = (phase == PH_INIT) ? init_pt_waddr : union_pt_waddr;
  assign pt_wdata = (phase == PH_INIT) ? init_pt_wdata : union_pt_wdata;
  assign pt_raddr = (phase == PH_GROW) ? grow_pt_raddr : union_pt_raddr;

  assign ms_push      = (phase == PH_GROW) ? grow_ms_push : match_ms_push;
  assign ms_push_data = (phase == PH_GROW) ? grow_ms_data : match_ms_data;

  // Each unit may only drive a shared port in its own phase.
  a_init_in_phase:  assert property (@(posedge clk) disable iff (!rst_n)
    (init_cgs_push || init_pt_we) |-> phase == PH_INIT);
  a_grow_in_phase:  assert property (@(posedge clk) disable iff (!rst_n)
    (cgs_we || grow_ms_push) |-> phase == PH_GROW);
  a_merge_in_phase: assert property (@(posedge clk) disable iff (!rst_n)
    (match_ms_push || union_pt_we || ms_pop) |-> phase == PH_MERGE);
  if (MERGE_DEPTH < 2 * MAX_DEFECTS) begin : g_bad_merge_depth
    $error("MERGE_DEPTH must be at least 2*MAX_DEFECTS");
  end

  a_no_cgs_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    cgs_push |-> !cgs_full);

endmodule

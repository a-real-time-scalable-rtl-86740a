// cc_grow: the Grow unit of the CC decoder.
//
// One pass visits every Cluster Growth Stack entry i in order:
//   READ    fetch entry i (vid, radius r, valid);
//   FIND    follow the Parent table from i to the root of its cluster, one
//           pointer per cycle;
//   UPDATE  valid' = parity[root] & ~boundary[root] (odd clusters that touch no
//           boundary keep growing), r' = r + valid'; write {vid, r', valid'}
//           back; if i is a root, fold parity[i] & logical[i] into the
//           correction bit; note whether r' newly exceeds the distance of the
//           vertex to the logical (x1) or the other (d-x1) boundary;
//   PUSH    push those boundary collisions, {LOGICAL, i} and/or {BOUNDARY, i},
//           onto the Merge stack (waits while it is full).
// At the end, any_valid says whether anything grew.  If nothing grew the
// clusters are final and correction is the decoder's answer: the parity of
// the number of odd clusters touching the logical boundary.  Otherwise the
// correction is stale and the next pass recomputes it.
// The tasks of the unit are the paper's.  The strict '>' rule for a boundary
// hit matches the paper's worked example, and pushing only new collisions is
// this design's choice, so the stack is not refilled with old hits.
//
// Interface: start is a one-cycle pulse; done is a one-cycle pulse; any_valid
// and correction hold until the next start.  Cycles per pass: 4 per entry plus
// one per parent hop and one per extra push.
module cc_grow
  import cc_pkg::*;
#(
  parameter int unsigned D           = 23,
  parameter int unsigned ROUNDS      = 23,
  parameter int unsigned MAX_DEFECTS = num_vertices(D, ROUNDS),
  localparam int unsigned N     = num_vertices(D, ROUNDS),
  localparam int unsigned VW    = $clog2(N),
  localparam int unsigned RW    = $clog2(D) + 1,
  localparam int unsigned DW    = $clog2(MAX_DEFECTS),
  localparam int unsigned CW    = $clog2(MAX_DEFECTS + 1),
  localparam int unsigned EW    = VW + RW + 1,
  localparam int unsigned MW    = 2 + 2 * DW,
  localparam int unsigned DISTW = $clog2(2 * D + ROUNDS + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  output logic                   any_valid,
  output logic                   correction,
  // Cluster Growth Stack
  input  logic [CW-1:0]          cgs_count,
  output logic [DW-1:0]          cgs_raddr,
  input  logic [EW-1:0]          cgs_rdata,
  output logic                   cgs_we,
  output logic [DW-1:0]          cgs_waddr,
  output logic [EW-1:0]          cgs_wdata,
  // Parent table
  output logic [DW-1:0]          pt_raddr,
  input  logic [DW-1:0]          pt_rdata,
  // Cluster registers
  input  logic [MAX_DEFECTS-1:0] parity,
  input  logic [MAX_DEFECTS-1:0] boundary,
  input  logic [MAX_DEFECTS-1:0] logical,
  // Merge stack
  output logic                   ms_push,
  output logic [MW-1:0]          ms_push_data,
  input  logic                   ms_full
);

  typedef struct packed {
    logic [VW-1:0] vid;
    logic [RW-1:0] radius;
    logic          valid;
  } cgs_entry_t;

  typedef struct packed {
    merge_kind_e   kind;
    logic [DW-1:0] a;
    logic [DW-1:0] b;
  } merge_req_t;

  typedef enum logic [2:0] {S_IDLE, S_READ, S_FIND, S_UPDATE, S_PUSH} state_e;

  state_e        state;
  logic [DW-1:0] idx;
  logic [DW-1:0] node;
  cgs_entry_t    ent;
  logic          pend_l, pend_r;

  // Boundary distances of the entry's vertex.
  logic [DISTW-1:0] dist_l, dist_r, unused_pair;
  cc_distance #(.D(D), .ROUNDS(ROUNDS)) u_dist (
    .va(ent.vid), .vb(ent.vid),
    .pair_dist(unused_pair), .a_dist_logical(dist_l), .a_dist_other(dist_r)
  );

  logic              grow_now;
  logic [RW-1:0]     r_new;
  logic              hit_l, hit_r;
  logic              last_entry;

  assign grow_now   = parity[node] & ~boundary[node];
  assign r_new      = ent.radius + RW'(grow_now);
  assign hit_l      = grow_now && (int'(r_new) > int'(dist_l)) && (int'(ent.radius) <= int'(dist_l));
  assign hit_r      = grow_now && (int'(r_new) > int'(dist_r)) && (int'(ent.radius) <= int'(dist_r));
  assign last_entry = (CW'(idx) + 1'b1 == cgs_count);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      any_valid  <= 1'b0;
      correction <= 1'b0;
      idx        <= '0;
      node       <= '0;
      ent        <= '0;
      pend_l     <= 1'b0;
      pend_r     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          any_valid  <= 1'b0;
          correction <= 1'b0;
          idx        <= '0;
          if (cgs_count == '0) done  <= 1'b1;
          else                 state <= S_READ;
        end
        S_READ: begin
          ent   <= cgs_rdata;
          node  <= idx;
          state <= S_FIND;
        end
        S_FIND: begin
          if (pt_rdata == node) state <= S_UPDATE;
          else                  node  <= pt_rdata;
        end
        S_UPDATE: begin
          if (grow_now) any_valid <= 1'b1;
          if (node == idx) correction <= correction ^ (parity[idx] & logical[idx]);
          pend_l <= hit_l;
          pend_r <= hit_r;
          state  <= S_PUSH;
        end
        S_PUSH: begin
          if (pend_l || pend_r) begin
            if (!ms_full) begin
              if (pend_l) pend_l <= 1'b0;
              else        pend_r <= 1'b0;
            end
          end else if (last_entry) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            idx   <= idx + 1'b1;
            state <= S_READ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  merge_req_t req;
  always_comb begin
    req.kind = pend_l ? MRG_LOGICAL : MRG_BOUNDARY;
    req.a    = idx;
    req.b    = '0;
  end

  assign busy         = (state != S_IDLE);
  assign cgs_raddr    = idx;
  assign pt_raddr     = node;
  assign cgs_we       = (state == S_UPDATE);
  assign cgs_waddr    = idx;
  assign cgs_wdata    = cgs_entry_t'{vid: ent.vid, radius: r_new, valid: grow_now};
  assign ms_push      = (state == S_PUSH) && (pend_l || pend_r) && !ms_full;
  assign ms_push_data = req;

endmodule

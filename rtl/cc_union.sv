// cc_union: the Union sub-unit of the Merge unit.
//
// While enabled it takes requests off the Merge stack, one at a time:
//   POP     take the top request {kind, a, b};
//   FIND_A  follow the Parent table from a to its root ra (one hop a cycle);
//           for a BOUNDARY or LOGICAL request, mark ra as touching that
//           boundary in the cluster registers and finish;
//   FIND_B  follow the Parent table from b to its root rb; if ra != rb, write
//           parent[rb] = ra and fold rb's parity, boundary and logical bits
//           into ra's; if they already share a root, do nothing.
// Finding both roots and updating the Parent table and the three registers is
// the paper's.  Linking the second root under the first follows the paper's
// worked example (pair (0,1) gives parent[1] = 0); the paper leaves the choice
// open.  There is no path compression or union by rank.
//
// Timing: a request takes 1 + (hops to ra + 1) + (hops to rb + 1) cycles.
// It runs in parallel with Match: Match only reads the Cluster Growth Stack,
// Union only touches the Parent table and cluster registers.  busy is high
// while a request is in flight; unions and bnd_hits count completed work.
module cc_union
  import cc_pkg::*;
#(
  parameter int unsigned MAX_DEFECTS = 6072,
  localparam int unsigned DW = $clog2(MAX_DEFECTS),
  localparam int unsigned MW = 2 + 2 * DW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  output logic          busy,
  output logic [31:0]   unions,
  output logic [31:0]   bnd_hits,
  // Merge stack
  input  logic          ms_empty,
  input  logic [MW-1:0] ms_top,
  output logic          ms_pop,
  // Parent table
  output logic [DW-1:0] pt_raddr,
  input  logic [DW-1:0] pt_rdata,
  output logic          pt_we,
  output logic [DW-1:0] pt_waddr,
  output logic [DW-1:0] pt_wdata,
  // Cluster registers
  output logic          bnd_we,
  output logic [DW-1:0] bnd_idx,
  output logic          bnd_logical,
  output logic          uni_we,
  output logic [DW-1:0] uni_root,
  output logic [DW-1:0] uni_child
);

  typedef struct packed {
    merge_kind_e   kind;
    logic [DW-1:0] a;
    logic [DW-1:0] b;
  } merge_req_t;

  typedef enum logic [1:0] {S_IDLE, S_FIND_A, S_FIND_B} state_e;

  state_e        state;
  merge_req_t    req;
  logic [DW-1:0] node;
  logic [DW-1:0] root_a;
  logic          at_root;
  merge_req_t    top;

  assign top = ms_top;

  assign at_root = (pt_rdata == node);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      req      <= '0;
      node     <= '0;
      root_a   <= '0;
      unions   <= '0;
      bnd_hits <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (en && !ms_empty) begin
          req   <= ms_top;
          node  <= top.a;
          state <= S_FIND_A;
        end
        S_FIND_A: begin
          if (at_root) begin
            if (req.kind != MRG_PAIR) begin
              bnd_hits <= bnd_hits + 1'b1;
              state    <= S_IDLE;
            end else begin
              root_a <= node;
              node   <= req.b;
              state  <= S_FIND_B;
            end
          end else begin
            node <= pt_rdata;
          end
        end
        S_FIND_B: begin
          if (at_root) begin
            if (node != root_a) unions <= unions + 1'b1;
            state <= S_IDLE;
          end else begin
            node <= pt_rdata;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic link;
  assign link = (state == S_FIND_B) && at_root && (node != root_a);

  assign busy        = (state != S_IDLE);
  assign ms_pop      = (state == S_IDLE) && en && !ms_empty;
  assign pt_raddr    = node;
  assign pt_we       = link;
  assign pt_waddr    = node;
  assign pt_wdata    = root_a;
  assign bnd_we      = (state == S_FIND_A) && at_root && (req.kind != MRG_PAIR);
  assign bnd_idx     = node;
  assign bnd_logical = (req.kind == MRG_LOGICAL);
  assign uni_we      = link;
  assign uni_root    = root_a;
  assign uni_child   = node;

endmodule

// cc_match: the Match sub-unit of the Merge unit (collision detection).
//
// One pass compares every pair of Cluster Growth Stack entries i < j:
//   collide  = r_i + r_j > D(v_i, v_j)
//   was_hit  = (r_i - valid_i) + (r_j - valid_j) > D(v_i, v_j)
// where D is the hook-aware graph distance (cc_distance) and valid tells
// whether the entry grew in the Grow pass just before.  A pair that collides
// now but did not before the last growth step is pushed as {PAIR, i, j} onto
// the Merge stack.  The all-to-all comparison and the "sum of growths greater
// than the distance" rule are the paper's; the was_hit filter, which pushes
// each colliding pair once instead of at every iteration, is this design's.
//
// Timing: entry i is loaded in one cycle (LOAD), then one entry j is compared
// per cycle (CMP), so a pass over s entries takes s(s-1)/2 + (s-1) cycles plus
// one cycle for every cycle the Merge stack is full when a push is due (the
// unit stalls).  start and done are one-cycle pulses; compares counts the
// comparisons of the last pass, stalls the cycles spent waiting.
module cc_match
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
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [31:0]   compares,
  output logic [31:0]   stalls,
  // Cluster Growth Stack
  input  logic [CW-1:0] cgs_count,
  output logic [DW-1:0] cgs_raddr,
  input  logic [EW-1:0] cgs_rdata,
  // Merge stack
  output logic          ms_push,
  output logic [MW-1:0] ms_push_data,
  input  logic          ms_full
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

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_CMP} state_e;

  state_e        state;
  logic [DW-1:0] i_idx, j_idx;
  cgs_entry_t    ei, ej;

  assign ej = cgs_rdata;

  logic [DISTW-1:0] pdist, unused_l, unused_r;
  cc_distance #(.D(D), .ROUNDS(ROUNDS)) u_dist (
    .va(ei.vid), .vb(ej.vid),
    .pair_dist(pdist), .a_dist_logical(unused_l), .a_dist_other(unused_r)
  );

  logic [RW:0] sum_now, sum_before;
  logic        collide;
  assign sum_now    = {1'b0, ei.radius} + {1'b0, ej.radius};
  assign sum_before = sum_now - (RW+1)'(ei.valid) - (RW+1)'(ej.valid);
  assign collide    = (int'(sum_now) > int'(pdist)) && (int'(sum_before) <= int'(pdist));

  logic last_j, last_i;
  assign last_j = (CW'(j_idx) + 1'b1 == cgs_count);
  assign last_i = (CW'(i_idx) + CW'(2) == cgs_count);

  logic stall;
  assign stall = (state == S_CMP) && collide && ms_full;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      i_idx    <= '0;
      j_idx    <= '0;
      ei       <= '0;
      compares <= '0;
      stalls   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          compares <= '0;
          stalls   <= '0;
          i_idx    <= '0;
          if (cgs_count < CW'(2)) done  <= 1'b1;
          else                    state <= S_LOAD;
        end
        S_LOAD: begin
          ei    <= cgs_rdata;
          j_idx <= i_idx + 1'b1;
          state <= S_CMP;
        end
        S_CMP: begin
          if (stall) begin
            stalls <= stalls + 1'b1;
          end else begin
            compares <= compares + 1'b1;
            if (last_j) begin
              if (last_i) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                i_idx <= i_idx + 1'b1;
                state <= S_LOAD;
              end
            end else begin
              j_idx <= j_idx + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  merge_req_t req;
  always_comb begin
    req.kind = MRG_PAIR;
    req.a    = i_idx;
    req.b    = j_idx;
  end

  assign busy         = (state != S_IDLE);
  assign cgs_raddr    = (state == S_CMP) ? j_idx : i_idx;
  assign ms_push      = (state == S_CMP) && collide && !ms_full;
  assign ms_push_data = req;

endmodule

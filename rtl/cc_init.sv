// cc_init: the Init unit of the CC decoder.
//
// On start it empties the Cluster Growth Stack and clears the cluster
// registers, then scans the syndrome register for defects.  For the k-th
// defect found (vertex v) it, in one cycle,
//   pushes CGS entry {vid=v, radius=0, valid=1},
//   writes parent[k] = k (every defect starts as its own root),
//   sets parity[k] = 1 (a one-defect cluster is odd).
// What Init does is the paper's; how it scans is this design's: SCAN_W
// syndrome bits are looked at per cycle and a find-first-set picks the lowest
// remaining defect, so a decode needs ceil(N/SCAN_W) + (number of defects)
// + 1 cycles here.  Defects beyond MAX_DEFECTS are dropped and flagged by
// overflow (the default MAX_DEFECTS = N makes that impossible).
//
// Interface: start is a one-cycle pulse; done is a one-cycle pulse when the
// scan ends; num_defects and overflow hold until the next start.
module cc_init
  import cc_pkg::*;
#(
  parameter int unsigned D           = 23,
  parameter int unsigned ROUNDS      = 23,
  parameter int unsigned MAX_DEFECTS = num_vertices(D, ROUNDS),
  parameter int unsigned SCAN_W      = 64,
  localparam int unsigned N  = num_vertices(D, ROUNDS),
  localparam int unsigned VW = $clog2(N),
  localparam int unsigned RW = $clog2(D) + 1,
  localparam int unsigned DW = $clog2(MAX_DEFECTS),
  localparam int unsigned CW = $clog2(MAX_DEFECTS + 1),
  localparam int unsigned EW = VW + RW + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [N-1:0]  syndrome,
  output logic          busy,
  output logic          done,
  output logic          overflow,
  output logic [CW-1:0] num_defects,
  // Cluster Growth Stack
  output logic          cgs_clear,
  output logic          cgs_push,
  output logic [EW-1:0] cgs_push_data,
  // Parent table
  output logic          pt_we,
  output logic [DW-1:0] pt_waddr,
  output logic [DW-1:0] pt_wdata,
  // Cluster registers
  output logic          reg_clear,
  output logic          reg_init_we,
  output logic [DW-1:0] reg_init_idx
);

  localparam int unsigned NWORDS = (N + SCAN_W - 1) / SCAN_W;
  localparam int unsigned WW     = (NWORDS > 1) ? $clog2(NWORDS) : 1;
  localparam int unsigned BW     = $clog2(SCAN_W);

  typedef struct packed {
    logic [VW-1:0] vid;
    logic [RW-1:0] radius;
    logic          valid;
  } cgs_entry_t;

  logic [NWORDS*SCAN_W-1:0] padded;
  assign padded = {{(NWORDS*SCAN_W-N){1'b0}}, syndrome};

  logic [SCAN_W-1:0] cur;
  logic [WW-1:0]     word;
  logic [BW-1:0]     first;
  logic [VW-1:0]     vid;
  logic              last_word;
  logic              room;

  // Lowest set bit of the current word.
  always_comb begin
    first = '0;
    for (int b = SCAN_W - 1; b >= 0; b--) begin
      if (cur[b]) first = BW'(b);
    end
  end

  assign vid       = VW'(int'(word) * SCAN_W + int'(first));
  assign last_word = (int'(word) == NWORDS - 1);
  assign room      = (num_defects < CW'(MAX_DEFECTS));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      overflow    <= 1'b0;
      num_defects <= '0;
      word        <= '0;
      cur         <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy        <= 1'b1;
        overflow    <= 1'b0;
        num_defects <= '0;
        word        <= '0;
        cur         <= padded[SCAN_W-1:0];
      end else if (busy) begin
        if (cur != '0) begin
          cur <= cur & (cur - 1'b1);  // drop the defect just handled
          if (room) num_defects <= num_defects + 1'b1;
          else      overflow    <= 1'b1;
        end else if (last_word) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          word <= word + 1'b1;
          cur  <= padded[(int'(word) + 1) * SCAN_W +: SCAN_W];
        end
      end
    end
  end

  cgs_entry_t new_entry;
  assign new_entry = '{vid: vid, radius: '0, valid: 1'b1};

  logic emit;
  assign emit = busy && (cur != '0) && room;

  assign cgs_clear     = start && !busy;
  assign reg_clear     = start && !busy;
  assign cgs_push      = emit;
  assign cgs_push_data = new_entry;
  assign pt_we         = emit;
  assign pt_waddr      = num_defects[DW-1:0];
  assign pt_wdata      = num_defects[DW-1:0];
  assign reg_init_we   = emit;
  assign reg_init_idx  = num_defects[DW-1:0];

endmodule

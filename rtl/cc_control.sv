// cc_control: the sequencer of the CC decoder ("CC control").
//
// A decode runs the units in the order of the algorithm:
//   INIT   Init loads the syndrome into the data structures;
//   GROW   one Grow pass over the Cluster Growth Stack;
//          - if nothing grew, the clusters are final: the correction of this
//            pass is the answer and the decode ends (DONE);
//   MERGE  Match compares all pairs while Union drains the Merge stack in
//          parallel; the phase ends when Match has finished, the stack is
//          empty and Union is idle; then back to GROW.
// The loop is the paper's.  phase tells the top level which unit owns the
// shared memory ports.  start is accepted while not busy; done, correction
// and the count of Grow passes hold until the next start.
module cc_control
  import cc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic        correction,
  output logic [15:0] grow_passes,
  output phase_e      phase,
  // Init
  output logic        init_start,
  input  logic        init_done,
  // Grow
  output logic        grow_start,
  input  logic        grow_done,
  input  logic        grow_any_valid,
  input  logic        grow_correction,
  // Match and Union
  output logic        match_start,
  input  logic        match_done,
  output logic        union_en,
  input  logic        union_busy,
  input  logic        ms_empty
);

  logic match_finished;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase          <= PH_IDLE;
      done           <= 1'b0;
      correction     <= 1'b0;
      grow_passes    <= '0;
      match_finished <= 1'b0;
    end else begin
      unique case (phase)
        PH_IDLE, PH_DONE: if (start) begin
          phase       <= PH_INIT;
          done        <= 1'b0;
          correction  <= 1'b0;
          grow_passes <= '0;
        end
        PH_INIT: if (init_done) phase <= PH_GROW;
        PH_GROW: if (grow_done) begin
          grow_passes <= grow_passes + 1'b1;
          if (grow_any_valid) begin
            phase          <= PH_MERGE;
            match_finished <= 1'b0;
          end else begin
            phase      <= PH_DONE;
            done       <= 1'b1;
            correction <= grow_correction;
          end
        end
        PH_MERGE: begin
          if (match_done) match_finished <= 1'b1;
          if (match_finished && ms_empty && !union_busy) phase <= PH_GROW;
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  // Start pulses on entry to a phase.
  phase_e phase_q;
  always_ff @(posedge clk) begin
    if (!rst_n) phase_q <= PH_IDLE;
    else        phase_q <= phase;
  end

  assign busy        = (phase == PH_INIT) || (phase == PH_GROW) || (phase == PH_MERGE);
  assign init_start  = (phase == PH_INIT)  && (phase_q != PH_INIT);
  assign grow_start  = (phase == PH_GROW)  && (phase_q != PH_GROW);
  assign match_start = (phase == PH_MERGE) && (phase_q != PH_MERGE);
  assign union_en    = (phase == PH_MERGE);

endmodule

// cc_sysreg: programmable registers of the CC decoder ("core sysreg").
//
// Software loads the syndrome (one bit per decoding-graph vertex), starts a
// decode and reads back the status and the logical correction bit through a
// simple 32-bit register bus.  That the decoder's input and output are
// programmable registers is the paper's; the bus and the register map are
// this design's:
//   0x000  CTRL      W   bit 0: write 1 to start a decode (ignored while busy)
//   0x004  STATUS    R   bit 0 busy, bit 1 done, bit 2 overflow,
//                        bit 3 logical correction, bits 31:16 defects loaded
//   0x008  PASSES    R   number of Grow passes of the last decode
//   0x100 + 4k  SYNDROME[k]  R/W  syndrome bits 32k .. 32k+31 (vertex ids)
// Bus timing: a request (bus_valid, bus_write, bus_addr, bus_wdata) is taken
// every cycle; read data appears on bus_rdata one cycle later.  Syndrome
// writes are ignored while a decode is running, so the data the Init unit
// scans cannot change under it.  Synchronous active-low reset clears all.
module cc_sysreg
  import cc_pkg::*;
#(
  parameter int unsigned D           = 23,
  parameter int unsigned ROUNDS      = 23,
  parameter int unsigned MAX_DEFECTS = num_vertices(D, ROUNDS),
  localparam int unsigned N   = num_vertices(D, ROUNDS),
  localparam int unsigned NW  = (N + 31) / 32,
  localparam int unsigned CW  = $clog2(MAX_DEFECTS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // Register bus
  input  logic          bus_valid,
  input  logic          bus_write,
  input  logic [15:0]   bus_addr,
  input  logic [31:0]   bus_wdata,
  output logic [31:0]   bus_rdata,
  // Decoder core
  output logic [N-1:0]  syndrome,
  output logic          start,
  input  logic          busy,
  input  logic          done,
  input  logic          overflow,
  input  logic          correction,
  input  logic [CW-1:0] num_defects,
  input  logic [15:0]   grow_passes
);

  localparam logic [15:0] A_CTRL   = 16'h0000;
  localparam logic [15:0] A_STATUS = 16'h0004;
  localparam logic [15:0] A_PASSES = 16'h0008;
  localparam logic [15:0] A_SYN    = 16'h0100;

  logic [NW-1:0][31:0] syn_q;
  logic                is_syn;
  logic [15:0]         syn_off;
  logic [15:0]         syn_word;

  assign syn_off  = bus_addr - A_SYN;
  assign syn_word = {2'b00, syn_off[15:2]};
  assign is_syn   = (bus_addr >= A_SYN) && (syn_word < 16'(NW));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      syn_q     <= '0;
      start     <= 1'b0;
      bus_rdata <= '0;
    end else begin
      start <= bus_valid && bus_write && (bus_addr == A_CTRL) && bus_wdata[0] && !busy;
      if (bus_valid && bus_write && is_syn && !busy) syn_q[syn_word] <= bus_wdata;
      if (bus_valid && !bus_write) begin
        if (bus_addr == A_STATUS)
          bus_rdata <= {16'(num_defects), 12'd0, correction, overflow, done, busy};
        else if (bus_addr == A_PASSES)
          bus_rdata <= {16'd0, grow_passes};
        else if (is_syn)
          bus_rdata <= syn_q[syn_word];
        else
          bus_rdata <= '0;
      end
    end
  end

  logic [NW*32-1:0] syn_flat;
  assign syn_flat = syn_q;
  assign syndrome = syn_flat[N-1:0];

endmodule

// xymem: XMEM or YMEM, the memory of oscillator positions (x) or momenta (y).
//
// One word holds one variable for each of the Pb MMTE units, so every unit
// reads and writes its own lane in the same cycle. Lane b of word
// g*Pr + r holds the variable of spin g*Pb*Pr + b*Pr + r; for the default
// 256 spins and Pb = 4 that is the 64 x 4 layout the paper draws for XMEM
// (lane 0 holds x0..x15, x64..x79, ...).
//
// Simple dual-port RAM as the paper specifies: one read port with one cycle of
// latency (registered rdata) and one write port with a write enable per lane,
// so a host can load a single variable while the time evolution writes all
// lanes at once. The contents have no reset.
module xymem
#(
  parameter int unsigned N_SPIN = dsb_pkg::N_SPIN,
  parameter int unsigned PB     = dsb_pkg::PB,
  parameter int unsigned W      = dsb_pkg::X_BITS,
  parameter int unsigned DEPTH  = N_SPIN / PB,
  parameter int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic            clk,
  input  logic [PB-1:0]   we,
  input  logic [AW-1:0]   waddr,
  input  logic [PB*W-1:0] wdata,
  input  logic            re,
  input  logic [AW-1:0]   raddr,
  output logic [PB*W-1:0] rdata
);

  logic [PB*W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int b = 0; b < PB; b++) begin
      if (we[b]) mem[waddr][b*W +: W] <= wdata[b*W +: W];
    end
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule

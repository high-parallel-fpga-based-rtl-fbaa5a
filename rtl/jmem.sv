// jmem: the J coefficient memory of one MAC unit (one per MAC, Pb*Pr in all).
//
// Memory J_i (i = b*Pr + r for MAC r of MMTE b) holds the rows
// i, i + Pb*Pr, i + 2*Pb*Pr, ... of the J matrix. Each row occupies
// n_spin/Pc consecutive words and each word holds Pc coefficients, so one read
// feeds all Pc lanes of the MAC. Word g*(n_spin/Pc) + w holds
// J[g*Pb*Pr + i][w*Pc + c] at bits [c*J_BITS +: J_BITS]. This layout is the
// one the paper draws for Pr = Pc = 16, Pb = 4 (64 memories of 4 rows).
//
// Simple dual-port RAM: a write port used only to load the matrix, and a read
// port with one cycle of latency (rdata is registered, as in a block RAM).
// The RAM contents have no reset.
module jmem
#(
  parameter int unsigned N_SPIN = dsb_pkg::N_SPIN,
  parameter int unsigned PR     = dsb_pkg::PR,
  parameter int unsigned PC     = dsb_pkg::PC,
  parameter int unsigned PB     = dsb_pkg::PB,
  parameter int unsigned J_BITS = dsb_pkg::J_BITS,
  parameter int unsigned DEPTH  = (N_SPIN / (PB * PR)) * (N_SPIN / PC),
  parameter int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic [PC*J_BITS-1:0] wdata,
  input  logic                 re,
  input  logic [AW-1:0]        raddr,
  output logic [PC*J_BITS-1:0] rdata
);

  logic [PC*J_BITS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule

// sgnxmem: SGNXMEM1 and SGNXMEM2, the two register files of position signs,
// with the multiplexer that selects which one the MAC units read.
//
// One bank holds sgn(x(t_n)) for the whole step while the matrix-vector
// products read it; the other collects sgn(x(t_n+1)) as the time evolution
// produces new positions. The controller swaps the roles from step to step
// (ping-pong), so that every product of a step uses the signs from the start
// of that step, as the algorithm requires. Read and write banks are separate
// inputs, because when one step starts before the previous one ends, both
// steps use the same bank: the new step reads it and the old one writes it.
//
// Each bank is n_spin bits, read as n_spin/Pc words of Pc bits: word w holds
// sgn(x[w*Pc + c]) at bit c (1 = negative). One word is read per cycle and is
// broadcast to every MAC of every MMTE. The read is registered (one cycle of
// latency) so that it lines up with the J memory read. The write port has Pb
// lanes, one per MMTE, each writing one sign bit anywhere in the selected
// bank. Bank contents have no reset; the host loads them with the positions.
module sgnxmem
#(
  parameter int unsigned N_SPIN = dsb_pkg::N_SPIN,
  parameter int unsigned PC     = dsb_pkg::PC,
  parameter int unsigned PB     = dsb_pkg::PB,
  parameter int unsigned NW     = N_SPIN / PC,
  parameter int unsigned WA     = (NW > 1) ? $clog2(NW) : 1,
  parameter int unsigned IA     = $clog2(N_SPIN)
) (
  input  logic                 clk,
  // read side: the bank holding sgn(x(t_n))
  input  logic                 rd_bank,
  input  logic                 re,
  input  logic [WA-1:0]        rd_word,
  output logic [PC-1:0]        rd_data,
  // write side
  input  logic                 wr_bank,
  input  logic [PB-1:0]        wr_en,
  input  logic [PB-1:0][IA-1:0] wr_idx,
  input  logic [PB-1:0]        wr_val
);

  logic [N_SPIN-1:0] bank [2];

  always_ff @(posedge clk) begin
    for (int b = 0; b < PB; b++) begin
      if (wr_en[b]) bank[wr_bank][wr_idx[b]] <= wr_val[b];
    end
  end

  always_ff @(posedge clk) begin
    if (re) rd_data <= bank[rd_bank][rd_word*PC +: PC];
  end

endmodule

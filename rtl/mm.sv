// mm: the Matrix-vector Multiplication block of one MMTE unit. Computes PR
// rows of J * sgn(x) at a time, each in n_spin/PC cycles, and offers the PR
// finished row sums to the time evolution through an output multiplexer.
//
// It holds PR J memories and PR MAC units. In every issue cycle all PR
// memories are read at the same address (row group g, word w) and every MAC
// multiplies its PC coefficients by the PC sign bits of word w, which are
// broadcast from the sign memory. After the last word of a group each MAC's
// hold register carries its row sum; the output multiplexer selects one of
// them per cycle for the shared time-evolution datapath. The structure is the
// paper's; the issue/valid sideband is this design's.
//
// Timing: rd_en/rd_addr/first/last are issued in cycle t; J data and the sign
// word (sgn_word, which the caller must present in cycle t+1) meet in the
// MACs in cycle t+1; the row sums are readable from cycle t+2 after the last
// word of a group until the last word of the next group is accumulated. The
// MM/TE overlap requires PR <= n_spin/PC, which is asserted.
module mm
#(
  parameter int unsigned N_SPIN = dsb_pkg::N_SPIN,
  parameter int unsigned PR     = dsb_pkg::PR,
  parameter int unsigned PC     = dsb_pkg::PC,
  parameter int unsigned PB     = dsb_pkg::PB,
  parameter int unsigned J_BITS = dsb_pkg::J_BITS,
  parameter int unsigned ACC_W  = J_BITS + $clog2(N_SPIN) + 1,
  parameter int unsigned DEPTH  = (N_SPIN / (PB * PR)) * (N_SPIN / PC),
  parameter int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned RW     = (PR > 1) ? $clog2(PR) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // J matrix load
  input  logic                     jw_en,
  input  logic [RW-1:0]            jw_row,
  input  logic [AW-1:0]            jw_addr,
  input  logic [PC*J_BITS-1:0]     jw_data,
  // product issue
  input  logic                     rd_en,
  input  logic [AW-1:0]            rd_addr,
  input  logic                     first,
  input  logic                     last,
  input  logic [PC-1:0]            sgn_word,
  // output multiplexer
  input  logic [RW-1:0]            out_sel,
  output logic signed [ACC_W-1:0]  out,
  output logic                     res_valid
);

  logic valid_q, first_q, last_q;
  logic [PC*J_BITS-1:0]    jdata [PR];
  logic signed [ACC_W-1:0] res   [PR];
  logic [PR-1:0]           rv;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
    end else begin
      valid_q <= rd_en;
      first_q <= first;
      last_q  <= last;
    end
  end

  for (genvar r = 0; r < PR; r++) begin : g_row
    jmem #(
      .N_SPIN(N_SPIN), .PR(PR), .PC(PC), .PB(PB), .J_BITS(J_BITS), .DEPTH(DEPTH), .AW(AW)
    ) u_jmem (
      .clk   (clk),
      .we    (jw_en && (jw_row == RW'(r))),
      .waddr (jw_addr),
      .wdata (jw_data),
      .re    (rd_en),
      .raddr (rd_addr),
      .rdata (jdata[r])
    );

    mac #(.N_SPIN(N_SPIN), .PC(PC), .J_BITS(J_BITS), .ACC_W(ACC_W)) u_mac (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (valid_q),
      .first     (first_q),
      .last      (last_q),
      .j_row     (jdata[r]),
      .sgn       (sgn_word),
      .res       (res[r]),
      .res_valid (rv[r])
    );
  end

  assign out       = res[out_sel];
  assign res_valid = rv[0];

  initial begin
    assert (PR <= N_SPIN / PC)
      else $error("mm: MM/TE overlap needs PR <= N_SPIN/PC");
    assert (N_SPIN % (PB * PR) == 0 && N_SPIN % PC == 0)
      else $error("mm: N_SPIN must be a multiple of PB*PR and of PC");
  end

endmodule

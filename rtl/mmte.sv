// mmte: one Matrix-vector Multiplication / Time Evolution unit. Pb copies run
// in lock step, each owning the rows b*Pr + r (+ multiples of Pb*Pr) of J.
//
// The MM block computes PR row sums per group of rows; the output multiplexer
// hands them one per cycle to the time-evolution datapath (DP), which updates
// the matching (x, y) pair while MM already accumulates the next group, as in
// the paper's MM/TE overlap. The unit registers the selected row sum together
// with the XMEM/YMEM read, so the datapath sees the row sum, x and y of the
// same spin in the same cycle.
//
// Timing: te_issue/te_sel in cycle t (the same cycle as the XMEM/YMEM read
// address); x_in/y_in arrive in cycle t+1, when x_new/y_new/sgn_new/wall are
// valid combinationally and te_out_valid is high for the caller to write back.
module mmte
#(
  parameter int unsigned N_SPIN  = dsb_pkg::N_SPIN,
  parameter int unsigned PR      = dsb_pkg::PR,
  parameter int unsigned PC      = dsb_pkg::PC,
  parameter int unsigned PB      = dsb_pkg::PB,
  parameter int unsigned J_BITS  = dsb_pkg::J_BITS,
  parameter int unsigned X_BITS  = dsb_pkg::X_BITS,
  parameter int unsigned Y_BITS  = dsb_pkg::Y_BITS,
  parameter int unsigned XY_FRAC = dsb_pkg::XY_FRAC,
  parameter int unsigned P_BITS  = dsb_pkg::P_BITS,
  parameter int unsigned P_FRAC  = dsb_pkg::P_FRAC,
  parameter int unsigned ACC_W   = J_BITS + $clog2(N_SPIN) + 1,
  parameter int unsigned DEPTH   = (N_SPIN / (PB * PR)) * (N_SPIN / PC),
  parameter int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned RW      = (PR > 1) ? $clog2(PR) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // J matrix load
  input  logic                     jw_en,
  input  logic [RW-1:0]            jw_row,
  input  logic [AW-1:0]            jw_addr,
  input  logic [PC*J_BITS-1:0]     jw_data,
  // MM issue
  input  logic                     mm_en,
  input  logic [AW-1:0]            mm_addr,
  input  logic                     mm_first,
  input  logic                     mm_last,
  input  logic [PC-1:0]            sgn_word,
  // TE issue and operands
  input  logic                     te_issue,
  input  logic [RW-1:0]            te_sel,
  input  logic signed [X_BITS-1:0] x_in,
  input  logic signed [Y_BITS-1:0] y_in,
  input  logic signed [P_BITS-1:0] a,
  input  dsb_pkg::te_coef_t        coef,
  // TE results
  output logic                     te_out_valid,
  output logic signed [X_BITS-1:0] x_new,
  output logic signed [Y_BITS-1:0] y_new,
  output logic                     sgn_new,
  output logic                     wall,
  output logic                     mm_res_valid
);

  logic signed [ACC_W-1:0] mm_out, mm_q;

  mm #(
    .N_SPIN(N_SPIN), .PR(PR), .PC(PC), .PB(PB), .J_BITS(J_BITS),
    .ACC_W(ACC_W), .DEPTH(DEPTH), .AW(AW), .RW(RW)
  ) u_mm (
    .clk       (clk),
    .rst_n     (rst_n),
    .jw_en     (jw_en),
    .jw_row    (jw_row),
    .jw_addr   (jw_addr),
    .jw_data   (jw_data),
    .rd_en     (mm_en),
    .rd_addr   (mm_addr),
    .first     (mm_first),
    .last      (mm_last),
    .sgn_word  (sgn_word),
    .out_sel   (te_sel),
    .out       (mm_out),
    .res_valid (mm_res_valid)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mm_q         <= '0;
      te_out_valid <= 1'b0;
    end else begin
      te_out_valid <= te_issue;
      if (te_issue) mm_q <= mm_out;
    end
  end

  te_dp #(
    .X_BITS(X_BITS), .Y_BITS(Y_BITS), .XY_FRAC(XY_FRAC),
    .P_BITS(P_BITS), .P_FRAC(P_FRAC), .MM_W(ACC_W)
  ) u_dp (
    .x       (x_in),
    .y       (y_in),
    .mm      (mm_q),
    .a       (a),
    .a0      (coef.a0),
    .dt      (coef.dt),
    .c0      (coef.c0),
    .gamma   (coef.gamma),
    .heat    (coef.heat),
    .x_new   (x_new),
    .y_new   (y_new),
    .sgn_new (sgn_new),
    .wall    (wall)
  );

endmodule

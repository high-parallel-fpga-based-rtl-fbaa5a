// te_dp: the time-evolution datapath (DP) of one MMTE unit. Computes the new
// position and momentum of one oscillator per cycle from the matrix-vector
// product of its row.
//
// Arithmetic (the discrete simulated bifurcation update, heating optional):
//   y~    = y + ((a - a0) * x + c0 * mm) * dt
//   x~    = x + a0 * y~ * dt
//   wall  = |x~| > 1
//   x_new = wall ? sgn(x~) : x~
//   y_new = (wall ? 0 : y~) + (heat ? gamma * y * dt : 0)
// where mm = sum_j J_ij sgn(x_j) and y in the heating term is the momentum
// before this update. The update order, the inelastic walls at +-1 and the
// heating term follow the paper's equations; the paper's text adds gamma*y*dt
// to both branches, and that is what is done here.
//
// Number formats (this design's choice): x, y carry XY_FRAC fraction bits,
// a, a0, dt, c0, gamma carry P_FRAC fraction bits, mm is an integer. Each
// product is computed at full width and scaled back by an arithmetic right
// shift (rounding towards minus infinity). y~ and y_new saturate to Y_BITS;
// x~ needs no saturation because the wall bounds it.
//
// Purely combinational; the MMTE registers its inputs.
module te_dp
#(
  parameter int unsigned X_BITS  = dsb_pkg::X_BITS,
  parameter int unsigned Y_BITS  = dsb_pkg::Y_BITS,
  parameter int unsigned XY_FRAC = dsb_pkg::XY_FRAC,
  parameter int unsigned P_BITS  = dsb_pkg::P_BITS,
  parameter int unsigned P_FRAC  = dsb_pkg::P_FRAC,
  parameter int unsigned MM_W    = dsb_pkg::J_BITS + $clog2(dsb_pkg::N_SPIN) + 1
) (
  input  logic signed [X_BITS-1:0] x,
  input  logic signed [Y_BITS-1:0] y,
  input  logic signed [MM_W-1:0]   mm,
  input  logic signed [P_BITS-1:0] a,
  input  logic signed [P_BITS-1:0] a0,
  input  logic signed [P_BITS-1:0] dt,
  input  logic signed [P_BITS-1:0] c0,
  input  logic signed [P_BITS-1:0] gamma,
  input  logic                     heat,
  output logic signed [X_BITS-1:0] x_new,
  output logic signed [Y_BITS-1:0] y_new,
  output logic                     sgn_new,  // 1 when x_new < 0
  output logic                     wall      // 1 when the wall clipped x
);

  // Working width, wide enough for every full-precision product below.
  localparam int unsigned WW = 2 * P_BITS + MM_W + X_BITS + 4;

  localparam logic signed [WW-1:0] ZERO  = '0;
  localparam logic signed [WW-1:0] ONE   = WW'(1) <<< XY_FRAC;
  localparam logic signed [WW-1:0] Y_MAX = WW'((1 << (Y_BITS - 1)) - 1);
  localparam logic signed [WW-1:0] Y_MIN = -Y_MAX - 1;

  logic signed [WW-1:0] t_amp;    // (a - a0) * x        : P_FRAC + XY_FRAC
  logic signed [WW-1:0] t_cpl;    // c0 * mm             : P_FRAC
  logic signed [WW-1:0] force_;   // sum of both         : P_FRAC
  logic signed [WW-1:0] dy;       // force * dt          : XY_FRAC
  logic signed [WW-1:0] y_til, y_sat;
  logic signed [WW-1:0] dx;       // a0 * y~ * dt        : XY_FRAC
  logic signed [WW-1:0] x_til;
  logic signed [WW-1:0] h_term;   // gamma * y * dt      : XY_FRAC
  logic signed [WW-1:0] y_base, y_sum;

  function automatic logic signed [WW-1:0] sat_y(input logic signed [WW-1:0] v);
    if (v > Y_MAX)      return Y_MAX;
    else if (v < Y_MIN) return Y_MIN;
    else                return v;
  endfunction

  always_comb begin
    t_amp  = (WW'(a) - WW'(a0)) * WW'(x);
    t_cpl  = WW'(c0) * WW'(mm);
    force_ = (t_amp >>> XY_FRAC) + t_cpl;
    dy     = (force_ * WW'(dt)) >>> (2 * P_FRAC - XY_FRAC);
    y_til  = WW'(y) + dy;
    y_sat  = sat_y(y_til);
    dx     = (((WW'(a0) * y_sat) >>> P_FRAC) * WW'(dt)) >>> P_FRAC;
    x_til  = WW'(x) + dx;
    wall   = (x_til > ONE) || (x_til < -ONE);
    h_term = heat ? ((((WW'(gamma) * WW'(y)) >>> P_FRAC) * WW'(dt)) >>> P_FRAC) : ZERO;
    y_base = wall ? ZERO : y_sat;
    y_sum  = sat_y(y_base + h_term);

    if (wall) x_new = (x_til < 0) ? X_BITS'(-ONE) : X_BITS'(ONE);
    else      x_new = X_BITS'(x_til);
    y_new   = Y_BITS'(y_sum);
    sgn_new = x_new[X_BITS-1];
  end

endmodule

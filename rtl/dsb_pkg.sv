// dsb_pkg: shared sizes and fixed-point formats of the discrete simulated
// bifurcation (dSB) machine.
//
// The machine size follows the proof-of-concept configuration: 256 spins,
// Pr = Pc = 16 (rows and columns of J processed per cycle by one MMTE unit)
// and Pb = 4 (replicated MMTE units), with 8-bit J coefficients. These are the
// defaults of every module's parameters.
//
// The fixed-point formats are this design's own choice; the paper only says
// that the fraction is sized by the smallest increment of the pump amplitude
// and the integer part by the largest coupling sum. Positions and momenta are
// 16-bit two's complement with 13 fraction bits (range [-4, 4)); the run-time
// coefficients a, a0, delta_a, dt, c0 and gamma are 24-bit two's complement
// with 20 fraction bits (range [-8, 8), step about 1e-6).
package dsb_pkg;

  // Proof-of-concept configuration.
  localparam int unsigned N_SPIN = 256;
  localparam int unsigned PR     = 16;
  localparam int unsigned PC     = 16;
  localparam int unsigned PB     = 4;
  localparam int unsigned J_BITS = 8;

  // Oscillator state format.
  localparam int unsigned X_BITS  = 16;
  localparam int unsigned Y_BITS  = 16;
  localparam int unsigned XY_FRAC = 13;

  // Run-time coefficient format.
  localparam int unsigned P_BITS = 24;
  localparam int unsigned P_FRAC = 20;

  typedef logic signed [X_BITS-1:0] x_t;
  typedef logic signed [Y_BITS-1:0] y_t;
  typedef logic signed [P_BITS-1:0] coef_t;

  // Run-time coefficients handed to every time-evolution datapath.
  typedef struct packed {
    coef_t a0;      // final pump amplitude
    coef_t dt;      // time step
    coef_t c0;      // coupling scale
    coef_t gamma;   // heating coefficient
    logic  heat;    // 1: add the heating term gamma*y*dt
  } te_coef_t;

endpackage

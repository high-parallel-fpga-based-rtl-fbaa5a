// a_updater: the linear updater of the pump amplitude a(t).
//
// A register and an adder: every step a grows by delta_a (the host sets
// delta_a = a0 / n_steps), so a ramps linearly from 0 to a0 over the run.
// clr restarts the ramp at 0 when a run starts; en adds one increment and is
// pulsed by the controller at the end of each step. The register and adder
// loop are the paper's; the clear input is this design's. The sum saturates at
// the ends of the coefficient range instead of wrapping.
//
// Timing: a changes at the clock edge after clr or en; synchronous active-low
// reset clears it.
module a_updater
#(
  parameter int unsigned P_BITS = dsb_pkg::P_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     en,
  input  logic signed [P_BITS-1:0] delta_a,
  output logic signed [P_BITS-1:0] a
);

  localparam logic signed [P_BITS:0] MAXV = (P_BITS+1)'({1'b0, {(P_BITS-1){1'b1}}});
  localparam logic signed [P_BITS:0] MINV = -MAXV - 1;

  logic signed [P_BITS:0] a_sum;

  assign a_sum = (P_BITS+1)'(a) + (P_BITS+1)'(delta_a);

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      a <= '0;
    end else if (en) begin
      if (a_sum > MAXV)      a <= MAXV[P_BITS-1:0];
      else if (a_sum < MINV) a <= MINV[P_BITS-1:0];
      else                   a <= a_sum[P_BITS-1:0];
    end
  end

endmodule

// mac: Multiply-ACcumulate unit of the MM block. Accumulates one row of
// J * sgn(x) over n_spin/PC consecutive words and holds the finished sum.
//
// Each valid cycle the Add/Sub block reduces PC coefficients of the row with
// their PC sign bits to one partial sum. A multiplexer feeds back either the
// accumulator or zero (zero on the first word of a row), and the adder adds
// the partial sum into ACC, as in the paper's MAC zoom. The accumulator is
// J_BITS + log2(n_spin) + 1 bits wide so that a full row of the most negative
// coefficient times -1 cannot overflow (one bit more than the figure prints).
// On the last word the finished row sum is also copied into a hold register,
// res, so that the accumulator can start on the next row while the time
// evolution reads the previous result (the MM/TE overlap); the hold register is
// this design's way of sampling ACC.
//
// Timing: in_valid/first/last travel with j_row and sgn. res is updated at the
// clock edge that ends the last word and res_valid pulses for one cycle after
// it. Synchronous active-low reset clears ACC, res and res_valid.
module mac
#(
  parameter int unsigned N_SPIN = dsb_pkg::N_SPIN,
  parameter int unsigned PC     = dsb_pkg::PC,
  parameter int unsigned J_BITS = dsb_pkg::J_BITS,
  parameter int unsigned ACC_W  = J_BITS + $clog2(N_SPIN) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     first,
  input  logic                     last,
  input  logic [PC*J_BITS-1:0]     j_row,
  input  logic [PC-1:0]            sgn,
  output logic signed [ACC_W-1:0]  res,
  output logic                     res_valid
);

  localparam int unsigned SUM_W = J_BITS + $clog2(PC) + 1;

  logic signed [SUM_W-1:0] part;
  localparam logic signed [ACC_W-1:0] ZERO = '0;

  logic signed [ACC_W-1:0] acc, acc_base, acc_ext, acc_next;

  addsub #(.PC(PC), .J_BITS(J_BITS), .OUT_W(SUM_W)) u_addsub (
    .j_row (j_row),
    .sgn   (sgn),
    .sum   (part)
  );

  // feedback multiplexer: zero on the first word of a row, else ACC
  assign acc_base = first ? ZERO : acc;
  assign acc_ext  = ACC_W'(part);
  assign acc_next = acc_base + acc_ext;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      res       <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      if (in_valid) begin
        acc <= acc_next;
        if (last) begin
          res       <= acc_next;
          res_valid <= 1'b1;
        end
      end
    end
  end

endmodule

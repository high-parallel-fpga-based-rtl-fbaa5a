// addsub: the Add/Sub block of a MAC unit. Forms sum_c J[c] * sgn(x[c]) over
// PC coefficients in one combinational step, without multipliers.
//
// Each coefficient passes through a multiplexer that selects either J[c]
// (sign bit 0, x >= 0) or its one's complement ~J[c] (sign bit 1, x < 0).
// Tree1, a balanced binary tree of adders, sums the PC multiplexer outputs.
// Tree2, working in parallel, counts the sign bits that are 1. Adding that
// count to Tree1's result turns every one's complement into a two's complement
// negation, so the output is exactly sum_c (sgn ? -J[c] : J[c]).
// This structure is the paper's (MAC zoom of its architecture figure); the
// heap layout of the trees and the result width are this design's choice.
//
// Interface: j_row packs coefficient c at bits [c*J_BITS +: J_BITS]; sgn[c]
// is 1 when x[c] is negative. Purely combinational. PC must be a power of two.
module addsub
#(
  parameter int unsigned PC     = dsb_pkg::PC,
  parameter int unsigned J_BITS = dsb_pkg::J_BITS,
  parameter int unsigned OUT_W  = J_BITS + $clog2(PC) + 1
) (
  input  logic [PC*J_BITS-1:0]     j_row,
  input  logic [PC-1:0]            sgn,
  output logic signed [OUT_W-1:0]  sum
);

  localparam int unsigned CNT_W = $clog2(PC) + 1;

  // Heap-ordered trees: node k has children 2k+1 and 2k+2, leaves at
  // PC-1 .. 2*PC-2.
  logic signed [OUT_W-1:0] tree1 [2*PC-1];
  logic        [CNT_W-1:0] tree2 [2*PC-1];

  always_comb begin
    for (int c = 0; c < PC; c++) begin
      logic signed [J_BITS-1:0] jc, jm;
      jc = j_row[c*J_BITS +: J_BITS];
      // sign-controlled multiplexer: J or its one's complement
      jm = sgn[c] ? ~jc : jc;
      tree1[PC-1+c] = OUT_W'(jm);
      tree2[PC-1+c] = CNT_W'(sgn[c]);
    end
    // internal nodes, leaves towards the root
    for (int k = PC - 2; k >= 0; k--) begin
      tree1[k] = tree1[2*k+1] + tree1[2*k+2];
      tree2[k] = tree2[2*k+1] + tree2[2*k+2];
    end
  end

  // Two's complement correction: add one per negated coefficient.
  assign sum = tree1[0] + OUT_W'(signed'({1'b0, tree2[0]}));

  initial begin
    assert ((PC & (PC - 1)) == 0 && PC >= 2)
      else $error("addsub: PC must be a power of two");
  end

endmodule

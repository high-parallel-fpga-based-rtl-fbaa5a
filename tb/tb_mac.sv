// tb_mac: feeds rows of 16 random words (256 coefficients) into one MAC and
// checks the held row sum, the one-cycle res_valid pulse after the last word,
// that the hold register keeps its value while the next row accumulates, and
// the restart of the accumulator on the first word of each row.
module tb_mac;
  localparam int N = 256, PC = 16, JB = 8, NW = N / PC, ACCW = JB + $clog2(N) + 1;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, last = 0;
  logic [PC*JB-1:0] j_row = '0;
  logic [PC-1:0] sgn = '0;
  logic signed [ACCW-1:0] res;
  logic res_valid;
  int checks = 0, failures = 0;

  mac #(.N_SPIN(N), .PC(PC), .J_BITS(JB)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int expect_q[$];
  int prev;

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int row = 0; row < 12; row++) begin
      int s;
      s = 0;
      for (int w = 0; w < NW; w++) begin
        logic [PC*JB-1:0] jr;
        logic [PC-1:0] sg;
        for (int c = 0; c < PC; c++) begin
          // row 0 uses the extreme case that needs the widest accumulator
          jr[c*JB +: JB] = (row == 0) ? 8'h80 : 8'($urandom);
          sg[c] = (row == 0) ? 1'b1 : 1'($urandom);
          s += sg[c] ? -int'(signed'(jr[c*JB +: JB])) : int'(signed'(jr[c*JB +: JB]));
        end
        in_valid <= 1; first <= (w == 0); last <= (w == NW - 1);
        j_row <= jr; sgn <= sg;
        @(posedge clk);
        // a bubble in the middle of some rows
        if (row % 3 == 2 && w == 5) begin
          in_valid <= 0;
          @(posedge clk);
        end
        #1;
        if (w == NW - 1) begin
          chk(res_valid == 1, "res_valid after last word");
          chk(int'(res) == s, $sformatf("row %0d sum %0d exp %0d", row, res, s));
          prev = s;
        end else begin
          chk(res_valid == 0, "res_valid only after last word");
          if (row > 0) chk(int'(res) == prev, "hold register stable while accumulating");
        end
      end
    end
    in_valid <= 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

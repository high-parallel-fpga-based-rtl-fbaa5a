// tb_addsub: checks the Add/Sub block against a direct signed sum of
// sgn(x_c) * J_c for random and extreme coefficient/sign patterns.
module tb_addsub;
  localparam int PC = 16, JB = 8, OW = JB + $clog2(PC) + 1;
  logic [PC*JB-1:0] j_row;
  logic [PC-1:0]    sgn;
  logic signed [OW-1:0] sum;
  int checks = 0, failures = 0;

  addsub #(.PC(PC), .J_BITS(JB)) dut (.j_row, .sgn, .sum);

  task automatic check_one();
    int exp_v = 0;
    for (int c = 0; c < PC; c++) begin
      int jv = int'(signed'(j_row[c*JB +: JB]));
      exp_v += sgn[c] ? -jv : jv;
    end
    #1;
    checks++;
    if (int'(sum) != exp_v) begin
      failures++;
      if (failures < 10) $display("addsub mismatch: got %0d exp %0d", sum, exp_v);
    end
  endtask

  initial begin
    // extremes: all -128 with all signs negative gives +2048
    for (int c = 0; c < PC; c++) j_row[c*JB +: JB] = 8'h80;
    sgn = '1; check_one();
    sgn = '0; check_one();
    for (int c = 0; c < PC; c++) j_row[c*JB +: JB] = 8'h7f;
    sgn = '1; check_one();
    sgn = '0; check_one();
    for (int i = 0; i < 3000; i++) begin
      for (int c = 0; c < PC; c++) j_row[c*JB +: JB] = 8'($urandom);
      sgn = PC'($urandom);
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

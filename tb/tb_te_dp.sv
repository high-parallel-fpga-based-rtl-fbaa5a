// tb_te_dp: compares the time-evolution datapath with the reference update
// of dsb_ref_pkg over random states and coefficients, with and without
// heating, and counts how often the wall clipped x (must happen).
module tb_te_dp;
  import dsb_ref_pkg::*;
  logic signed [15:0] x, y, x_new, y_new;
  logic signed [16:0] mm;
  logic signed [23:0] a, a0, dt, c0, gamma;
  logic heat, sgn_new, wall;
  int checks = 0, failures = 0, walls = 0, heats = 0;

  te_dp dut (.*);

  initial begin
    for (int i = 0; i < 20000; i++) begin
      longint xn, yn;
      bit wl;
      x     = 16'($urandom_range(16384) - 8192);          // [-1, 1]
      y     = 16'($urandom_range(16384) - 8192);          // [-1, 1]
      mm    = 17'($urandom_range(65535) - 32768);
      a0    = 24'(to_fix(1.0, PF));
      a     = 24'($urandom_range(int'(a0)));
      dt    = 24'($urandom_range(1 << 20));               // (0, 1]
      c0    = 24'($urandom_range(4096));                  // up to 1/256
      gamma = 24'($urandom_range(1 << 20));
      heat  = 1'($urandom);
      if (i % 7 == 0) begin                               // large momenta
        y = 16'($urandom_range(65535) - 32768);
        c0 = 24'($urandom_range(1 << 20));
      end
      #1;
      te(x, y, mm, a, a0, dt, c0, gamma, heat, xn, yn, wl);
      checks++;
      if (longint'(x_new) != xn || longint'(y_new) != yn || wall != wl ||
          sgn_new != (xn < 0)) begin
        failures++;
        if (failures < 10)
          $display("FAIL x=%0d y=%0d mm=%0d: got (%0d,%0d,%0d) exp (%0d,%0d,%0d)",
                   x, y, mm, x_new, y_new, wall, xn, yn, wl);
      end
      walls += wl;
      heats += heat;
    end
    checks++;
    if (walls == 0 || heats == 0) failures++;
    $display("wall clips %0d, heated updates %0d", walls, heats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mmte: one MMTE unit at the default sizes. Streams all row groups of a
// random J block against a random sign vector, issues the time evolution of
// every row in the overlap window (x and y arriving one cycle later, as from
// XMEM/YMEM) and compares each (x_new, y_new, sgn_new) with the reference
// update applied to the exact row sum. Runs once without and once with
// heating.
module tb_mmte;
  import dsb_ref_pkg::*;
  localparam int N = 256, PR = 16, PC = 16, PB = 4, JB = 8;
  localparam int NW = N / PC, G = N / (PB * PR), DEPTH = G * NW;
  localparam int AW = $clog2(DEPTH), RW = $clog2(PR);

  logic clk = 0, rst_n = 0;
  logic jw_en = 0, mm_en = 0, mm_first = 0, mm_last = 0, te_issue = 0;
  logic [RW-1:0] jw_row = '0, te_sel = '0;
  logic [AW-1:0] jw_addr = '0, mm_addr = '0;
  logic [PC*JB-1:0] jw_data = '0;
  logic [PC-1:0] sgn_word = '0;
  logic signed [15:0] x_in = '0, y_in = '0, x_new, y_new;
  logic signed [23:0] a = '0;
  dsb_pkg::te_coef_t coef;
  logic te_out_valid, sgn_new, wall, mm_res_valid;

  int jm [G][PR][N];
  bit sv [N];
  int rsum [G][PR];
  longint xs [G][PR], ys [G][PR];
  int checks = 0, failures = 0, walls = 0;

  mmte #(.N_SPIN(N), .PR(PR), .PC(PC), .PB(PB), .J_BITS(JB)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic stream(input bit heat);
    coef.heat = heat;
    for (int c = 0; c < DEPTH + NW + 3; c++) begin
      logic [PC-1:0] sw;
      int tc;
      mm_en    <= (c < DEPTH);
      mm_addr  <= AW'(c);
      mm_first <= (c % NW == 0);
      mm_last  <= (c % NW == NW - 1);
      if (c >= 1 && c <= DEPTH) begin
        for (int k = 0; k < PC; k++) sw[k] = sv[((c - 1) % NW) * PC + k];
        sgn_word <= sw;
      end
      tc = c - NW - 1;
      te_issue <= (tc >= 0 && tc % NW < PR && tc / NW < G);
      if (tc >= 0) te_sel <= RW'(tc % NW);
      // operands of the previous cycle's issue
      if (tc >= 1 && (tc - 1) % NW < PR && (tc - 1) / NW < G) begin
        x_in <= 16'(xs[(tc - 1) / NW][(tc - 1) % NW]);
        y_in <= 16'(ys[(tc - 1) / NW][(tc - 1) % NW]);
      end
      #4;
      if (tc >= 1 && (tc - 1) % NW < PR && (tc - 1) / NW < G) begin
        int g, r;
        longint xn, yn;
        bit wl;
        g = (tc - 1) / NW;
        r = (tc - 1) % NW;
        te(xs[g][r], ys[g][r], longint'(rsum[g][r]), longint'(a), longint'(coef.a0),
           longint'(coef.dt), longint'(coef.c0), longint'(coef.gamma), heat, xn, yn, wl);
        chk(te_out_valid, "te_out_valid one cycle after issue");
        chk(longint'(x_new) == xn && longint'(y_new) == yn && sgn_new == (xn < 0) && wall == wl,
            $sformatf("g%0d r%0d mm=%0d: got (%0d,%0d) exp (%0d,%0d)", g, r, rsum[g][r],
                      x_new, y_new, xn, yn));
        walls += wl;
      end else begin
        chk(!te_out_valid, "no te_out_valid without issue");
      end
      @(posedge clk);
      #1;
    end
  endtask

  initial begin
    for (int g = 0; g < G; g++)
      for (int r = 0; r < PR; r++) begin
        for (int j = 0; j < N; j++) jm[g][r][j] = $urandom_range(255) - 128;
        xs[g][r] = $urandom_range(16384) - 8192;
        ys[g][r] = $urandom_range(16384) - 8192;
      end
    for (int j = 0; j < N; j++) sv[j] = 1'($urandom);
    for (int g = 0; g < G; g++)
      for (int r = 0; r < PR; r++) begin
        rsum[g][r] = 0;
        for (int j = 0; j < N; j++) rsum[g][r] += sv[j] ? -jm[g][r][j] : jm[g][r][j];
      end
    coef.a0    = 24'(to_fix(1.0, PF));
    coef.dt    = 24'(to_fix(0.5, PF));
    coef.c0    = 24'(to_fix(0.0004, PF));
    coef.gamma = 24'(to_fix(0.25, PF));
    coef.heat  = 0;
    a          = 24'(to_fix(0.3, PF));
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < PR; r++)
      for (int g = 0; g < G; g++)
        for (int w = 0; w < NW; w++) begin
          logic [PC*JB-1:0] d;
          for (int c = 0; c < PC; c++) d[c*JB +: JB] = JB'(jm[g][r][w*PC + c]);
          jw_en <= 1; jw_row <= RW'(r); jw_addr <= AW'(g*NW + w); jw_data <= d;
          @(posedge clk);
        end
    jw_en <= 0;
    @(posedge clk); #1;
    stream(0);
    stream(1);
    $display("wall clips %0d", walls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mm: loads random J rows into the PR memories of one MM block, streams
// all row groups against a random sign vector as the controller does, and
// checks every row sum through the output multiplexer inside the window in
// which the time evolution reads it, plus the res_valid timing.
module tb_mm;
  localparam int N = 256, PR = 16, PC = 16, PB = 4, JB = 8;
  localparam int NW = N / PC, G = N / (PB * PR), DEPTH = G * NW;
  localparam int AW = $clog2(DEPTH), RW = $clog2(PR), ACCW = JB + $clog2(N) + 1;

  logic clk = 0, rst_n = 0;
  logic jw_en = 0, rd_en = 0, first = 0, last = 0;
  logic [RW-1:0] jw_row = '0, out_sel = '0;
  logic [AW-1:0] jw_addr = '0, rd_addr = '0;
  logic [PC*JB-1:0] jw_data = '0;
  logic [PC-1:0] sgn_word = '0;
  logic signed [ACCW-1:0] out;
  logic res_valid;

  int jm [G][PR][N];
  bit sv [N];
  int rsum [G][PR];
  int checks = 0, failures = 0, rv_seen = 0;

  mm #(.N_SPIN(N), .PR(PR), .PC(PC), .PB(PB), .J_BITS(JB)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int g = 0; g < G; g++)
      for (int r = 0; r < PR; r++)
        for (int j = 0; j < N; j++) jm[g][r][j] = $urandom_range(255) - 128;
    for (int j = 0; j < N; j++) sv[j] = 1'($urandom);
    for (int g = 0; g < G; g++)
      for (int r = 0; r < PR; r++) begin
        rsum[g][r] = 0;
        for (int j = 0; j < N; j++) rsum[g][r] += sv[j] ? -jm[g][r][j] : jm[g][r][j];
      end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // load
    for (int r = 0; r < PR; r++)
      for (int g = 0; g < G; g++)
        for (int w = 0; w < NW; w++) begin
          logic [PC*JB-1:0] d;
          for (int c = 0; c < PC; c++) d[c*JB +: JB] = JB'(jm[g][r][w*PC + c]);
          jw_en <= 1; jw_row <= RW'(r); jw_addr <= AW'(g*NW + w); jw_data <= d;
          @(posedge clk);
        end
    jw_en <= 0;
    // stream: cycle c issues word c; sign word arrives at c+1;
    // group g sums are read at cycles (g+1)*NW + 1 + r
    for (int c = 0; c < DEPTH + NW + 2; c++) begin
      logic [PC-1:0] sw;
      rd_en   <= (c < DEPTH);
      rd_addr <= AW'(c);
      first   <= (c % NW == 0);
      last    <= (c % NW == NW - 1);
      if (c >= 1 && c <= DEPTH) begin
        for (int k = 0; k < PC; k++) sw[k] = sv[((c - 1) % NW) * PC + k];
        sgn_word <= sw;
      end
      if (c >= NW + 1 && (c - NW - 1) % NW < PR && (c - NW - 1) / NW < G)
        out_sel <= RW'((c - NW - 1) % NW);
      #4;  // mid-cycle: outputs of cycle c
      if (res_valid) begin
        rv_seen++;
        chk((c - 2) % NW == NW - 1, $sformatf("res_valid at cycle %0d", c));
      end
      if (c >= NW + 1 && (c - NW - 1) % NW < PR && (c - NW - 1) / NW < G) begin
        int g, r;
        g = (c - NW - 1) / NW;
        r = (c - NW - 1) % NW;
        chk(int'(out) == rsum[g][r],
            $sformatf("group %0d row %0d: got %0d exp %0d", g, r, out, rsum[g][r]));
      end
      @(posedge clk);
      #1;
    end
    chk(rv_seen == G, "one res_valid per group");
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

// tb_sb_ctrl: runs the controller at the default sizes (256 spins,
// Pr = Pc = 16, Pb = 4) and checks its schedule against rules worked out
// here, not taken from the module:
//  - G*NW MM issues and n_spin/PB TE issues per step, sign word = J address
//    mod NW, output mux select = row;
//  - write-back one cycle after each TE issue, every XMEM/YMEM word written
//    once per step, TE only on row groups whose MM issue has finished;
//  - every sign word read by step k > 0 was completely written by step k-1
//    (the readiness rule that lets a step start before the previous ends);
//  - step k reads sign bank base^(k mod 2) and writes the other one, and the
//    next run reads the bank the last step wrote;
//  - one a update per step, at the end of the step;
//  - a step every 70 cycles and 82 cycles per step (the values for these
//    sizes, computed by hand), so n steps take (n-1)*70 + 82 cycles;
//  - the MM of a step overlaps the write-back of the previous one.
module tb_sb_ctrl;
  localparam int N = 256, PR = 16, PC = 16, PB = 4;
  localparam int NW = N / PC, G = N / (PB * PR), DEPTH = G * NW;
  localparam int LEN = 82, PERIOD = 70;
  localparam int XA = $clog2(N / PB);

  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] n_steps = '0, step_cnt;
  logic busy, done, mm_en, mm_first, mm_last, sgn_re, rd_bank, wr_bank, host_bank;
  logic te_issue, wb_en, a_clr, a_en;
  logic [5:0] mm_addr;
  logic [3:0] sgn_word, te_sel;
  logic [XA-1:0] xy_raddr, wb_addr;
  int checks = 0, failures = 0;

  sb_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic run(input int steps);
    int cyc, n_mm, n_te, n_wb, n_aen, n_first, n_stov;
    int seen [N / PB];
    int ver [2][N];   // per bank: 1 + the step that last wrote each sign
    logic base0, pend;
    logic [XA-1:0] pend_addr;
    n_steps <= steps; start <= 1;
    @(posedge clk);
    start <= 0;
    base0 = host_bank;
    cyc = 0; n_mm = 0; n_te = 0; n_wb = 0; n_aen = 0; n_first = 0; n_stov = 0;
    pend = 0; pend_addr = '0;
    foreach (seen[i]) seen[i] = 0;
    foreach (ver[i, j]) ver[i][j] = 0;
    #1;
    while (!done) begin
      int k_mm, k_te, k_wb;
      k_mm = n_mm / DEPTH;
      k_te = n_te / (N / PB);
      k_wb = n_wb / (N / PB);
      if (pend) chk(wb_en && wb_addr == pend_addr, "write-back one cycle after TE issue");
      else      chk(!wb_en, "no spurious write-back");
      pend = te_issue; pend_addr = xy_raddr;
      if (mm_en) begin
        chk(sgn_re && int'(sgn_word) == int'(mm_addr) % NW, "sign word follows J address");
        chk(int'(mm_addr) == n_mm % DEPTH, "J addresses in order");
        chk(cyc == k_mm * PERIOD + n_mm % DEPTH, "MM issue at its cycle in the step");
        chk(rd_bank == (base0 ^ k_mm[0]), "step k reads bank base^(k mod 2)");
        for (int c = 0; c < PC; c++)
          chk(ver[rd_bank][int'(sgn_word) * PC + c] == k_mm, "sign word complete before it is read");
        if (mm_first) n_first++;
        n_mm++;
      end
      if (te_issue) begin
        chk(int'(te_sel) == int'(xy_raddr) % PR, "output mux select is the row");
        chk(n_mm >= k_te * DEPTH + (int'(xy_raddr) / PR + 1) * NW,
            "TE only on row groups whose MM issue has finished");
        n_te++;
      end
      if (wb_en) begin
        chk(wr_bank == !(base0 ^ k_wb[0]), "step k writes the other bank");
        seen[wb_addr]++;
        for (int b = 0; b < PB; b++)
          ver[wr_bank][(int'(wb_addr) / PR) * PB * PR + b * PR + int'(wb_addr) % PR] = k_wb + 1;
        if (mm_en && k_mm > k_wb) n_stov++;
        n_wb++;
      end
      if (a_en) begin
        chk(cyc == n_aen * PERIOD + LEN - 1, "a update at the end of each step");
        foreach (seen[i]) chk(seen[i] == n_aen + 1, "each XMEM word updated once per step");
        n_aen++;
      end
      @(posedge clk); #1;
      cyc++;
    end
    chk(cyc == (steps - 1) * PERIOD + LEN,
        $sformatf("run length %0d cycles, expected %0d", cyc, (steps - 1) * PERIOD + LEN));
    chk(n_mm == steps * DEPTH, "MM issues per run");
    chk(n_te == steps * N / PB, "TE issues per run");
    chk(n_first == steps * G, "row groups per run");
    chk(n_aen == steps, "one a update per step");
    if (steps > 1) chk(n_stov > 0, "next step's MM overlaps the previous write-back");
    chk(host_bank == (base0 ^ steps[0]), "next run reads the bank written last");
    chk(step_cnt == 32'(steps), "step counter");
    chk(!busy, "idle after done");
    $display("run of %0d steps: %0d cycles, %0d cycles of MM over the previous write-back",
             steps, cyc, n_stov);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run(1);
    run(3);
    // zero steps: done at once without becoming busy
    n_steps <= 0; start <= 1;
    @(posedge clk); start <= 0; #1;
    chk(!busy && done, "zero-step run ends at once");
    @(posedge clk); #1;
    chk(!busy, "zero-step run never busy");
    run(2);
    run(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

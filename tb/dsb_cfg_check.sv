// dsb_cfg_check: end-to-end check of the dSB machine for one parallelism
// configuration (parameters N, PR, PC, PB), used by tb_dsb_configs.
//
// The checker loads a symmetric J matrix with random coefficients in [-128,
// 127] through the host port, loads random small initial positions and
// momenta, starts runs and reads every x and y back. A reference model
// (dsb_ref_pkg) replays each run in plain integer arithmetic: per step, all
// row sums J*sgn(x) from the signs at the start of the step, then the time
// evolution of every spin with a = k*delta_a, and the ancillary spin held at
// +1 when that is enabled. Every x and y must match bit for bit, and a run of
// n > 0 steps must take (n-1)*PERIOD + G*NW + PR + 2 cycles, where PERIOD is
// the step start distance worked out below from the order in which the sign
// words are completed. It reports its counts through its ports and counts a
// failure for each of these that never happened: heated runs, sign bank swaps,
// runs that reuse the loaded J with fresh x and y, a zero-step run.
module dsb_cfg_check #(
  parameter int N = 256, PR = 16, PC = 16, PB = 4
) (
  output int   n_checks,
  output int   n_failures,
  output logic finished
);
  import dsb_ref_pkg::*;
  localparam int JB = 8;
  localparam int NW = N / PC, G = N / (PB * PR), DEPTH = G * NW;
  localparam int LEN = DEPTH + PR + 2;
  // a step may start once every sign word it reads is complete, its MM
  // follows the previous MM, and its TE follows the previous TE
  function automatic int period_f();
    int p, wbj;
    p = DEPTH;
    if ((G - 1) * NW + PR > p) p = (G - 1) * NW + PR;
    for (int j = 0; j < N; j++) begin
      wbj = NW + 1 + (j / (PB * PR)) * NW + j % PR + 1;   // write-back cycle
      if (wbj + 1 - j / PC > p) p = wbj + 1 - j / PC;
    end
    return p;
  endfunction
  localparam int PERIOD = period_f();
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int MW = (PB * PR > 1) ? $clog2(PB * PR) : 1;
  localparam int IA = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic j_we = 0, xy_we = 0, rd_en = 0, start = 0, anc_en = 0;
  logic [$clog2(N)-1:0] anc_idx = '0;
  logic [MW-1:0] j_mem = '0;
  logic [AW-1:0] j_addr = '0;
  logic [PC*JB-1:0] j_data = '0;
  logic [IA-1:0] xy_idx = '0, rd_idx = '0;
  dsb_pkg::x_t x_wdata = '0, rd_x;
  dsb_pkg::y_t y_wdata = '0, rd_y;
  logic rd_valid;
  dsb_pkg::te_coef_t coef;
  dsb_pkg::coef_t delta_a = '0;
  logic [31:0] n_steps = '0, step_cnt;
  logic busy, done;

  dsb_top #(.N_SPIN(N), .PR(PR), .PC(PC), .PB(PB)) dut (.*);

  always #5 clk = ~clk;

  int jm [N][N];
  longint xs [N], ys [N];
  int checks = 0, failures = 0;
  logic fin = 1'b0;
  assign n_checks = checks;
  assign n_failures = failures;
  assign finished = fin;
  int n_walls = 0, n_heated = 0, n_swaps = 0, n_overlap = 0, n_reuse = 0, n_zero = 0;
  int n_anc = 0, n_step_overlap = 0;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // monitors of internal mechanisms
  logic bank_q;
  always @(posedge clk) begin
    bank_q <= dut.u_ctrl.rd_bank;
    if (rst_n && dut.u_ctrl.rd_bank != bank_q) n_swaps++;
    if (dut.u_ctrl.mm_en && dut.u_ctrl.te_issue) n_overlap++;
    // MM of one step while the TE of the previous one still writes back
    if (dut.u_ctrl.mm_en && dut.u_ctrl.wb_en && dut.u_ctrl.rd_bank == dut.u_ctrl.wr_bank)
      n_step_overlap++;
  end

  task automatic load_j();
    for (int m = 0; m < PB * PR; m++)
      for (int g = 0; g < G; g++)
        for (int w = 0; w < NW; w++) begin
          logic [PC*JB-1:0] d;
          for (int c = 0; c < PC; c++) d[c*JB +: JB] = JB'(jm[g*PB*PR + m][w*PC + c]);
          j_we <= 1; j_mem <= MW'(m); j_addr <= AW'(g*NW + w); j_data <= d;
          @(posedge clk);
        end
    j_we <= 0;
  endtask

  task automatic load_xy(input int amp);
    for (int i = 0; i < N; i++) begin
      xs[i] = $urandom_range(2 * amp) - amp;
      ys[i] = $urandom_range(2 * amp) - amp;
      if (anc_en && i == int'(anc_idx)) begin
        xs[i] = longint'(1) <<< 13;
        ys[i] = 0;
      end
      xy_we <= 1; xy_idx <= IA'(i); x_wdata <= 16'(xs[i]); y_wdata <= 16'(ys[i]);
      @(posedge clk);
    end
    xy_we <= 0;
  endtask

  // reference model of one run
  task automatic ref_run(input int steps);
    longint a;
    a = 0;
    for (int k = 0; k < steps; k++) begin
      int mmv [N];
      bit wl;
      for (int i = 0; i < N; i++) begin
        mmv[i] = 0;
        for (int j = 0; j < N; j++) mmv[i] += (xs[j] < 0) ? -jm[i][j] : jm[i][j];
      end
      for (int i = 0; i < N; i++) begin
        longint xn, yn;
        te(xs[i], ys[i], longint'(mmv[i]), a, longint'(coef.a0), longint'(coef.dt),
           longint'(coef.c0), longint'(coef.gamma), coef.heat, xn, yn, wl);
        if (anc_en && i == int'(anc_idx)) begin
          // the ancillary spin stays at x = +1, y = 0
          if (xn != (longint'(1) <<< 13) || yn != 0) n_anc++;
          xn = longint'(1) <<< 13;
          yn = 0;
          wl = 0;
        end
        xs[i] = xn; ys[i] = yn;
        n_walls += wl;
      end
      a = a + longint'(delta_a);
      if (a > 64'sd8388607) a = 64'sd8388607;
    end
  endtask

  task automatic run(input int steps, input string tag);
    int cyc, exp_cyc;
    n_steps <= 32'(steps); start <= 1;
    @(posedge clk);
    start <= 0;
    cyc = 0;
    #1;
    while (!done) begin
      @(posedge clk); #1;
      cyc++;
    end
    exp_cyc = (steps == 0) ? 0 : (steps - 1) * PERIOD + LEN;
    chk(cyc == exp_cyc,
        $sformatf("%s: %0d cycles for %0d steps, expected %0d", tag, cyc, steps, exp_cyc));
    chk(step_cnt == 32'(steps), "step counter");
    ref_run(steps);
    // read back and compare
    for (int i = 0; i < N; i++) begin
      rd_en <= 1; rd_idx <= IA'(i);
      @(posedge clk);
      rd_en <= 0;
      #1;
      chk(rd_valid, "readout valid one cycle after request");
      chk(longint'(rd_x) == xs[i] && longint'(rd_y) == ys[i],
          $sformatf("%s spin %0d: got (%0d,%0d) exp (%0d,%0d)", tag, i, rd_x, rd_y, xs[i], ys[i]));
    end
    $display("%s: %0d steps in %0d cycles (step period %0d, step length %0d)", tag,
             steps, cyc, PERIOD, LEN);
  endtask

  function automatic longint cut_value();
    longint c = 0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++)
        if ((xs[i] < 0) != (xs[j] < 0)) c += -jm[i][j];
    return c;
  endfunction

  initial begin
    real mean, var_, sigma;
    int steps;
    // symmetric J, zero diagonal
    for (int i = 0; i < N; i++) begin
      jm[i][i] = 0;
      for (int j = i + 1; j < N; j++) begin
        jm[i][j] = $urandom_range(255) - 128;
        jm[j][i] = jm[i][j];
      end
    end
    mean = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) mean += jm[i][j];
    mean /= N * N;
    var_ = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) var_ += (jm[i][j] - mean) ** 2;
    sigma = $sqrt(var_ / (N * N));
    steps = 6;
    coef.a0    = 24'(to_fix(1.0, PF));
    coef.dt    = 24'(to_fix(0.5, PF));
    // c0 = 1 / (2 sigma sqrt(N))
    coef.c0    = 24'(to_fix(1.0 / (2.0 * sigma * $sqrt(real'(N))), PF));
    coef.gamma = 24'(to_fix(0.5, PF));
    coef.heat  = 0;
    delta_a    = 24'(to_fix(1.0, PF) / steps);

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    load_j();
    // a heated run, a zero-step run and a plain run on the same J
    coef.heat = 1;
    load_xy(800);
    run(steps, "heated dSB");
    n_heated++;
    run(0, "zero steps");
    n_zero++;
    coef.heat = 0;
    load_xy(800);
    run(3, "dSB reuse");
    n_reuse++;
    chk(n_heated > 0, "a heated run happened");
    chk(n_swaps > 0, "sign banks swapped");
    chk(n_reuse > 0, "a run reused the loaded J");
    chk(n_zero > 0, "a zero-step run happened");
    $display("mechanisms: heated=%0d swaps=%0d reuse=%0d zero=%0d",
             n_heated, n_swaps, n_reuse, n_zero);
    $display("Pr=%0d Pc=%0d Pb=%0d: step period %0d, step length %0d, checks %0d, failures %0d",
             PR, PC, PB, PERIOD, LEN, checks, failures);
    fin = 1'b1;
  end
endmodule

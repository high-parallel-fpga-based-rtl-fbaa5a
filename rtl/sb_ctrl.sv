// sb_ctrl: the sequencer of the dSB machine. Runs n_steps algorithm steps.
// Each step is a matrix-vector product of all rows, overlapped with the time
// evolution of the rows already finished. The next step's product starts
// while the previous step is still writing its last results.
//
// Schedule of one step, in cycles from its start (NW = n_spin/PC words per
// row, G = n_spin/(PB*PR) row groups per MMTE unit, LEN = G*NW + PR + 2):
//   c in [0, G*NW)            MM issue: J address c, sign word c mod NW,
//                             first/last word of the row group.
//   NW+1 + g*NW + r, r < PR   TE issue for row r of group g: XMEM/YMEM read
//                             address g*PR + r, output mux select r.
//   one cycle after that      write-back of x, y and the new sign.
//   LEN-1                     last write-back of the step; a += delta_a.
// So the TE of group g runs while MM accumulates group g+1 (the paper's MM/TE
// overlap). A new step starts every PERIOD cycles. PERIOD is the smallest
// start distance at which (a) every sign word is complete before the new step
// reads it, (b) MM of the new step starts after MM of the old one has ended,
// and (c) the new step's first row sums, TE reads and a-dependent updates
// come after the old step's last ones. For the default sizes PERIOD = 70 and
// LEN = 82, so a run of n steps takes (n-1)*70 + 82 cycles. The paper's
// estimate for the same sizes is 68 cycles per step. The exact schedule is
// this design's own.
//
// Two step slots alternate, because two steps can be active at once: step k
// uses slot k mod 2. Step k reads sign bank base^(k mod 2) and writes the
// other bank, so the sign banks still swap roles every step (ping-pong).
//
// Interface: start (one cycle, accepted when idle) begins a run. busy stays
// high while it lasts and done pulses for one cycle at its end. n_steps is
// sampled at start; a run of 0 steps ends at once. host_bank is the bank the
// next run reads; the host's sign writes go there.
module sb_ctrl #(
  parameter int unsigned N_SPIN = dsb_pkg::N_SPIN,
  parameter int unsigned PR     = dsb_pkg::PR,
  parameter int unsigned PC     = dsb_pkg::PC,
  parameter int unsigned PB     = dsb_pkg::PB,
  parameter int unsigned STEP_W = 32,
  parameter int unsigned NW     = N_SPIN / PC,
  parameter int unsigned G      = N_SPIN / (PB * PR),
  parameter int unsigned DEPTH  = G * NW,
  parameter int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned WA     = (NW > 1) ? $clog2(NW) : 1,
  parameter int unsigned RW     = (PR > 1) ? $clog2(PR) : 1,
  parameter int unsigned XA     = (N_SPIN / PB > 1) ? $clog2(N_SPIN / PB) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [STEP_W-1:0] n_steps,
  output logic              busy,
  output logic              done,
  output logic [STEP_W-1:0] step_cnt,
  // MM issue
  output logic              mm_en,
  output logic [AW-1:0]     mm_addr,
  output logic              mm_first,
  output logic              mm_last,
  output logic              sgn_re,
  output logic [WA-1:0]     sgn_word,
  output logic              rd_bank,    // sign bank read by the MM issue
  // TE issue
  output logic              te_issue,
  output logic [RW-1:0]     te_sel,
  output logic [XA-1:0]     xy_raddr,
  // write-back
  output logic              wb_en,
  output logic [XA-1:0]     wb_addr,
  output logic              wr_bank,    // sign bank written by the write-back
  output logic              host_bank,  // sign bank the next run reads
  // pump amplitude updater
  output logic              a_clr,
  output logic              a_en
);

  localparam int unsigned LEN      = G * NW + PR + 2;
  localparam int unsigned TE_START = NW + 1;

  // Start distance of consecutive steps (see header).
  function automatic int unsigned period_f();
    int unsigned p, wbj;
    p = G * NW;                                    // (b)
    if ((G - 1) * NW + PR > p) p = (G - 1) * NW + PR;  // (c)
    for (int unsigned j = 0; j < N_SPIN; j++) begin   // (a)
      wbj = TE_START + (j / (PB * PR)) * NW + j % PR + 1;
      if (wbj + 1 > j / PC && wbj + 1 - j / PC > p) p = wbj + 1 - j / PC;
    end
    return p;
  endfunction

  localparam int unsigned PERIOD = period_f();
  localparam int unsigned CW     = $clog2(LEN + 1);

  logic [1:0]        act;          // slot active
  logic [CW-1:0]     cyc [2];      // cycle within the slot's step
  logic              slot_new;     // slot of the most recently started step
  logic [STEP_W-1:0] steps_q, started;
  logic              base;         // bank read by the first step of the run
  logic [1:0]        step_end;
  logic              wr_bank_pre;

  assign busy      = |act;
  assign host_bank = base;
  assign a_en      = |step_end;

  // MM and TE outputs, from whichever slot is in that phase
  always_comb begin
    mm_en       = 1'b0;
    mm_addr     = '0;
    mm_first    = 1'b0;
    mm_last     = 1'b0;
    sgn_word    = '0;
    rd_bank     = base;
    te_issue    = 1'b0;
    te_sel      = '0;
    xy_raddr    = '0;
    wr_bank_pre = ~base;
    for (int s = 0; s < 2; s++) begin
      int unsigned c, t;
      c = 32'(cyc[s]);
      t = c - TE_START;
      step_end[s] = act[s] && (c == LEN - 1);
      if (act[s] && c < DEPTH) begin
        mm_en    = 1'b1;
        mm_addr  = AW'(c);
        mm_first = (c % NW) == 0;
        mm_last  = (c % NW) == NW - 1;
        sgn_word = WA'(c % NW);
        rd_bank  = base ^ s[0];
      end
      if (act[s] && c >= TE_START && t < DEPTH && (t % NW) < PR) begin
        te_issue    = 1'b1;
        te_sel      = RW'(t % NW);
        xy_raddr    = XA'((t / NW) * PR + t % NW);
        wr_bank_pre = ~(base ^ s[0]);
      end
    end
    sgn_re = mm_en;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act      <= '0;
      cyc[0]   <= '0;
      cyc[1]   <= '0;
      slot_new <= 1'b0;
      steps_q  <= '0;
      started  <= '0;
      step_cnt <= '0;
      base     <= 1'b0;
      done     <= 1'b0;
      a_clr    <= 1'b0;
      wb_en    <= 1'b0;
      wb_addr  <= '0;
      wr_bank  <= 1'b0;
    end else begin
      done    <= 1'b0;
      a_clr   <= 1'b0;
      wb_en   <= te_issue;
      wb_addr <= xy_raddr;
      wr_bank <= wr_bank_pre;
      if (!busy) begin
        if (start) begin
          steps_q  <= n_steps;
          step_cnt <= '0;
          a_clr    <= 1'b1;
          if (n_steps == '0) begin
            done <= 1'b1;
          end else begin
            act[0]   <= 1'b1;
            cyc[0]   <= '0;
            slot_new <= 1'b0;
            started  <= STEP_W'(1);
          end
        end
      end else begin
        for (int s = 0; s < 2; s++) begin
          if (act[s]) begin
            if (step_end[s]) act[s] <= 1'b0;
            else             cyc[s] <= cyc[s] + 1'b1;
          end
        end
        // launch the next step PERIOD cycles after the previous one
        if (act[slot_new] && 32'(cyc[slot_new]) == PERIOD - 1 && started != steps_q) begin
          act[~slot_new] <= 1'b1;
          cyc[~slot_new] <= '0;
          slot_new       <= ~slot_new;
          started        <= started + 1'b1;
        end
        if (|step_end) begin
          step_cnt <= step_cnt + 1'b1;
          if (step_cnt + 1'b1 == steps_q) begin
            done <= 1'b1;
            // the bank written by the last step is read by the next run
            base <= base ^ steps_q[0];
          end
        end
      end
    end
  end

  initial begin
    assert (PR <= NW) else $error("sb_ctrl: MM/TE overlap needs PR <= N_SPIN/PC");
    assert (PERIOD <= LEN) else $error("sb_ctrl: step period longer than a step");
  end

  // At most one slot issues MM and at most one issues TE in any cycle.
  property p_one_mm;
    @(posedge clk) disable iff (!rst_n)
      !(act[0] && act[1] && 32'(cyc[0]) < DEPTH && 32'(cyc[1]) < DEPTH);
  endproperty
  a_one_mm: assert property (p_one_mm);

endmodule

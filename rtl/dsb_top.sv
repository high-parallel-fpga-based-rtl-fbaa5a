// dsb_top: a discrete simulated bifurcation (dSB) Ising machine with optional
// heating, for n_spin spins processed by PB MMTE units of PR x PC parallelism.
//
// Contents (the paper's architecture): PB MMTE units (each PR J memories,
// PR MAC units and one time-evolution datapath), XMEM and YMEM holding the
// oscillator positions and momenta, the sign register files SGNXMEM1/2 with
// their read multiplexer, the linear updater of the pump amplitude a, and the
// controller. The J memories, XMEM and YMEM layouts follow the paper's memory
// organization figure. Spin i = g*PB*PR + b*PR + r belongs to MAC r of MMTE b
// in row group g; its x and y sit in lane b of XMEM/YMEM word g*PR + r.
//
// Host interface (this design's own; the paper leaves the host side out):
//   J load     j_we, j_mem = b*PR + r, j_addr = g*(n_spin/PC) + w,
//              j_data = J[g*PB*PR + b*PR + r][w*PC + c] at bits c*J_BITS.
//   x/y load   xy_we, xy_idx = spin, x_wdata, y_wdata. Also writes sgn(x)
//              into the sign bank the next run reads.
//   readout    rd_en, rd_idx; rd_x, rd_y valid one cycle later (rd_valid).
//   run        coefficients (coef, delta_a) and n_steps, then a one-cycle
//              start; busy while running, done pulses at the end.
//   ancillary  anc_en, anc_idx: the spin anc_idx is held at x = +1, y = 0
//              (sign +) by the write-back, whatever its update gives.
// Loads and readouts are only accepted while the machine is idle. The h
// vector of an Ising problem is folded into J by the host as an extra row
// and column for an ancillary spin; following the paper, that spin is fixed
// at +1 for dSB, since only its sign enters the sums.
//
// Timing: one algorithm step takes G*NW + PR + 2 clock cycles (82 for the
// defaults), and a new step starts every PERIOD cycles (70 for the
// defaults), so a run of n steps takes (n-1)*PERIOD + G*NW + PR + 2 cycles;
// see sb_ctrl.
module dsb_top
#(
  parameter int unsigned N_SPIN  = dsb_pkg::N_SPIN,
  parameter int unsigned PR      = dsb_pkg::PR,
  parameter int unsigned PC      = dsb_pkg::PC,
  parameter int unsigned PB      = dsb_pkg::PB,
  parameter int unsigned J_BITS  = dsb_pkg::J_BITS,
  parameter int unsigned STEP_W  = 32,
  parameter int unsigned NW      = N_SPIN / PC,
  parameter int unsigned G       = N_SPIN / (PB * PR),
  parameter int unsigned DEPTH   = G * NW,
  parameter int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned WA      = (NW > 1) ? $clog2(NW) : 1,
  parameter int unsigned RW      = (PR > 1) ? $clog2(PR) : 1,
  parameter int unsigned MW      = (PB * PR > 1) ? $clog2(PB * PR) : 1,
  parameter int unsigned IA      = $clog2(N_SPIN),
  parameter int unsigned XA      = (N_SPIN / PB > 1) ? $clog2(N_SPIN / PB) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // J matrix load
  input  logic                     j_we,
  input  logic [MW-1:0]            j_mem,
  input  logic [AW-1:0]            j_addr,
  input  logic [PC*J_BITS-1:0]     j_data,
  // position / momentum load
  input  logic                     xy_we,
  input  logic [IA-1:0]            xy_idx,
  input  dsb_pkg::x_t              x_wdata,
  input  dsb_pkg::y_t              y_wdata,
  // readout
  input  logic                     rd_en,
  input  logic [IA-1:0]            rd_idx,
  output logic                     rd_valid,
  output dsb_pkg::x_t              rd_x,
  output dsb_pkg::y_t              rd_y,
  // run control
  input  dsb_pkg::te_coef_t        coef,
  input  dsb_pkg::coef_t           delta_a,
  input  logic [STEP_W-1:0]        n_steps,
  input  logic                     start,
  input  logic                     anc_en,
  input  logic [IA-1:0]            anc_idx,
  output logic                     busy,
  output logic                     done,
  output logic [STEP_W-1:0]        step_cnt
);

  localparam int unsigned XB = dsb_pkg::X_BITS;
  localparam int unsigned YB = dsb_pkg::Y_BITS;

  // ---------------------------------------------------------------- control
  logic          mm_en, mm_first, mm_last, sgn_re, rd_bank, wr_bank, host_bank;
  logic [AW-1:0] mm_addr;
  logic [WA-1:0] sgn_word;
  logic          te_issue, wb_en, a_clr, a_en;
  logic [RW-1:0] te_sel;
  logic [XA-1:0] xy_raddr, wb_addr;

  sb_ctrl #(
    .N_SPIN(N_SPIN), .PR(PR), .PC(PC), .PB(PB), .STEP_W(STEP_W),
    .NW(NW), .G(G), .DEPTH(DEPTH), .AW(AW), .WA(WA), .RW(RW), .XA(XA)
  ) u_ctrl (
    .clk, .rst_n, .start, .n_steps, .busy, .done, .step_cnt,
    .mm_en, .mm_addr, .mm_first, .mm_last, .sgn_re, .sgn_word, .rd_bank,
    .te_issue, .te_sel, .xy_raddr, .wb_en, .wb_addr, .wr_bank, .host_bank,
    .a_clr, .a_en
  );

  dsb_pkg::coef_t a;

  a_updater #(.P_BITS(dsb_pkg::P_BITS)) u_a (
    .clk, .rst_n, .clr(a_clr), .en(a_en), .delta_a, .a
  );

  // ---------------------------------------------------------- host decoding
  logic          host_xy_we, host_rd;
  logic [XA-1:0] host_addr;
  logic [PB-1:0] host_lane;

  assign host_xy_we = xy_we && !busy;
  assign host_rd    = rd_en && !busy;

  always_comb begin
    int unsigned idx;
    idx       = 32'(xy_we ? xy_idx : rd_idx);
    host_addr = XA'((idx / (PB * PR)) * PR + idx % PR);
    host_lane = PB'(1) << ((idx / PR) % PB);
  end

  // -------------------------------------------------------------- XMEM/YMEM
  logic [PB-1:0]        xy_we_l;
  logic [XA-1:0]        xy_waddr, xy_rdaddr;
  logic [PB*XB-1:0] xm_wdata, xm_rdata;
  logic [PB*YB-1:0] ym_wdata, ym_rdata;
  dsb_pkg::x_t                   x_new [PB];
  dsb_pkg::y_t                   y_new [PB];
  logic [PB-1:0]        sgn_new, wall, te_out_valid, mm_rv;

  // write-back values, with the ancillary spin held at +1
  localparam dsb_pkg::x_t X_ONE = dsb_pkg::x_t'(1 <<< dsb_pkg::XY_FRAC);
  dsb_pkg::x_t          x_wb [PB];
  dsb_pkg::y_t          y_wb [PB];
  logic [PB-1:0]        sgn_wb;

  always_comb begin
    for (int b = 0; b < PB; b++) begin
      int unsigned idx;
      idx = (32'(wb_addr) / PR) * PB * PR + b * PR + 32'(wb_addr) % PR;
      if (anc_en && idx == 32'(anc_idx)) begin
        x_wb[b]   = X_ONE;
        y_wb[b]   = '0;
        sgn_wb[b] = 1'b0;
      end else begin
        x_wb[b]   = x_new[b];
        y_wb[b]   = y_new[b];
        sgn_wb[b] = sgn_new[b];
      end
    end
  end

  always_comb begin
    if (busy) begin
      xy_we_l  = wb_en ? '1 : '0;
      xy_waddr = wb_addr;
      for (int b = 0; b < PB; b++) begin
        xm_wdata[b*XB +: XB] = x_wb[b];
        ym_wdata[b*YB +: YB] = y_wb[b];
      end
    end else begin
      xy_we_l  = host_xy_we ? host_lane : '0;
      xy_waddr = host_addr;
      xm_wdata = {PB{x_wdata}};
      ym_wdata = {PB{y_wdata}};
    end
    xy_rdaddr = busy ? xy_raddr : host_addr;
  end

  xymem #(.N_SPIN(N_SPIN), .PB(PB), .W(XB), .DEPTH(N_SPIN / PB), .AW(XA)) u_xmem (
    .clk, .we(xy_we_l), .waddr(xy_waddr), .wdata(xm_wdata),
    .re(busy ? te_issue : host_rd), .raddr(xy_rdaddr), .rdata(xm_rdata)
  );

  xymem #(.N_SPIN(N_SPIN), .PB(PB), .W(YB), .DEPTH(N_SPIN / PB), .AW(XA)) u_ymem (
    .clk, .we(xy_we_l), .waddr(xy_waddr), .wdata(ym_wdata),
    .re(busy ? te_issue : host_rd), .raddr(xy_rdaddr), .rdata(ym_rdata)
  );

  // readout lane select, one cycle behind the read
  logic [PB-1:0] rd_lane_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_valid  <= 1'b0;
      rd_lane_q <= '0;
    end else begin
      rd_valid  <= host_rd;
      if (host_rd) rd_lane_q <= host_lane;
    end
  end

  always_comb begin
    rd_x = '0;
    rd_y = '0;
    for (int b = 0; b < PB; b++) begin
      if (rd_lane_q[b]) begin
        rd_x = xm_rdata[b*XB +: XB];
        rd_y = ym_rdata[b*YB +: YB];
      end
    end
  end

  // -------------------------------------------------------------- SGNXMEM1/2
  logic [PC-1:0]         sgn_rdata;
  logic                  sgn_wr_bank;
  logic [PB-1:0]         sgn_wr_en, sgn_wr_val;
  logic [PB-1:0][IA-1:0] sgn_wr_idx;

  always_comb begin
    if (busy) begin
      sgn_wr_bank = wr_bank;
      for (int b = 0; b < PB; b++) begin
        sgn_wr_en[b]  = wb_en;
        sgn_wr_idx[b] = IA'((32'(wb_addr) / PR) * PB * PR + b * PR + 32'(wb_addr) % PR);
        sgn_wr_val[b] = sgn_wb[b];
      end
    end else begin
      sgn_wr_bank = host_bank;
      sgn_wr_en   = '0;
      sgn_wr_en[0] = host_xy_we;
      for (int b = 0; b < PB; b++) begin
        sgn_wr_idx[b] = xy_idx;
        sgn_wr_val[b] = x_wdata[XB-1];
      end
    end
  end

  sgnxmem #(.N_SPIN(N_SPIN), .PC(PC), .PB(PB), .NW(NW), .WA(WA), .IA(IA)) u_sgnx (
    .clk,
    .rd_bank (rd_bank),
    .re      (sgn_re),
    .rd_word (sgn_word),
    .rd_data (sgn_rdata),
    .wr_bank (sgn_wr_bank),
    .wr_en   (sgn_wr_en),
    .wr_idx  (sgn_wr_idx),
    .wr_val  (sgn_wr_val)
  );

  // -------------------------------------------------------------------- MMTE
  for (genvar b = 0; b < PB; b++) begin : g_mmte
    mmte #(
      .N_SPIN(N_SPIN), .PR(PR), .PC(PC), .PB(PB), .J_BITS(J_BITS),
      .DEPTH(DEPTH), .AW(AW), .RW(RW)
    ) u_mmte (
      .clk, .rst_n,
      .jw_en        (j_we && !busy && (32'(j_mem) / PR == b)),
      .jw_row       (RW'(32'(j_mem) % PR)),
      .jw_addr      (j_addr),
      .jw_data      (j_data),
      .mm_en        (mm_en),
      .mm_addr      (mm_addr),
      .mm_first     (mm_first),
      .mm_last      (mm_last),
      .sgn_word     (sgn_rdata),
      .te_issue     (te_issue),
      .te_sel       (te_sel),
      .x_in         (dsb_pkg::x_t'(xm_rdata[b*XB +: XB])),
      .y_in         (dsb_pkg::y_t'(ym_rdata[b*YB +: YB])),
      .a            (a),
      .coef         (coef),
      .te_out_valid (te_out_valid[b]),
      .x_new        (x_new[b]),
      .y_new        (y_new[b]),
      .sgn_new      (sgn_new[b]),
      .wall         (wall[b]),
      .mm_res_valid (mm_rv[b])
    );
  end

  // ------------------------------------------------------------- assertions
  property p_no_load_while_busy;
    @(posedge clk) disable iff (!rst_n) busy |-> !(j_we || xy_we || rd_en);
  endproperty
  a_no_load_while_busy: assert property (p_no_load_while_busy)
    else $error("dsb_top: host access while a run is busy is ignored");

  // all MMTE units run in lock step with the controller's write-back
  property p_wb_in_lock_step;
    @(posedge clk) disable iff (!rst_n) te_out_valid == {PB{wb_en}};
  endproperty
  a_wb_in_lock_step: assert property (p_wb_in_lock_step);

  property p_mm_in_lock_step;
    @(posedge clk) disable iff (!rst_n) mm_rv == '0 || mm_rv == '1;
  endproperty
  a_mm_in_lock_step: assert property (p_mm_in_lock_step);

endmodule

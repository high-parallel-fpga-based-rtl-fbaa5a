// tb_dsb_configs: runs the whole dSB machine at 256 spins in the other
// parallelism configurations (Pr, Pc, Pb): the alternatives (64, 4, 4),
// (8, 16, 4) and (4, 64, 4) of the design-space table, and the wider
// replications (16, 16, 8) and (16, 16, 16) of the resource comparison.
// The default (16, 16, 4) is covered by tb_dsb_full.
//
// Each configuration is one dsb_cfg_check instance. It loads a random J,
// checks a heated run, a zero-step run and a reuse run bit for bit against
// the reference model, and checks the cycle count of each run. The testbench
// waits until all of them have finished, then adds up their checks and
// failures. A watchdog ends the test with a failure if one of them hangs.
module tb_dsb_configs;
  localparam int NCFG = 5;

  int          nc [NCFG];
  int          nf [NCFG];
  logic [NCFG-1:0] fin;

  dsb_cfg_check #(.N(256), .PR(64), .PC(4),  .PB(4))  u_c0 (.n_checks(nc[0]), .n_failures(nf[0]), .finished(fin[0]));
  dsb_cfg_check #(.N(256), .PR(8),  .PC(16), .PB(4))  u_c1 (.n_checks(nc[1]), .n_failures(nf[1]), .finished(fin[1]));
  dsb_cfg_check #(.N(256), .PR(4),  .PC(64), .PB(4))  u_c2 (.n_checks(nc[2]), .n_failures(nf[2]), .finished(fin[2]));
  dsb_cfg_check #(.N(256), .PR(16), .PC(16), .PB(8))  u_c3 (.n_checks(nc[3]), .n_failures(nf[3]), .finished(fin[3]));
  dsb_cfg_check #(.N(256), .PR(16), .PC(16), .PB(16)) u_c4 (.n_checks(nc[4]), .n_failures(nf[4]), .finished(fin[4]));

  task automatic report(input int extra_fail);
    int checks, failures;
    checks = 0;
    failures = extra_fail;
    for (int i = 0; i < NCFG; i++) begin
      checks += nc[i];
      failures += nf[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  initial begin
    wait (&fin);
    #20;
    report(0);
    $finish;
  end

  // watchdog, in simulation time: 10 ns clock periods
  initial begin
    #(2_000_000 * 10);
    $display("watchdog: configurations finished: %b", fin);
    report(1);
    $finish;
  end
endmodule

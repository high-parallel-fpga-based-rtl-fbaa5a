// tb_a_updater: checks the linear ramp of the pump amplitude: a reaches
// n * delta_a after n enabled steps, holds without en, restarts at 0 on clr
// and saturates at the top of the range.
module tb_a_updater;
  localparam int PB_ = 24;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic signed [PB_-1:0] delta_a = '0, a;
  int checks = 0, failures = 0;

  a_updater dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (a=%0d)", msg, a); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    chk(a == 0, "reset value");
    // a0 = 1.0, n_steps = 100: delta_a = 2^20/100
    delta_a <= 24'sd10485;
    for (int k = 1; k <= 100; k++) begin
      en <= 1; @(posedge clk); #1;
      chk(int'(a) == k * 10485, $sformatf("ramp step %0d", k));
      en <= 0; @(posedge clk); #1;
      chk(int'(a) == k * 10485, "hold without en");
    end
    clr <= 1; en <= 1; @(posedge clk); #1;
    chk(a == 0, "clear wins over en");
    clr <= 0; delta_a <= 24'sd3000000;
    for (int k = 0; k < 5; k++) @(posedge clk);
    #1;
    chk(a == 24'sh7fffff, "saturation at the top");
    delta_a <= -24'sd3000000;
    for (int k = 0; k < 8; k++) @(posedge clk);
    #1;
    chk(a == -24'sh800000, "saturation at the bottom");
    en <= 0;
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

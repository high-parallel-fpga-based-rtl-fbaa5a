// tb_jmem: fills a J memory with random words and reads them back, checking
// the one-cycle read latency and that a read with re low holds rdata.
module tb_jmem;
  localparam int PC = 16, JB = 8, DEPTH = 64, AW = 6;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [PC*JB-1:0] wdata = '0, rdata;
  logic [PC*JB-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  jmem dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = {4{$urandom()}};
      we <= 1; waddr <= AW'(a); wdata <= model[a];
      @(posedge clk);
    end
    we <= 0;
    for (int i = 0; i < 200; i++) begin
      int a;
      logic [PC*JB-1:0] prev_data;
      a = $urandom_range(DEPTH - 1);
      re <= 1; raddr <= AW'(a);
      @(posedge clk); #1;
      chk(rdata == model[a], $sformatf("read addr %0d", a));
      // overwrite while idle, data must not change until read again
      prev_data = rdata;
      re <= 0; raddr <= AW'((a + 1) % DEPTH);
      @(posedge clk); #1;
      chk(rdata == prev_data, "rdata held with re low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

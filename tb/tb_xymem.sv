// tb_xymem: writes single lanes and whole words of an XMEM/YMEM and checks
// read data, per-lane write enables and the one-cycle read latency.
module tb_xymem;
  localparam int PB = 4, W = 16, DEPTH = 64, AW = 6;
  logic clk = 0;
  logic [PB-1:0] we = '0;
  logic re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [PB*W-1:0] wdata = '0, rdata;
  logic [PB*W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  xymem dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = {$urandom(), $urandom()};
      we <= '1; waddr <= AW'(a); wdata <= model[a];
      @(posedge clk);
    end
    for (int i = 0; i < 400; i++) begin
      int a;
      logic [PB-1:0] m;
      logic [PB*W-1:0] d;
      a = $urandom_range(DEPTH - 1);
      m = PB'($urandom);
      d = {$urandom(), $urandom()};
      we <= m; waddr <= AW'(a); wdata <= d;
      for (int b = 0; b < PB; b++) if (m[b]) model[a][b*W +: W] = d[b*W +: W];
      @(posedge clk);
      we <= '0;
      a = $urandom_range(DEPTH - 1);
      re <= 1; raddr <= AW'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata != model[a]) begin
        failures++;
        $display("FAIL addr %0d got %h exp %h", a, rdata, model[a]);
      end
      re <= 0;
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

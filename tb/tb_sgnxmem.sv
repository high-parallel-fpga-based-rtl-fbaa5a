// tb_sgnxmem: writes sign bits into both banks through all write lanes and
// checks word reads from each bank, bank independence and read latency.
module tb_sgnxmem;
  localparam int N = 256, PC = 16, PB = 4, NW = N / PC, WA = 4, IA = 8;
  logic clk = 0;
  logic rd_bank = 0, re = 0, wr_bank = 0;
  logic [WA-1:0] rd_word = '0;
  logic [PC-1:0] rd_data;
  logic [PB-1:0] wr_en = '0, wr_val = '0;
  logic [PB-1:0][IA-1:0] wr_idx = '0;
  logic [N-1:0] model [2];
  int checks = 0, failures = 0;

  sgnxmem dut (.*);

  always #5 clk = ~clk;

  initial begin
    // fill both banks, PB distinct spins per cycle
    for (int bk = 0; bk < 2; bk++) begin
      for (int i = 0; i < N; i += PB) begin
        wr_bank <= bk[0];
        for (int b = 0; b < PB; b++) begin
          logic v;
          v = 1'($urandom);
          wr_en[b] <= 1; wr_idx[b] <= IA'(i + b); wr_val[b] <= v;
          model[bk][i + b] = v;
        end
        @(posedge clk);
      end
    end
    wr_en <= '0;
    for (int i = 0; i < 300; i++) begin
      // random partial writes to one bank, then read the other or the same
      int bk;
      bk = $urandom_range(1);
      wr_bank <= bk[0];
      for (int b = 0; b < PB; b++) begin
        logic v, e;
        int ix;
        v = 1'($urandom);
        ix = $urandom_range(N - 1);
        e = 1'($urandom);
        // lanes never collide on one spin in the design
        ix = (ix / PB) * PB + b;
        wr_en[b] <= e; wr_idx[b] <= IA'(ix); wr_val[b] <= v;
        if (e) model[bk][ix] = v;
      end
      @(posedge clk);
      wr_en <= '0;
      bk = $urandom_range(1);
      rd_bank <= bk[0]; re <= 1; rd_word <= WA'($urandom_range(NW - 1));
      @(posedge clk); #1;
      checks++;
      if (rd_data != model[bk][int'(rd_word) * PC +: PC]) begin
        failures++;
        $display("FAIL bank %0d word %0d got %h exp %h", bk, rd_word, rd_data,
                 model[bk][int'(rd_word) * PC +: PC]);
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

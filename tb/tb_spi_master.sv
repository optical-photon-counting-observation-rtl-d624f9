// tb_spi_master: checks SPI frames to the two DACs.
//
// A model SPI slave per chip select samples mosi on every rising sclk edge
// while its chip select is low and checks sclk is low when the chip select
// falls and rises (mode 0). For random words sent to random chip selects the
// testbench compares the word received, that only the addressed chip select
// moved, and the frame length: busy lasts (2*BITS+1)*HALF_DIV cycles after
// the start cycle. A start while busy must be ignored.
module tb_spi_master;
  localparam int BITS = 24, HD = 3;
  logic clk = 0, rst = 1;
  logic start = 0;
  logic [0:0] cs_sel = 0;
  logic [BITS-1:0] tx_word = 0;
  logic busy, sclk, mosi;
  logic [1:0] cs_n;
  int checks = 0, failures = 0;
  logic [BITS-1:0] rx_word [2];
  int rx_bits [2];
  logic sclk_d = 0;
  logic [1:0] cs_d = 2'b11;
  int frames [2];

  spi_master #(.BITS(BITS), .HALF_DIV(HD), .N_CS(2)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst) begin
      for (int s = 0; s < 2; s++) begin
        if (cs_d[s] && !cs_n[s]) begin rx_bits[s] = 0; rx_word[s] = '0; checks++; if (sclk) begin failures++; $display("sclk high at select"); end end
        if (!cs_d[s] && cs_n[s]) begin frames[s]++; checks++; if (sclk) begin failures++; $display("sclk high at deselect"); end end
        if (!cs_n[s] && sclk && !sclk_d) begin rx_word[s] = {rx_word[s][BITS-2:0], mosi}; rx_bits[s]++; end
      end
      sclk_d = sclk;
      cs_d = cs_n;
    end
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%t %s: got %0h expected %0h", $time, what, got, exp);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    frames[0] = 0; frames[1] = 0;
    repeat (3) @(negedge clk);
    check("idle cs", cs_n, 3);
    for (int i = 0; i < 20; i++) begin
      logic [BITS-1:0] w;
      int sel, n, f0, f1;
      w = BITS'($urandom);
      sel = $urandom % 2;
      f0 = frames[0]; f1 = frames[1];
      @(negedge clk) begin start = 1; cs_sel = 1'(sel); tx_word = w; end
      @(negedge clk) begin start = 0; end
      n = 0;
      while (busy) begin
        if (n == 5) begin start = 1; cs_sel = 1'(1 - sel); tx_word = ~w; end
        if (n == 6) start = 0;
        @(negedge clk);
        n++;
      end
      check("frame cycles", n, (2 * BITS + 1) * HD);
      repeat (2) @(negedge clk);
      check("word", rx_word[sel], w);
      check("bits", rx_bits[sel], BITS);
      check("addressed frame count", frames[sel], (sel ? f1 : f0) + 1);
      check("other frame count", frames[1 - sel], (sel ? f0 : f1));
      repeat ($urandom % 5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dark_scan: a dark scan through the complete logic at its default sizes.
//
// A dark scan measures the dark-count rate of every pixel against the common
// comparator threshold, in order to pick a threshold on the plateau of all
// sixteen curves. The host steps the threshold DAC from 10 to 120 (read as
// mV) and runs one scaler exposure of EXPO ticks (10 ms) at each step.
//
// The threshold DAC model decodes the code from the SPI frame the logic
// sends. The comparator model then produces dark pulses on each pixel as a
// Poisson process, with a rate that falls steeply with threshold:
//   rate(c, thr) = 2e4 / s * gain(c) * exp(-thr / 18 mV), floored at 10 / s,
// where gain(c) varies a little between pixels and pixel 9 is three times
// noisier, as in the instrument's sensor. A pixel is blind for 100 ns after
// each pulse. The rates cover the 10 to 10^4 counts/s range of a real scan.
//
// Pulses are driven only while the exposure is open, and not in its first
// and last microseconds. Every count of the map read back over RBCP must
// therefore equal the pulses driven on that pixel. The test also checks the
// DAC word of every step, and that each curve falls with threshold.
module tb_dark_scan;
  import imony_pkg::*;
  localparam int N = 16, DIV = 20;
  localparam int EXPO = 100_000;            // 100 ns ticks = 10 ms
  localparam int N_STEPS = 12;

  logic clk = 0, rst = 1;
  logic [N-1:0] hit_in = '0;
  logic spi_sclk, spi_mosi;
  logic [1:0] spi_cs_n;
  logic pps_in = 0, nmea_rx = 1;
  logic rbcp_act = 0, rbcp_we = 0, rbcp_re = 0;
  logic [31:0] rbcp_addr = 0;
  logic [7:0] rbcp_wd = 0, rbcp_rd;
  logic rbcp_ack;
  logic tcp_open = 1, tcp_tx_full = 0, tcp_tx_wr;
  logic [7:0] tcp_tx_data;

  imony_daq_top dut (.*);

  int checks = 0, failures = 0;
  int driven [N];
  int curve [N_STEPS][N];
  real thr_mv;                 // threshold as the DAC model decoded it
  logic [23:0] dac_rx, dac_word;
  logic sclk_d = 0, cs_d = 1;

  always #2.5 clk = ~clk;

  initial begin
    #1_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%t %s: got %0d expected %0d", $time, what, got, exp);
    end
  endtask

  // threshold DAC: chip select 0
  always @(posedge clk) if (!rst) begin
    if (cs_d && !spi_cs_n[0]) dac_rx = '0;
    if (!spi_cs_n[0] && spi_sclk && !sclk_d) dac_rx = {dac_rx[22:0], spi_mosi};
    if (!cs_d && spi_cs_n[0]) begin dac_word = dac_rx; thr_mv = real'(dac_rx[15:0]); end
    sclk_d = spi_sclk;
    cs_d = spi_cs_n[0];
  end

  // RBCP host
  task automatic wr(logic [31:0] a, logic [7:0] d);
    @(negedge clk) begin rbcp_act = 1; rbcp_we = 1; rbcp_addr = a; rbcp_wd = d; end
    @(negedge clk) begin rbcp_we = 0; rbcp_act = 0; end
    @(negedge clk);
  endtask
  task automatic rd(logic [31:0] a, output logic [7:0] d);
    @(negedge clk) begin rbcp_act = 1; rbcp_re = 1; rbcp_addr = a; end
    @(negedge clk) begin rbcp_re = 0; rbcp_act = 0; end
    d = rbcp_rd;
  endtask

  function automatic real rate(int c, real thr);
    real g, r;
    g = 1.0 + 0.05 * real'((c * 7) % 5 - 2);
    if (c == 9) g = g * 3.0;
    r = 2.0e4 * g * $exp(-thr / 18.0);
    return (r < 10.0) ? 10.0 : r;
  endfunction

  // dark pulses for `cycles` clock cycles from now
  task automatic dark_pulses(longint cycles);
    real rates [N];
    real total, u, x;
    longint t_end, t_next;
    longint last [N];
    total = 0;
    for (int c = 0; c < N; c++) begin rates[c] = rate(c, thr_mv); total += rates[c]; last[c] = -1000; end
    t_end = $time + 5 * cycles;
    forever begin
      int p;
      u = (real'($urandom % 1000000) + 0.5) / 1000000.0;
      t_next = $time + 5 * (1 + longint'(-$ln(u) / total * 1.0e9 / 5.0));
      if (t_next + 40 >= t_end) break;
      #(t_next - $time);
      x = total * real'($urandom % 1000000) / 1000000.0;
      p = 0;
      while (p < N - 1 && x >= rates[p]) begin x -= rates[p]; p++; end
      if ($time - last[p] >= 100) begin
        last[p] = $time;
        hit_in[p] = 1;
        #20;
        hit_in[p] = 0;
        driven[p]++;
      end
    end
    if (t_end > $time) #(t_end - $time);
  endtask

  initial begin
    logic [7:0] d;
    logic [31:0] v;
    int decreasing;
    repeat (5) @(posedge clk);
    @(negedge clk) rst = 0;
    wr(32'h00, 8'h01);                               // scaler mode
    wr(32'h0C, 8'h30);                               // DAC command byte
    for (int i = 0; i < 4; i++) wr(32'h04 + i, 8'(EXPO >> (8 * i)));
    for (int s = 0; s < N_STEPS; s++) begin
      int thr;
      thr = 10 + 10 * s;
      wr(32'h08, 8'(thr)); wr(32'h09, 8'(thr >> 8));
      wr(32'h02, 8'h02);                             // send threshold
      do rd(32'h01, d); while (d[0]);
      repeat (5) @(negedge clk);
      check("DAC word", dac_word, {8'h30, 16'(thr)});
      foreach (driven[c]) driven[c] = 0;
      wr(32'h02, 8'h01);                             // scaler start
      repeat (200) @(negedge clk);                   // 1 us margin
      dark_pulses(longint'(EXPO - 2) * DIV - 400);   // stop >1 us before the end
      do rd(32'h01, d); while (!d[2]);
      for (int c = 0; c < N; c++) begin
        for (int b = 0; b < 4; b++) begin rd(32'h40 + 4 * c + b, d); v[8*b +: 8] = d; end
        check($sformatf("thr %0d pixel %0d count", thr, c), v, driven[c]);
        curve[s][c] = v;
      end
      $display("thr %3d mV: pixel 0 %5d  pixel 9 %5d  pixel 15 %5d counts in 10 ms", thr, curve[s][0], curve[s][9], curve[s][15]);
    end
    // each curve falls from the first to the last step, and pixel 9 is the noisiest
    for (int c = 0; c < N; c++) check($sformatf("pixel %0d curve falls", c), curve[0][c] > 5 * curve[N_STEPS - 1][c] + 5, 1);
    decreasing = 1;
    for (int c = 0; c < N; c++) if (c != 9 && curve[0][c] >= curve[0][9]) decreasing = 0;
    check("pixel 9 noisiest", decreasing, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

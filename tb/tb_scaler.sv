// tb_scaler: checks the count map over a programmed exposure.
//
// The tick runs every 20 cycles as in the design. For each of several
// exposures (including 0 and 1 tick) the testbench starts the scaler, drives
// random hits, and counts per channel the hits it applied from the cycle
// after start to the cycle of the exposure's last tick. It checks the counts,
// that busy lasts exactly until that tick, that done is then set, that the
// counts hold afterwards, and that a second start clears them.
module tb_scaler;
  localparam int N = 16, DIV = 20;
  logic clk = 0, rst = 1;
  logic start = 0, tick = 0;
  logic [31:0] exposure = 0;
  logic [N-1:0] hit_pulse = '0;
  logic busy, done;
  logic [31:0] counts [N];
  int checks = 0, failures = 0;
  int ref_cnt [N];
  int cyc = 0;

  scaler #(.N_CH(N), .CNT_W(32), .EXP_W(32)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%t %s: got %0d expected %0d", $time, what, got, exp);
    end
  endtask

  // free-running tick, driven on the falling edge
  always @(negedge clk) begin
    cyc++;
    tick <= (cyc % DIV == 0);
  end

  task automatic run_exposure(int exp_ticks);
    int ticks_seen, busy_cycles;
    foreach (ref_cnt[c]) ref_cnt[c] = 0;
    @(negedge clk);
    exposure = exp_ticks;
    start = 1;
    @(negedge clk);
    #1;
    start = 0;
    ticks_seen = 0;
    busy_cycles = 0;
    // hits of this cycle count while the exposure is open
    while (1) begin
      hit_pulse = '0;
      for (int c = 0; c < N; c++) if ($urandom % (c + 3) == 0) hit_pulse[c] = 1;
      checks++;
      if (!busy) begin failures++; $display("%t busy dropped early", $time); break; end
      for (int c = 0; c < N; c++) ref_cnt[c] += hit_pulse[c];
      busy_cycles++;
      if (tick) ticks_seen++;
      if (exp_ticks == 0 || ticks_seen == exp_ticks) break;
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    hit_pulse = '0;
    check("busy after window", busy, 0);
    check("done after window", done, 1);
    for (int c = 0; c < N; c++) check($sformatf("count[%0d]", c), counts[c], ref_cnt[c]);
    // counts hold
    for (int k = 0; k < 50; k++) begin
      @(negedge clk);
      for (int c = 0; c < N; c++) hit_pulse[c] = $urandom % 2;
    end
    hit_pulse = '0;
    for (int c = 0; c < N; c++) check($sformatf("hold[%0d]", c), counts[c], ref_cnt[c]);
    // exposure x 100 ns, less the part of the first tick period before start
    if (exp_ticks > 0) begin
      check("window not shorter than (exposure-1) ticks", busy_cycles > (exp_ticks - 1) * DIV, 1);
      check("window not longer than exposure", busy_cycles <= exp_ticks * DIV, 1);
    end
    $display("exposure %0d ticks: window %0d cycles", exp_ticks, busy_cycles);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (5) @(negedge clk);
    check("idle after reset", busy, 0);
    run_exposure(50);
    run_exposure(1);
    run_exposure(0);
    run_exposure(333);
    // start clears the count map
    @(negedge clk) begin exposure = 5; start = 1; end
    @(negedge clk) start = 0;
    for (int c = 0; c < N; c++) check("cleared", counts[c], 0);
    check("busy after start", busy, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

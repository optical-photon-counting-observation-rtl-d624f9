// tb_time_counters: checks the 100 ns tick, the sub-second counter and the
// PPS counter against a cycle-by-cycle reference written from the spec:
// tick once every CLK_DIV cycles, sub-second +1 per tick and 0 on PPS, PPS
// counter +1 per PPS and 0 on measurement start. It also measures the tick
// period directly and counts how often each event (PPS, start, PPS with tick)
// was exercised.
module tb_time_counters;
  localparam int DIV = 20;
  logic clk = 0, rst = 1;
  logic pps_pulse = 0, meas_start = 0;
  logic tick;
  logic [23:0] subsec, pps_count;
  int checks = 0, failures = 0;
  int ref_div, ref_tick_cnt, last_tick, cyc;
  logic ref_tick;
  logic [23:0] ref_sub, ref_pps;
  int n_pps = 0, n_start = 0, n_pps_tick = 0;

  time_counters #(.CLK_DIV(DIV), .SUBSEC_W(24), .PPS_W(24)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("cycle %0d %s: got %0d expected %0d", cyc, what, got, exp);
    end
  endtask

  // Reference model, evaluated at each rising edge before the DUT's outputs
  // are compared on the following falling edge.
  always @(posedge clk) begin
    if (rst) begin
      ref_div = 0; ref_tick = 0; ref_sub = 0; ref_pps = 0; cyc = 0; last_tick = -1;
    end else begin
      cyc++;
      if (pps_pulse) ref_sub = 0;
      else if (ref_tick) ref_sub = ref_sub + 1;
      if (meas_start) ref_pps = 0;
      else if (pps_pulse) ref_pps = ref_pps + 1;
      if (pps_pulse && ref_tick) n_pps_tick++;
      ref_tick = (ref_div == DIV - 1);
      ref_div = (ref_div == DIV - 1) ? 0 : ref_div + 1;
    end
  end

  always @(negedge clk) begin
    if (!rst) begin
      check("tick", tick, ref_tick);
      check("subsec", subsec, ref_sub);
      check("pps_count", pps_count, ref_pps);
      if (tick) begin
        if (last_tick >= 0) check("tick period", cyc - last_tick, DIV);
        last_tick = cyc;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int k = 0; k < 30000; k++) begin
      @(negedge clk);
      pps_pulse  = ($urandom % 1500 == 0) || (tick && $urandom % 100 == 0);
      meas_start = ($urandom % 4000 == 0) || (k == 25000);
      if (pps_pulse) n_pps++;
      if (meas_start) n_start++;
    end
    @(negedge clk) begin pps_pulse = 0; meas_start = 0; end
    repeat (3) @(negedge clk);
    check("PPS exercised", n_pps > 3, 1);
    check("start exercised", n_start > 0, 1);
    check("PPS together with tick exercised", n_pps_tick > 0, 1);
    $display("pps=%0d start=%0d pps_with_tick=%0d", n_pps, n_start, n_pps_tick);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_event_builder: checks the grouping of hits into 100 ns bins.
//
// The testbench drives the tick every 20 cycles, its own sub-second and PPS
// counts, and sparse random hit pulses. The reference ORs hits into a bin
// pattern (the tick cycle included) and, at each tick with a non-empty
// pattern and enable set, expects on the next cycle exactly one event
// {pattern, pps, subsec} with the time values of the tick cycle. Bins with
// several pixels, empty bins and disabled periods are each counted and must
// all occur.
module tb_event_builder;
  localparam int N = 16;
  logic clk = 0, rst = 1;
  logic enable = 0, tick = 0;
  logic [N-1:0] hit_pulse = '0;
  logic [23:0] subsec = 0, pps_count = 0;
  logic ev_valid;
  logic [63:0] ev_data;
  int checks = 0, failures = 0;
  logic [N-1:0] ref_pat;
  logic ref_valid;
  logic [63:0] ref_data;
  int n_events = 0, n_multi = 0, n_empty_bins = 0, n_disabled = 0;

  event_builder #(.N_CH(N), .SUBSEC_W(24), .PPS_W(24)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst) begin
      ref_pat = '0; ref_valid = 0; ref_data = '0;
    end else begin
      logic [N-1:0] now;
      now = ref_pat | hit_pulse;
      ref_valid = 0;
      if (!enable) begin
        ref_pat = '0;
        if (tick) n_disabled++;
      end else if (tick) begin
        ref_pat = '0;
        if (now != 0) begin
          ref_valid = 1;
          ref_data = {now, pps_count, subsec};
          n_events++;
          if (!$onehot(now)) n_multi++;
        end else n_empty_bins++;
      end else ref_pat = now;
    end
  end

  always @(negedge clk) begin
    if (!rst) begin
      checks++;
      if (ev_valid !== ref_valid || (ref_valid && ev_data !== ref_data)) begin
        failures++;
        if (failures < 10) $display("%t: valid %b data %h expected %b %h", $time, ev_valid, ev_data, ref_valid, ref_data);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int k = 0; k < 40000; k++) begin
      @(negedge clk);
      tick = (k % 20 == 19);
      if (k % 20 == 0) subsec = subsec + 1;
      if (k % 5000 == 4999) begin pps_count++; subsec = 0; end
      enable = !(k >= 15000 && k < 17000);
      hit_pulse = '0;
      for (int c = 0; c < N; c++) if ($urandom % 90 == 0) hit_pulse[c] = 1;
    end
    @(negedge clk) begin hit_pulse = '0; tick = 0; end
    repeat (3) @(negedge clk);
    checks += 4;
    if (n_events < 100)  begin failures++; $display("too few events"); end
    if (n_multi == 0)    begin failures++; $display("no multi-pixel bin"); end
    if (n_empty_bins == 0) begin failures++; $display("no empty bin"); end
    if (n_disabled == 0) begin failures++; $display("never disabled"); end
    $display("events=%0d multi=%0d empty=%0d disabled_ticks=%0d", n_events, n_multi, n_empty_bins, n_disabled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

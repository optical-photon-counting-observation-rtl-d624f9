// tb_hit_detector: checks the synchroniser and rising-edge detector.
//
// Random 16-bit patterns are applied on the falling clock edge. The expected
// output after rising edge k is in[k-2] & ~in[k-3], where in[k] is the input
// seen at edge k: two synchroniser stages plus the edge register. The test
// also checks that the number of pulses per channel equals the number of
// rising edges applied.
module tb_hit_detector;
  localparam int N = 16;
  logic clk = 0, rst = 1;
  logic [N-1:0] hit_in = '0, hit_pulse;
  int checks = 0, failures = 0;
  logic [N-1:0] h [4];
  int edges [N], pulses [N];
  int cyc = 0;

  hit_detector #(.N_CH(N)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (h[i]) h[i] = '0;
    foreach (edges[i]) begin edges[i] = 0; pulses[i] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      // sparse random hits, held for 1..3 cycles
      if (k > 10 && k < 3900) hit_in = hit_in ^ ($urandom % 4 == 0 ? N'($urandom) : '0);
      else          hit_in = '0;
    end
    repeat (5) @(posedge clk);
    #1;
    for (int c = 0; c < N; c++) begin
      checks++;
      if (edges[c] != pulses[c]) begin
        failures++;
        $display("ch %0d: %0d edges in, %0d pulses out", c, edges[c], pulses[c]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst) begin
      h[3] <= h[2]; h[2] <= h[1]; h[1] <= h[0]; h[0] <= hit_in;
      for (int c = 0; c < N; c++) if (hit_in[c] && !h[0][c]) edges[c]++;
      cyc++;
    end
  end

  // h[] updated by nonblocking assigns: after edge k, h[0]=in[k], h[1]=in[k-1]...
  always @(negedge clk) begin
    if (!rst && cyc > 4) begin
      checks++;
      if (hit_pulse !== (h[2] & ~h[3])) begin
        failures++;
        if (failures < 10) $display("cycle %0d: pulse %h expected %h", cyc, hit_pulse, h[2] & ~h[3]);
      end
      for (int c = 0; c < N; c++) if (hit_pulse[c]) pulses[c]++;
    end
  end
endmodule

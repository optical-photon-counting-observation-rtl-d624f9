// tb_uart_rx: checks the NMEA serial receiver.
//
// The receiver is run at 10 clock cycles per bit (CLK_HZ 1 MHz, 100 kbaud)
// to keep the simulation short. The testbench sends 200 random bytes as 8N1
// frames, with random idle gaps, and checks each received byte and the
// byte count. It then sends a
// frame with a low stop bit (framing error expected, no byte) and a short
// low glitch (nothing expected).
module tb_uart_rx;
  localparam int CLK_HZ = 1_000_000, BAUD = 100_000, BIT = CLK_HZ / BAUD;
  logic clk = 0, rst = 1;
  logic rx = 1;
  logic rx_valid, frame_err;
  logic [7:0] rx_data;
  int checks = 0, failures = 0;
  logic [7:0] expq [$];
  int n_valid = 0, n_ferr = 0;

  uart_rx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rx_valid && !rst) begin
      n_valid++;
      checks++;
      if (expq.size() == 0 || rx_data !== expq[0]) begin
        failures++;
        $display("%t got %h expected %h", $time, rx_data, expq.size() ? expq[0] : 8'h00);
      end
      if (expq.size()) void'(expq.pop_front());
    end
    if (frame_err && !rst) n_ferr++;
  end

  // one bit lasts `cyc` clock cycles of 5 ns
  task automatic send(logic [7:0] b, int cyc, logic stop);
    rx = 0;
    repeat (cyc) @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      rx = b[i];
      repeat (cyc) @(negedge clk);
    end
    rx = stop;
    repeat (cyc) @(negedge clk);
    rx = 1;
  endtask

  initial begin
    int nv;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (20) @(negedge clk);
    for (int i = 0; i < 200; i++) begin
      logic [7:0] b;
      b = 8'($urandom);
      expq.push_back(b);
      send(b, BIT, 1);
      repeat ($urandom % 15) @(negedge clk);
    end
    repeat (3 * BIT) @(negedge clk);
    checks++;
    if (n_valid != 200 || expq.size() != 0) begin failures++; $display("received %0d of 200", n_valid); end
    // framing error
    nv = n_valid;
    send(8'h5A, BIT, 0);
    repeat (3 * BIT) @(negedge clk);
    checks += 2;
    if (n_ferr != 1) begin failures++; $display("framing errors %0d, expected 1", n_ferr); end
    if (n_valid != nv) begin failures++; $display("byte accepted with bad stop bit"); end
    // glitch shorter than half a bit
    repeat (12 * BIT) @(negedge clk);
    rx = 0; repeat (BIT / 4) @(negedge clk); rx = 1;
    repeat (12 * BIT) @(negedge clk);
    checks++;
    if (n_valid != nv || n_ferr != 1) begin failures++; $display("glitch taken as a frame"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

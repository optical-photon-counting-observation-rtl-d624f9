// tb_nmea_capture: checks sentence capture and the double buffer.
//
// Bytes are fed directly as receiver strobes. The testbench sends noise, a
// full RMC-style sentence, checks length, counter and every byte through the
// read port, then checks that the readable copy does not change while the
// next sentence is half received, that a '$' in mid-sentence restarts it and
// that an over-long sentence is cut at the buffer size (16 bytes here).
module tb_nmea_capture;
  localparam int BUF = 16;
  logic clk = 0, rst = 1;
  logic rx_valid = 0;
  logic [7:0] rx_data = 0;
  logic [3:0] rd_addr = 0;
  logic [7:0] rd_data;
  logic [4:0] length;
  logic [7:0] seq;
  int checks = 0, failures = 0;

  nmea_capture #(.BUF_BYTES(BUF)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%t %s: got %0d expected %0d", $time, what, got, exp);
    end
  endtask

  task automatic put(byte b);
    @(negedge clk) begin rx_valid = 1; rx_data = b; end
    @(negedge clk) rx_valid = 0;
    repeat ($urandom % 4) @(negedge clk);
  endtask

  task automatic put_str(string s);
    for (int i = 0; i < s.len(); i++) put(s[i]);
  endtask

  task automatic expect_sentence(string s, int n_seq);
    int n;
    n = (s.len() > BUF) ? BUF : s.len();
    @(negedge clk);
    check("length", length, n);
    check("seq", seq, n_seq);
    for (int i = 0; i < n; i++) begin
      rd_addr = 4'(i);
      #1;
      check($sformatf("byte %0d", i), rd_data, s[i]);
    end
  endtask

  initial begin
    string s1, s2, s3;
    s1 = "$GPZDA,1401,07*6\n";   // 17 bytes: cut to 16
    s2 = "$GPGGA,140\r\n";       // 12 bytes
    s3 = "$GPRMC,1\r\n";
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    @(negedge clk);
    check("seq after reset", seq, 0);
    put_str("xx\r\n");            // noise outside a sentence
    @(negedge clk);
    check("noise ignored", seq, 0);
    put_str(s2);
    expect_sentence(s2, 1);
    // half of the next sentence must not disturb the readable one
    put_str("$GPGSV,3,");
    expect_sentence(s2, 1);
    // a '$' restarts the sentence
    put_str(s3);
    expect_sentence(s3, 2);
    // too long: first BUF bytes kept, line feed still ends it
    put_str(s1);
    expect_sentence(s1.substr(0, BUF - 1), 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

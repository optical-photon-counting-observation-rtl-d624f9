// tb_tcp_tx_serializer: checks that event words reach the TCP byte stream
// complete, in order and most significant byte first.
//
// A queue in the testbench acts as the first-word-fall-through FIFO. The TCP
// side asserts tcp_tx_full at random and closes the connection for a while;
// no byte may be written while full, no word may be taken while closed, and
// the bytes collected must equal the words pushed, byte for byte. The
// throughput with the TCP side always ready is checked too: 8 bytes per word
// plus one cycle to take the word.
module tb_tcp_tx_serializer;
  logic clk = 0, rst = 1;
  logic fifo_empty, fifo_rd;
  logic [63:0] fifo_data;
  logic tcp_open = 1, tcp_tx_full = 0;
  logic tcp_tx_wr;
  logic [7:0] tcp_tx_data;
  int checks = 0, failures = 0;
  logic [63:0] q [$];
  logic [7:0] exp_bytes [$];
  int n_bytes = 0, n_stall = 0, n_closed_pending = 0;
  logic full_d = 0;

  tcp_tx_serializer #(.WIDTH(64)) dut (.*);

  initial begin fifo_empty = 1; fifo_data = '0; end

  always #2.5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst) begin
      if (fifo_rd) begin
        checks++;
        if (!tcp_open || fifo_empty) begin failures++; $display("took a word while closed or empty"); end
        void'(q.pop_front());
        fifo_empty <= (q.size() == 0);
        fifo_data  <= (q.size() == 0) ? '0 : q[0];
      end
      if (tcp_tx_wr) begin
        checks++;
        // SiTCP's full is sampled by the sender one cycle earlier
        if (full_d) begin failures++; $display("%t byte written while full", $time); end
        checks++;
        if (exp_bytes.size() == 0 || tcp_tx_data !== exp_bytes[0]) begin
          failures++;
          if (failures < 10) $display("%t byte %h expected %h", $time, tcp_tx_data, exp_bytes.size() ? exp_bytes[0] : 8'hxx);
        end
        if (exp_bytes.size()) void'(exp_bytes.pop_front());
        n_bytes++;
      end
      if (tcp_tx_full) n_stall++;
      if (!tcp_open && !fifo_empty) n_closed_pending++;
      full_d <= tcp_tx_full;
    end
  end

  task automatic push(logic [63:0] w);
    q.push_back(w);
    fifo_empty = 0;
    fifo_data  = q[0];
    for (int b = 7; b >= 0; b--) exp_bytes.push_back(w[8*b +: 8]);
  endtask

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // throughput: 10 words with SiTCP always ready
    for (int i = 0; i < 10; i++) push({$urandom, $urandom});
    t0 = 0;
    while (exp_bytes.size() != 0 && t0 < 1000) begin @(negedge clk); t0++; end
    checks++;
    if (t0 > 10 * 9 + 2) begin failures++; $display("throughput: %0d cycles for 10 words", t0); end
    // random back-pressure and closed periods
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      tcp_tx_full = ($urandom % 3 == 0);
      tcp_open = !((k / 1000) % 5 == 2);
      if ($urandom % 12 == 0) push({$urandom, $urandom});
    end
    tcp_open = 1; tcp_tx_full = 0;
    repeat (20000) @(negedge clk);
    checks += 3;
    if (exp_bytes.size() != 0) begin failures++; $display("%0d bytes never sent", exp_bytes.size()); end
    if (n_stall == 0) begin failures++; $display("no stall"); end
    if (n_closed_pending == 0) begin failures++; $display("never closed with data"); end
    $display("bytes=%0d stalls=%0d closed_pending=%0d", n_bytes, n_stall, n_closed_pending);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

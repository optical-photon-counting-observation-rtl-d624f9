// tb_event_fifo: checks the event FIFO against a queue model.
//
// A small FIFO (DEPTH 8) is driven with random writes and reads, with phases
// that favour filling and phases that favour draining, so that the full and
// empty corners and simultaneous read and write are all reached. Each cycle
// the testbench compares empty, full, level, the show-ahead data and the drop
// counter with the model.
module tb_event_fifo;
  localparam int W = 64, D = 8;
  logic clk = 0, rst = 1;
  logic wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic full, empty;
  logic [$clog2(D):0] level;
  logic [31:0] drop_count;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];
  int ref_drops = 0, n_full = 0, n_empty = 0, n_both = 0;

  event_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #2.5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%t %s: got %h expected %h", $time, what, got, exp);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int k = 0; k < 20000; k++) begin
      int bias;
      @(negedge clk);
      // check state left by the previous edge
      check("empty", empty, q.size() == 0);
      check("full", full, q.size() == D);
      check("level", level, q.size());
      check("drops", drop_count, ref_drops);
      if (q.size() > 0) check("data", rd_data, q[0]);
      if (q.size() == D) n_full++;
      if (q.size() == 0) n_empty++;
      bias = ((k / 500) % 2) ? 3 : 1;
      wr_en = ($urandom % 4) < bias + 0 ? 1 : 0;
      wr_data = {$urandom, $urandom};
      rd_en = (q.size() > 0) && !empty && (($urandom % 4) < 4 - bias);
      @(posedge clk);
      if (wr_en && rd_en) n_both++;
      if (rd_en) void'(q.pop_front());
      if (wr_en) begin
        if (q.size() < D) q.push_back(wr_data);
        else ref_drops++;
      end
    end
    checks += 3;
    if (n_full == 0) begin failures++; $display("never full"); end
    if (n_empty == 0) begin failures++; $display("never empty"); end
    if (n_both == 0) begin failures++; $display("never read+write"); end
    $display("full=%0d empty=%0d rw=%0d drops=%0d", n_full, n_empty, n_both, ref_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

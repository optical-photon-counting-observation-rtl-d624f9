// tb_imony_daq_top: end-to-end test of the acquisition at its default sizes
// (16 pixels, 200 MHz clock, 100 ns time stamp, 9600 baud NMEA, 1024-event
// FIFO).
//
// The testbench stands in for everything around the FPGA logic: the GNSS
// receiver (PPS pulses and an NMEA sentence on the serial line), the two DACs
// (SPI slaves that record the words they receive), the comparators (hit
// lines) and SiTCP (RBCP register accesses, and a TCP sink that decodes the
// event stream and can signal full or a closed connection). It runs the
// sequence an observer would:
//   1. capture an NMEA sentence and read it back over RBCP;
//   2. set the threshold and HV DACs over SPI;
//   3. a two-point dark scan in scaler mode: a threshold, an exposure, the
//      count map compared with the hits applied, then the same at another
//      threshold with another hit pattern;
//   4. a light-curve run: start (PPS counter cleared), PPS pulses, groups
//      of simultaneous pixel hits; every event decoded from the TCP stream is
//      compared for hit pattern, PPS count and sub-second count (within the
//      one-bin uncertainty of the tick phase), while SiTCP stalls at random;
//   5. an overflow: with the TCP connection closed, more events than the FIFO
//      holds; the drop counter must read exactly the excess, and after the
//      connection opens the events kept must arrive in order;
//   6. stop: hits after run is cleared make no events.
// Each mechanism is counted and must have happened at least once.
module tb_imony_daq_top;
  import imony_pkg::*;
  localparam int N = 16, DIV = 20, BIT_CYC = 200_000_000 / 9600, DEPTH = 1024;

  logic clk = 0, rst = 1;
  logic [N-1:0] hit_in = '0;
  logic spi_sclk, spi_mosi;
  logic [1:0] spi_cs_n;
  logic pps_in = 0, nmea_rx = 1;
  logic rbcp_act = 0, rbcp_we = 0, rbcp_re = 0;
  logic [31:0] rbcp_addr = 0;
  logic [7:0] rbcp_wd = 0, rbcp_rd;
  logic rbcp_ack;
  logic tcp_open = 0, tcp_tx_full = 0, tcp_tx_wr;
  logic [7:0] tcp_tx_data;

  imony_daq_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  // mechanism counters
  int m_nmea = 0, m_spi_thr = 0, m_spi_hv = 0, m_scaler = 0, m_mode_switch = 0;
  int m_events = 0, m_multi = 0, m_pps_reset = 0, m_stall = 0, m_drop = 0;
  int m_meas_start = 0, m_stopped = 0;

  always #2.5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #400_000_000;   // 80 M cycles
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("%t %s: got %0h expected %0h", $time, what, got, exp);
    end
  endtask

  // ---------------- SiTCP RBCP ----------------
  task automatic wr(logic [31:0] a, logic [7:0] d);
    @(negedge clk) begin rbcp_act = 1; rbcp_we = 1; rbcp_addr = a; rbcp_wd = d; end
    @(negedge clk) begin rbcp_we = 0; rbcp_act = 0; end
    check("rbcp write ack", rbcp_ack, 1);
    @(negedge clk);
  endtask

  task automatic rd(logic [31:0] a, output logic [7:0] d);
    @(negedge clk) begin rbcp_act = 1; rbcp_re = 1; rbcp_addr = a; end
    @(negedge clk) begin rbcp_re = 0; rbcp_act = 0; end
    check("rbcp read ack", rbcp_ack, 1);
    d = rbcp_rd;
  endtask

  task automatic rd32(logic [31:0] a, output logic [31:0] v);
    logic [7:0] d;
    for (int i = 0; i < 4; i++) begin rd(a + i, d); v[8*i +: 8] = d; end
  endtask

  task automatic wr16(logic [31:0] a, logic [15:0] v);
    wr(a, v[7:0]); wr(a + 1, v[15:8]);
  endtask

  task automatic wr32(logic [31:0] a, logic [31:0] v);
    for (int i = 0; i < 4; i++) wr(a + i, v[8*i +: 8]);
  endtask

  // ---------------- SiTCP TCP sink ----------------
  logic [7:0] tcp_bytes [$];
  logic [63:0] ev_q [$];
  always @(posedge clk) begin
    if (!rst && tcp_tx_wr) begin
      tcp_bytes.push_back(tcp_tx_data);
      if (tcp_bytes.size() == 8) begin
        logic [63:0] w;
        for (int i = 0; i < 8; i++) w = {w[55:0], tcp_bytes[i]};
        tcp_bytes.delete();
        ev_q.push_back(w);
      end
    end
    if (!rst && tcp_tx_full && !dut.fifo_empty) m_stall++;
  end

  // ---------------- DAC SPI slaves ----------------
  logic [23:0] spi_rx [2];
  logic [23:0] spi_last [2];
  int spi_frames [2];
  logic sclk_d = 0;
  logic [1:0] cs_d = 2'b11;
  always @(posedge clk) if (!rst) begin
    for (int s = 0; s < 2; s++) begin
      if (cs_d[s] && !spi_cs_n[s]) spi_rx[s] = '0;
      if (!spi_cs_n[s] && spi_sclk && !sclk_d) spi_rx[s] = {spi_rx[s][22:0], spi_mosi};
      if (!cs_d[s] && spi_cs_n[s]) begin spi_last[s] = spi_rx[s]; spi_frames[s]++; end
    end
    sclk_d = spi_sclk;
    cs_d = spi_cs_n;
  end

  // ---------------- GNSS ----------------
  task automatic uart_byte(byte b);
    nmea_rx = 0;
    repeat (BIT_CYC) @(negedge clk);
    for (int i = 0; i < 8; i++) begin nmea_rx = b[i]; repeat (BIT_CYC) @(negedge clk); end
    nmea_rx = 1;
    repeat (BIT_CYC) @(negedge clk);
  endtask

  longint t_pps;
  task automatic pps();
    @(negedge clk) pps_in = 1;
    t_pps = cyc;
    repeat (20) @(negedge clk);
    pps_in = 0;
  endtask

  // ---------------- comparators ----------------
  task automatic hit(logic [N-1:0] mask);
    @(negedge clk) hit_in = mask;
    repeat (4) @(negedge clk);
    hit_in = '0;
  endtask

  // ---------------- test sequence ----------------
  typedef struct { logic [N-1:0] mask; int pps; longint dt; } exp_ev_t;
  exp_ev_t expq [$];

  task automatic wait_spi_idle();
    logic [7:0] d;
    do rd(32'h01, d); while (d[0]);
  endtask

  task automatic scaler_run(int exposure, bit reverse);
    logic [7:0] d;
    logic [31:0] v;
    wr32(32'h04, exposure);
    wr(32'h02, 8'h01);
    m_scaler++;
    repeat (100) @(negedge clk);
    // channel c gets c+1 pulses (or 16-c), 40 cycles apart
    for (int k = 0; k < N; k++) begin
      logic [N-1:0] m;
      for (int c = 0; c < N; c++) m[c] = reverse ? (k < N - c) : (c >= k);
      hit(m);
      repeat (35) @(negedge clk);
    end
    do rd(32'h01, d); while (!d[2]);
    for (int c = 0; c < N; c++) begin
      rd32(32'h40 + 4 * c, v);
      check($sformatf("count map ch %0d", c), v, reverse ? N - c : c + 1);
    end
  endtask

  task automatic drain(int n_expected, int max_cycles);
    int t;
    t = 0;
    while (ev_q.size() < n_expected && t < max_cycles) begin @(negedge clk); t++; end
  endtask

  task automatic compare_events(string tag);
    check({tag, ": event count"}, ev_q.size(), expq.size());
    while (ev_q.size() && expq.size()) begin
      event_t e;
      exp_ev_t x;
      longint s0;
      e = event_t'(ev_q.pop_front());
      x = expq.pop_front();
      s0 = x.dt / DIV;
      m_events++;
      if (!$onehot(e.hits)) m_multi++;
      check({tag, ": hit pattern"}, e.hits, x.mask);
      check({tag, ": pps count"}, e.pps_count, x.pps);
      checks++;
      if (!(e.subsec == s0 || e.subsec == s0 + 1)) begin
        failures++;
        $display("%s: subsec %0d, expected %0d or %0d", tag, e.subsec, s0, s0 + 1);
      end
    end
    ev_q.delete();
    expq.delete();
  endtask

  initial begin
    logic [7:0] d;
    logic [31:0] v;
    string s;
    spi_frames[0] = 0; spi_frames[1] = 0;
    repeat (5) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (10) @(negedge clk);

    // 1. NMEA
    s = "$GPZDA,140000.00,07,12,2021*6F\r\n";
    for (int i = 0; i < s.len(); i++) uart_byte(s[i]);
    repeat (10) @(negedge clk);
    rd(32'h20, d); check("NMEA length", d, s.len());
    rd(32'h21, d); check("NMEA count", d, 1);
    for (int i = 0; i < s.len(); i++) begin rd(32'h80 + i, d); check("NMEA byte", d, s[i]); end
    if (d == 8'h0A) m_nmea++;

    // 2. DACs
    wr16(32'h08, 16'h0123); wr(32'h0C, 8'h30);
    wr16(32'h0A, 16'h0BCD); wr(32'h0D, 8'h31);
    wr(32'h02, 8'h02); wait_spi_idle();
    wr(32'h02, 8'h04); wait_spi_idle();
    repeat (5) @(negedge clk);
    check("threshold DAC word", spi_last[0], 24'h300123);
    check("HV DAC word", spi_last[1], 24'h310BCD);
    m_spi_thr = spi_frames[0]; m_spi_hv = spi_frames[1];
    check("one frame per DAC", spi_frames[0] * 2 + spi_frames[1], 3);

    // 3. dark scan, two thresholds, scaler mode
    wr(32'h00, 8'h01); m_mode_switch++;
    scaler_run(200, 0);
    wr16(32'h08, 16'h0140); wr(32'h02, 8'h02); wait_spi_idle();
    scaler_run(300, 1);
    check("second threshold", spi_last[0], 24'h300140);

    // 4. light-curve run
    wr(32'h00, 8'h00); m_mode_switch++;
    tcp_open = 1;
    pps();                       // before the start: must not count
    repeat (200) @(negedge clk);
    wr(32'h00, 8'h02);           // run
    repeat (5) @(negedge clk);
    rd32(32'h10, v); check("PPS counter cleared by start", v, 0);
    if (v == 0) m_meas_start++;
    fork
      begin
        for (int k = 0; k < 3000; k++) begin
          @(negedge clk) tcp_tx_full = ($urandom % 3 == 0);
        end
        tcp_tx_full = 0;
      end
      begin
        for (int p = 1; p <= 2; p++) begin
          pps();
          m_pps_reset++;
          repeat (60) @(negedge clk);
          for (int g = 0; g < 12; g++) begin
            exp_ev_t x;
            x.mask = N'($urandom) | N'(1 << g);
            if (g % 3 == 0) x.mask = N'(1 << ($urandom % N));
            x.pps = p;
            x.dt = cyc - t_pps + 1;
            expq.push_back(x);
            hit(x.mask);
            repeat (60 + $urandom % 40) @(negedge clk);
          end
        end
      end
    join
    drain(expq.size(), 20000);
    compare_events("light curve");

    // 5. overflow with the connection closed
    tcp_open = 0;
    pps();
    repeat (40) @(negedge clk);
    for (int g = 0; g < DEPTH + 40; g++) begin
      exp_ev_t x;
      x.mask = N'(g + 1);
      x.pps = 3;
      x.dt = cyc - t_pps + 1;
      if (g < DEPTH) expq.push_back(x);
      hit(x.mask);
      repeat (35) @(negedge clk);
    end
    repeat (50) @(negedge clk);
    rd32(32'h18, v); check("events dropped", v, 40);
    if (v != 0) m_drop++;
    tcp_open = 1;
    drain(DEPTH, 200000);
    compare_events("after overflow");

    // 6. stop
    wr(32'h00, 8'h00);
    for (int g = 0; g < 10; g++) begin hit(16'hFFFF); repeat (30) @(negedge clk); end
    repeat (200) @(negedge clk);
    check("no events after stop", ev_q.size(), 0);
    if (ev_q.size() == 0) m_stopped++;

    $display("mechanisms: nmea=%0d spi_thr=%0d spi_hv=%0d scaler=%0d mode_switch=%0d events=%0d multi_pixel=%0d pps_reset=%0d tcp_stall=%0d overflow=%0d meas_start=%0d stop=%0d",
             m_nmea, m_spi_thr, m_spi_hv, m_scaler, m_mode_switch, m_events, m_multi, m_pps_reset, m_stall, m_drop, m_meas_start, m_stopped);
    check("nmea happened", m_nmea > 0, 1);
    check("threshold DAC write happened", m_spi_thr > 0, 1);
    check("HV DAC write happened", m_spi_hv > 0, 1);
    check("scaler exposure happened", m_scaler > 0, 1);
    check("mode switch happened", m_mode_switch > 0, 1);
    check("events happened", m_events > 0, 1);
    check("multi-pixel bin happened", m_multi > 0, 1);
    check("PPS reset happened", m_pps_reset > 0, 1);
    check("TCP stall happened", m_stall > 0, 1);
    check("FIFO overflow happened", m_drop > 0, 1);
    check("measurement start happened", m_meas_start > 0, 1);
    check("stop happened", m_stopped > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

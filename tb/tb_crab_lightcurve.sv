// tb_crab_lightcurve: a light-curve observation of a pulsar through the
// complete acquisition logic at its default sizes, in real time.
//
// The testbench simulates SIM_S seconds of observing with GNSS PPS pulses
// exactly 1 s apart. Photons arrive as a Poisson background spread over all
// 16 pixels (sky plus dark counts, BKG_RATE per second) and a pulsed
// component on the four central pixels: PULSE_PER_TURN photons per rotation,
// uniform in pulsar phase 0.99-1.01, at the Crab's rotation frequency of
// 29.5893 Hz. Each photon is a 20 ns pulse on its pixel's comparator line.
// A photon within 100 ns of the previous one on the same pixel is not
// driven: the pixel is still recovering from its discharge.
// Sizes are those of a Crab run: a pulsed rate near 1 kcounts/s and a total
// rate that keeps the stream below 2 Mbit/s.
//
// The host side decodes the TCP stream, rebuilds each event's time from
// (pps_count, subsec) and checks:
//   * every pixel bit of every event matches a photon driven on that pixel
//     in the same 100 ns bin (or the one before, the tick phase being
//     unknown to the host), and the number of pixel bits equals the number of
//     photons driven;
//   * the sub-second counter runs up to 10^7 ticks in a second, i.e. the
//     10 MHz count really is 10 MHz;
//   * the folded light curve shows the pulse: the counts in the on-pulse
//     phase window exceed the level of the off-pulse window (phase
//     0.7729-0.8446) by more than 5 sigma;
//   * the data rate stays below 2 Mbit/s.
module tb_crab_lightcurve;
  import imony_pkg::*;
  localparam int N = 16;
  localparam real F_PSR = 29.5892979477;       // Hz
  localparam real SIM_S = 1.05;                // seconds after the first PPS
  localparam real BKG_RATE = 15000.0;          // counts/s, all pixels
  localparam int  PULSE_PER_TURN = 30;
  localparam longint PPS0 = 20_000;            // ns, first PPS

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
  longint n_photons = 0, n_bits = 0, n_matched = 0, n_events = 0, n_bytes = 0;
  longint max_subsec = 0;
  int gen [longint];             // key: pixel, second, 100 ns bin
  int fold [100];

  always #2.5 clk = ~clk;

  initial begin
    #1_500_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint key(int pix, longint sec, longint bin);
    return (longint'(pix) << 48) | (sec << 32) | bin;
  endfunction

  // ---------------- host: TCP sink, event decoder, folding ----------------
  logic [63:0] acc;
  int nb = 0;
  always @(posedge clk) begin
    if (!rst && tcp_tx_wr) begin
      acc = {acc[55:0], tcp_tx_data};
      nb++;
      n_bytes++;
      if (nb == 8) begin
        event_t e;
        real t, ph;
        nb = 0;
        e = event_t'(acc);
        n_events++;
        if (e.pps_count >= 1 && longint'(e.subsec) > max_subsec) max_subsec = e.subsec;
        for (int p = 0; p < N; p++) if (e.hits[p]) begin
          n_bits++;
          if (gen.exists(key(p, e.pps_count, e.subsec)) || gen.exists(key(p, e.pps_count, longint'(e.subsec) - 1)))
            n_matched++;
          else if (failures < 10) $display("event pixel %0d at %0d s + %0d x 100 ns matches no photon", p, e.pps_count, e.subsec);
          // time since the first PPS, in seconds
          t = real'(e.pps_count - 1) + real'(e.subsec) * 1.0e-7;
          ph = t * F_PSR;
          ph = ph - $floor(ph);
          fold[int'($floor(ph * 100.0)) % 100]++;
        end
      end
    end
  end

  // ---------------- GNSS PPS ----------------
  initial begin
    #(PPS0);
    for (int s = 0; s < 3; s++) begin
      pps_in = 1;
      #200;
      pps_in = 0;
      #(1_000_000_000 - 200);
    end
  end

  // ---------------- photons ----------------
  task automatic photon(int p);
    longint tns, dt, sec;
    tns = $time;
    dt = (tns - PPS0) / 5;                 // cycles after the first PPS
    sec = 1 + dt / 200_000_000;
    dt = dt % 200_000_000;
    gen[key(p, sec, dt / 20)] = 1;
    hit_in[p] = 1;
    #20;
    hit_in[p] = 0;
    n_photons++;
  endtask

  // photon times for the whole run, merged in time order
  longint bkg_t, psr_t;
  longint turn;
  longint last_hit [N];
  longint n_blind = 0;

  function automatic longint next_bkg(longint now);
    real u;
    u = (real'($urandom % 1000000) + 0.5) / 1000000.0;
    return now + 5 * (1 + longint'(-$ln(u) / BKG_RATE * 1.0e9 / 5.0));
  endfunction

  // times of the pulsed photons of one turn, drawn in phase 0.99-1.01
  longint psr_times [$];
  task automatic fill_turn(longint k);
    longint tt [$];
    for (int i = 0; i < PULSE_PER_TURN; i++) begin
      real ph;
      ph = real'(k) - 0.01 + 0.02 * real'($urandom % 10000) / 10000.0;
      tt.push_back(PPS0 + 5 * longint'(ph / F_PSR * 1.0e9 / 5.0));
    end
    tt.sort();
    foreach (tt[i]) psr_times.push_back(tt[i]);
  endtask

  initial begin
    longint end_t, t_next;
    int p;
    bit is_psr;
    real off_mean, on_sum, sigma;
    foreach (last_hit[i]) last_hit[i] = -1000;
    repeat (5) @(posedge clk);
    @(negedge clk) rst = 0;
    // start a light-curve run before the first PPS
    @(negedge clk) begin rbcp_act = 1; rbcp_we = 1; rbcp_addr = 0; rbcp_wd = 8'h02; end
    @(negedge clk) begin rbcp_act = 0; rbcp_we = 0; end
    end_t = PPS0 + longint'(SIM_S * 1.0e9);
    bkg_t = next_bkg(PPS0 + 1000);
    turn = 1;
    fill_turn(turn);
    while (1) begin
      if (psr_times.size() == 0) begin turn++; fill_turn(turn); end
      is_psr = psr_times[0] < bkg_t;
      t_next = is_psr ? psr_times[0] : bkg_t;
      if (t_next >= end_t) break;
      if (t_next > $time) #(t_next - $time);
      if (is_psr) begin
        void'(psr_times.pop_front());
        p = (1 + $urandom % 2) * 4 + 1 + $urandom % 2;   // pixels 5, 6, 9, 10
      end else begin
        bkg_t = next_bkg(bkg_t);
        p = $urandom % N;
      end
      // a pixel is blind for about 100 ns after a discharge: a photon that
      // lands inside that time is not detected and not driven
      if ($time - last_hit[p] >= 100) begin
        photon(p);
        last_hit[p] = $time - 20;
      end else n_blind++;
      #20;   // comparator line must fall before the next edge
    end
    #10_000;
    checks++;
    if (n_bits != n_photons) begin failures++; $display("pixel bits %0d, photons %0d", n_bits, n_photons); end
    checks++;
    if (n_matched != n_bits) begin failures++; $display("%0d of %0d pixel bits matched a photon", n_matched, n_bits); end
    checks++;
    if (max_subsec < 9_999_000 || max_subsec > 9_999_999) begin failures++; $display("largest sub-second count %0d", max_subsec); end
    // folded light curve: on 0.99-1.01 = bins 99 and 0; off 0.7729-0.8446 = bins 78..83
    off_mean = 0;
    for (int b = 78; b <= 83; b++) off_mean += fold[b];
    off_mean /= 6.0;
    on_sum = fold[99] + fold[0];
    sigma = (on_sum - 2.0 * off_mean) / $sqrt(2.0 * off_mean + 1.0);
    checks++;
    if (sigma < 5.0) begin failures++; $display("pulse significance %f sigma", sigma); end
    checks++;
    if (real'(n_bytes) * 8.0 / SIM_S >= 2.0e6) begin failures++; $display("data rate too high"); end
    $display("blind=%0d photons=%0d events=%0d bits=%0d matched=%0d max_subsec=%0d on=%0.0f off_mean/bin=%0.1f significance=%0.1f sigma rate=%0.2f Mbit/s",
             n_blind, n_photons, n_events, n_bits, n_matched, max_subsec, on_sum, off_mean, sigma, real'(n_bytes) * 8.0 / SIM_S / 1.0e6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// imony_daq_top: FPGA data acquisition of the IMONY photon-counting imager.
//
// Sixteen comparator lines, one per pixel of a 4x4 Geiger-mode APD array,
// enter from the frontend board. hit_detector samples them with the 5 ns
// clock and marks each rising edge. time_counters keeps the time: a
// sub-second count of 100 ns ticks reset by the GNSS PPS, and a count of PPS
// pulses cleared at the start of a measurement.
//
// Light-curve mode (the observing mode): event_builder gathers all pixels
// that fired within one 100 ns bin into one 64-bit event stamped with both
// counters; event_fifo absorbs bursts; tcp_tx_serializer sends the events as
// bytes into the SiTCP TCP stream. Scaler mode (the health-check mode):
// scaler counts the hits of every pixel over a programmed exposure.
//
// Slow control goes through the SiTCP RBCP bus into rbcp_regs, which selects
// the mode, starts measurements, sends DAC words through spi_master to the
// threshold DAC (chip select 0) and the HV DAC (chip select 1), and reads
// back the count map, the time counters and the last NMEA sentence, which
// uart_rx and nmea_capture take from the GNSS serial line.
//
// The SiTCP core, the Ethernet PHY, the GNSS receiver, the DACs and the clock
// manager that makes the 200 MHz clock from the GNSS 10 MHz are outside this
// module; their signals are its ports. All logic runs on the one 200 MHz
// clock with a synchronous active-high reset. The block structure follows
// the paper; widths, formats and the register map are this design's choices.
module imony_daq_top
  import imony_pkg::*;
#(
  parameter int unsigned N_CH         = NUM_PIXELS,
  parameter int unsigned CLK_DIV      = TICK_DIV,
  parameter int unsigned CLK_HZ       = 200_000_000,
  parameter int unsigned BAUD         = 9600,
  parameter int unsigned FIFO_DEPTH   = 1024,
  parameter int unsigned SPI_HALF_DIV = 10
) (
  input  logic             clk,
  input  logic             rst,
  // frontend board
  input  logic [N_CH-1:0]  hit_in,
  output logic             spi_sclk,
  output logic             spi_mosi,
  output logic [1:0]       spi_cs_n,
  // GNSS receiver
  input  logic             pps_in,
  input  logic             nmea_rx,
  // SiTCP RBCP local bus
  input  logic             rbcp_act,
  input  logic [31:0]      rbcp_addr,
  input  logic             rbcp_we,
  input  logic [7:0]       rbcp_wd,
  input  logic             rbcp_re,
  output logic             rbcp_ack,
  output logic [7:0]       rbcp_rd,
  // SiTCP TCP transmit
  input  logic             tcp_open,
  input  logic             tcp_tx_full,
  output logic             tcp_tx_wr,
  output logic [7:0]       tcp_tx_data
);

  localparam int unsigned EV_W = N_CH + PPS_W + SUBSEC_W;
  localparam int unsigned LV_W = $clog2(FIFO_DEPTH) + 1;

  logic [N_CH-1:0]     hit_pulse;
  logic                pps_pulse;
  logic                tick;
  logic [SUBSEC_W-1:0] subsec;
  logic [PPS_W-1:0]    pps_count;

  acq_mode_e           mode;
  logic                run, meas_start, lc_enable;
  logic                scaler_start, scaler_busy, scaler_done;
  logic [31:0]         exposure;
  logic [31:0]         scaler_counts [N_CH];

  logic                ev_valid;
  logic [EV_W-1:0]     ev_data;
  logic                fifo_rd, fifo_full, fifo_empty;
  logic [EV_W-1:0]     fifo_data;
  logic [LV_W-1:0]     fifo_level;
  logic [31:0]         drop_count;

  logic                spi_start, spi_sel, spi_busy;
  logic [23:0]         spi_word;

  logic                uart_valid, uart_ferr;
  logic [7:0]          uart_data;
  logic [6:0]          nmea_rd_addr;
  logic [7:0]          nmea_rd_data, nmea_len, nmea_seq;

  assign lc_enable = run && (mode == MODE_LIGHTCURVE);

  hit_detector #(.N_CH(N_CH)) u_hit (
    .clk, .rst, .hit_in, .hit_pulse
  );

  hit_detector #(.N_CH(1)) u_pps (
    .clk, .rst, .hit_in(pps_in), .hit_pulse(pps_pulse)
  );

  time_counters #(.CLK_DIV(CLK_DIV), .SUBSEC_W(SUBSEC_W), .PPS_W(PPS_W)) u_time (
    .clk, .rst, .pps_pulse, .meas_start, .tick, .subsec, .pps_count
  );

  event_builder #(.N_CH(N_CH), .SUBSEC_W(SUBSEC_W), .PPS_W(PPS_W)) u_evb (
    .clk, .rst, .enable(lc_enable), .hit_pulse, .tick, .subsec, .pps_count,
    .ev_valid, .ev_data
  );

  event_fifo #(.WIDTH(EV_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .wr_en(ev_valid), .wr_data(ev_data), .rd_en(fifo_rd),
    .rd_data(fifo_data), .full(fifo_full), .empty(fifo_empty),
    .level(fifo_level), .drop_count
  );

  tcp_tx_serializer #(.WIDTH(EV_W)) u_tx (
    .clk, .rst, .fifo_empty, .fifo_data, .fifo_rd, .tcp_open, .tcp_tx_full,
    .tcp_tx_wr, .tcp_tx_data
  );

  scaler #(.N_CH(N_CH), .CNT_W(32), .EXP_W(32)) u_scaler (
    .clk, .rst, .start(scaler_start), .exposure, .tick, .hit_pulse,
    .busy(scaler_busy), .done(scaler_done), .counts(scaler_counts)
  );

  uart_rx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_uart (
    .clk, .rst, .rx(nmea_rx), .rx_valid(uart_valid), .rx_data(uart_data),
    .frame_err(uart_ferr)
  );

  nmea_capture #(.BUF_BYTES(128)) u_nmea (
    .clk, .rst, .rx_valid(uart_valid), .rx_data(uart_data),
    .rd_addr(nmea_rd_addr), .rd_data(nmea_rd_data), .length(nmea_len),
    .seq(nmea_seq)
  );

  spi_master #(.BITS(24), .HALF_DIV(SPI_HALF_DIV), .N_CS(2)) u_spi (
    .clk, .rst, .start(spi_start), .cs_sel(spi_sel), .tx_word(spi_word),
    .busy(spi_busy), .sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n)
  );

  rbcp_regs #(.N_CH(N_CH), .NMEA_AW(7)) u_regs (
    .clk, .rst, .rbcp_act, .rbcp_addr, .rbcp_we, .rbcp_wd, .rbcp_re,
    .rbcp_ack, .rbcp_rd, .mode, .run, .meas_start, .scaler_start, .exposure,
    .spi_start, .spi_sel, .spi_word, .spi_busy, .scaler_busy, .scaler_done,
    .scaler_counts, .pps_count, .subsec, .drop_count,
    .fifo_level(16'(fifo_level)), .fifo_empty, .fifo_full, .uart_ferr, .nmea_length(nmea_len),
    .nmea_seq, .nmea_rd_addr, .nmea_rd_data
  );

endmodule

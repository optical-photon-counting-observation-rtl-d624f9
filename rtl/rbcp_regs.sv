// rbcp_regs: the register file that the host reaches over the SiTCP remote
// bus control protocol (RBCP), a UDP-carried byte-wide register access.
//
// SiTCP presents each host access as a one-cycle request: rbcp_we with
// rbcp_addr and rbcp_wd for a write, rbcp_re with rbcp_addr for a read. This
// module answers every request on the next cycle with rbcp_ack, and for a
// read with rbcp_rd. Multi-byte values are little endian. Addresses with any
// of bits 31:8 set read as zero and ignore writes. Map:
//
//   0x00     CTRL     rw  bit0 mode (0 light-curve, 1 scaler), bit1 run
//   0x01     STATUS   ro  bit0 spi busy, bit1 scaler busy, bit2 scaler done,
//                         bit3 events dropped since reset, bit4 FIFO empty,
//                         bit5 UART framing error seen (write 1 to CMD
//                         bit3 to clear), bit6 FIFO full
//   0x02     CMD      wo  write-one pulses: bit0 scaler start (scaler mode
//                         only), bit1 send threshold DAC word, bit2 send HV
//                         DAC word, bit3 clear the framing-error flag
//   0x04-07  EXPOSURE rw  scaler exposure in 100 ns ticks
//   0x08-09  THR_CODE rw  threshold DAC code; 0x0C THR_CMD: its command byte
//   0x0A-0B  HV_CODE  rw  HV DAC code;        0x0D HV_CMD:  its command byte
//   0x10-13  PPS      ro  PPS counter         0x14-17 SUBSEC ro sub-second
//   0x18-1B  DROPS    ro  events dropped      0x1C-1D LEVEL  ro FIFO level
//   0x20     NMEA_LEN ro  length of last sentence, 0x21 NMEA_SEQ ro count
//   0x40-7F  COUNTS   ro  scaler count map, channel c at 0x40 + 4c
//   0x80-FF  NMEA     ro  bytes of the last NMEA sentence
//
// A CTRL write that turns light-curve recording on (run set in light-curve
// mode, where before run was clear or the mode was scaler) starts a
// measurement: a one-cycle meas_start pulse clears the PPS counter, and
// events are recorded while run stays set in light-curve mode. An SPI word is {command byte, 16-bit code}. Commands to the SPI
// master while it is busy are lost; the host polls STATUS bit 0.
//
// nmea_rd_addr is simply the low seven bits of rbcp_addr: the NMEA buffer's
// read port is addressed directly and its data registered with the reply.
//
// The paper states that RBCP controls acquisition and the DACs and reads
// the NMEA data and scaler counts; this register map is this design's own.
module rbcp_regs
  import imony_pkg::*;
#(
  parameter int unsigned N_CH      = NUM_PIXELS,   // at most 16
  parameter int unsigned NMEA_AW   = 7     // 128-byte NMEA window
) (
  input  logic               clk,
  input  logic               rst,
  // SiTCP RBCP local bus
  input  logic               rbcp_act,
  input  logic [31:0]        rbcp_addr,
  input  logic               rbcp_we,
  input  logic [7:0]         rbcp_wd,
  input  logic               rbcp_re,
  output logic               rbcp_ack,
  output logic [7:0]         rbcp_rd,
  // control
  output acq_mode_e          mode,
  output logic               run,
  output logic               meas_start,
  output logic               scaler_start,
  output logic [31:0]        exposure,
  output logic               spi_start,
  output logic               spi_sel,       // 0 threshold DAC, 1 HV DAC
  output logic [23:0]        spi_word,
  // status
  input  logic               spi_busy,
  input  logic               scaler_busy,
  input  logic               scaler_done,
  input  logic [31:0]        scaler_counts [N_CH],
  input  logic [23:0]        pps_count,
  input  logic [23:0]        subsec,
  input  logic [31:0]        drop_count,
  input  logic [15:0]        fifo_level,
  input  logic               fifo_empty,
  input  logic               fifo_full,
  input  logic               uart_ferr,
  input  logic [7:0]         nmea_length,
  input  logic [7:0]         nmea_seq,
  output logic [NMEA_AW-1:0] nmea_rd_addr,
  input  logic [7:0]         nmea_rd_data
);

  logic [15:0] thr_code, hv_code;
  logic [7:0]  thr_cmd, hv_cmd;
  logic        wr, rd, page0;
  logic [7:0]  a;
  logic [7:0]  rdata;
  logic        ferr_seen;

  assign a     = rbcp_addr[7:0];
  assign page0 = (rbcp_addr[31:8] == '0);
  assign wr    = rbcp_act && rbcp_we && page0;
  assign rd    = rbcp_act && rbcp_re && page0;
  assign nmea_rd_addr = a[NMEA_AW-1:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      mode         <= MODE_LIGHTCURVE;
      run          <= 1'b0;
      meas_start   <= 1'b0;
      scaler_start <= 1'b0;
      exposure     <= '0;
      thr_code     <= '0;
      hv_code      <= '0;
      thr_cmd      <= '0;
      hv_cmd       <= '0;
      spi_start    <= 1'b0;
      spi_sel      <= 1'b0;
      spi_word     <= '0;
    end else begin
      meas_start   <= 1'b0;
      scaler_start <= 1'b0;
      spi_start    <= 1'b0;
      if (wr) begin
        case (a)
          8'h00: begin
            mode <= acq_mode_e'(rbcp_wd[0]);
            run  <= rbcp_wd[1];
            // light-curve recording switches on: a new measurement
            if (rbcp_wd[1] && !rbcp_wd[0] && !(run && mode == MODE_LIGHTCURVE))
              meas_start <= 1'b1;
          end
          8'h02: begin
            if (rbcp_wd[0] && mode == MODE_SCALER) scaler_start <= 1'b1;
            if (rbcp_wd[1] && !spi_busy) begin
              spi_start <= 1'b1;
              spi_sel   <= 1'b0;
              spi_word  <= {thr_cmd, thr_code};
            end else if (rbcp_wd[2] && !spi_busy) begin
              spi_start <= 1'b1;
              spi_sel   <= 1'b1;
              spi_word  <= {hv_cmd, hv_code};
            end
          end
          8'h04: exposure[7:0]   <= rbcp_wd;
          8'h05: exposure[15:8]  <= rbcp_wd;
          8'h06: exposure[23:16] <= rbcp_wd;
          8'h07: exposure[31:24] <= rbcp_wd;
          8'h08: thr_code[7:0]   <= rbcp_wd;
          8'h09: thr_code[15:8]  <= rbcp_wd;
          8'h0A: hv_code[7:0]    <= rbcp_wd;
          8'h0B: hv_code[15:8]   <= rbcp_wd;
          8'h0C: thr_cmd         <= rbcp_wd;
          8'h0D: hv_cmd          <= rbcp_wd;
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst || (wr && a == 8'h02 && rbcp_wd[3])) ferr_seen <= 1'b0;
    else if (uart_ferr)                          ferr_seen <= 1'b1;
  end

  // Read multiplexer.
  always_comb begin
    logic [31:0] cnt;
    logic [3:0]  ch;
    ch    = a[5:2];
    cnt   = (int'(ch) < N_CH) ? scaler_counts[ch] : '0;
    rdata = '0;
    if (a[7]) begin
      rdata = nmea_rd_data;
    end else if (a[7:6] == 2'b01) begin
      rdata = cnt[8*a[1:0] +: 8];
    end else begin
      case (a)
        8'h00: rdata = {6'b0, run, mode};
        8'h01: rdata = {1'b0, fifo_full, ferr_seen, fifo_empty, (drop_count != '0), scaler_done, scaler_busy, spi_busy};
        8'h04: rdata = exposure[7:0];
        8'h05: rdata = exposure[15:8];
        8'h06: rdata = exposure[23:16];
        8'h07: rdata = exposure[31:24];
        8'h08: rdata = thr_code[7:0];
        8'h09: rdata = thr_code[15:8];
        8'h0A: rdata = hv_code[7:0];
        8'h0B: rdata = hv_code[15:8];
        8'h0C: rdata = thr_cmd;
        8'h0D: rdata = hv_cmd;
        8'h10: rdata = pps_count[7:0];
        8'h11: rdata = pps_count[15:8];
        8'h12: rdata = pps_count[23:16];
        8'h14: rdata = subsec[7:0];
        8'h15: rdata = subsec[15:8];
        8'h16: rdata = subsec[23:16];
        8'h18: rdata = drop_count[7:0];
        8'h19: rdata = drop_count[15:8];
        8'h1A: rdata = drop_count[23:16];
        8'h1B: rdata = drop_count[31:24];
        8'h1C: rdata = fifo_level[7:0];
        8'h1D: rdata = fifo_level[15:8];
        8'h20: rdata = nmea_length;
        8'h21: rdata = nmea_seq;
        default: rdata = '0;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rbcp_ack <= 1'b0;
      rbcp_rd  <= '0;
    end else begin
      rbcp_ack <= rbcp_act && (rbcp_we || rbcp_re);
      rbcp_rd  <= rd ? rdata : '0;
    end
  end

  // SiTCP never issues a read and a write in the same cycle.
  a_rw_exclusive: assert property (@(posedge clk) disable iff (rst) !(rbcp_we && rbcp_re))
    else $error("rbcp_regs: simultaneous read and write");

endmodule

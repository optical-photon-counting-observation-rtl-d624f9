// spi_master: writes DAC words for the comparator threshold and for the
// high-voltage bias of the sensor.
//
// SPI mode 0, most significant bit first, write only. A start pulse while
// idle latches tx_word, pulls the chip select picked by cs_sel low and puts
// the first bit on mosi. Each bit then takes two half-periods of HALF_DIV
// clock cycles: sclk low, then high (the DAC samples on the rising edge).
// After the last bit sclk stays low for one more half-period before the chip
// select rises again; busy covers the whole frame.
//
// Timing: busy rises on the edge that takes start and stays high for
// (2*BITS + 1) * HALF_DIV cycles (2.45 us for 24 bits at the default 10 MHz
// sclk). Starts while busy are
// ignored. The paper states that both DACs are set over SPI; the frame
// length, clock rate and mode are this design's choice, the DAC parts being
// unnamed.
module spi_master #(
  parameter int unsigned BITS     = 24,
  parameter int unsigned HALF_DIV = 10,
  parameter int unsigned N_CS     = 2
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    start,
  input  logic [$clog2(N_CS)-1:0] cs_sel,
  input  logic [BITS-1:0]         tx_word,
  output logic                    busy,
  output logic                    sclk,
  output logic                    mosi,
  output logic [N_CS-1:0]         cs_n
);

  localparam int unsigned HW = $clog2(HALF_DIV + 1);
  localparam int unsigned BW = $clog2(BITS + 1);

  typedef enum logic [1:0] {S_IDLE, S_SHIFT, S_TAIL} state_e;

  state_e          state;
  logic [HW-1:0]   half_cnt;
  logic [BW-1:0]   bits_left;
  logic [BITS-1:0] shreg;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      half_cnt  <= '0;
      bits_left <= '0;
      shreg     <= '0;
      sclk      <= 1'b0;
      mosi      <= 1'b0;
      cs_n      <= '1;
    end else begin
      case (state)
        S_IDLE: begin
          sclk <= 1'b0;
          if (start) begin
            state         <= S_SHIFT;
            shreg         <= tx_word;
            mosi          <= tx_word[BITS-1];
            cs_n          <= '1;
            cs_n[cs_sel]  <= 1'b0;
            half_cnt      <= HW'(HALF_DIV - 1);
            bits_left     <= BW'(BITS);
          end
        end
        S_SHIFT: begin
          if (half_cnt != '0) begin
            half_cnt <= half_cnt - 1'b1;
          end else begin
            half_cnt <= HW'(HALF_DIV - 1);
            if (!sclk) begin
              sclk <= 1'b1;
            end else begin
              sclk      <= 1'b0;
              bits_left <= bits_left - 1'b1;
              if (bits_left == BW'(1)) begin
                state <= S_TAIL;
              end else begin
                shreg <= shreg << 1;
                mosi  <= shreg[BITS-2];
              end
            end
          end
        end
        S_TAIL: begin
          if (half_cnt != '0) begin
            half_cnt <= half_cnt - 1'b1;
          end else begin
            cs_n  <= '1;
            mosi  <= 1'b0;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

// uart_rx: receiver for the NMEA sentences the GNSS module sends.
//
// Standard 8N1 asynchronous serial: the line idles high, a low start bit is
// followed by eight data bits, least significant first, and a high stop bit.
// The input is synchronised by two flip-flops. A falling edge starts a bit
// timer of CLK_HZ/BAUD cycles; the start bit is checked at its middle (a
// glitch returns to idle) and every data and stop bit is sampled at its middle.
//
// Interface: rx_valid is a one-cycle strobe with rx_data after the middle of
// the stop bit; frame_err is a one-cycle strobe instead when the stop bit is
// low. The paper states that NMEA arrives over UART; the frame format and the
// 9600 baud default are this design's (the usual NMEA 0183 settings).
module uart_rx #(
  parameter int unsigned CLK_HZ = 200_000_000,
  parameter int unsigned BAUD   = 9600
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rx,
  output logic       rx_valid,
  output logic [7:0] rx_data,
  output logic       frame_err
);

  localparam int unsigned BIT_CYC = CLK_HZ / BAUD;
  localparam int unsigned TW      = $clog2(BIT_CYC + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_e;

  state_e        state;
  logic [TW-1:0] timer;
  logic [2:0]    bit_idx;
  logic [7:0]    shreg;
  logic          rx_s1, rx_s2;

  always_ff @(posedge clk) begin
    if (rst) begin
      rx_s1 <= 1'b1;
      rx_s2 <= 1'b1;
    end else begin
      rx_s1 <= rx;
      rx_s2 <= rx_s1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      timer     <= '0;
      bit_idx   <= '0;
      shreg     <= '0;
      rx_valid  <= 1'b0;
      rx_data   <= '0;
      frame_err <= 1'b0;
    end else begin
      rx_valid  <= 1'b0;
      frame_err <= 1'b0;
      case (state)
        S_IDLE: begin
          if (!rx_s2) begin
            state <= S_START;
            timer <= TW'(BIT_CYC / 2 - 1);
          end
        end
        S_START: begin
          if (timer != '0) begin
            timer <= timer - 1'b1;
          end else if (rx_s2) begin
            state <= S_IDLE;           // glitch, not a start bit
          end else begin
            state   <= S_DATA;
            timer   <= TW'(BIT_CYC - 1);
            bit_idx <= '0;
          end
        end
        S_DATA: begin
          if (timer != '0) begin
            timer <= timer - 1'b1;
          end else begin
            shreg <= {rx_s2, shreg[7:1]};
            timer <= TW'(BIT_CYC - 1);
            if (bit_idx == 3'd7) state <= S_STOP;
            bit_idx <= bit_idx + 1'b1;
          end
        end
        S_STOP: begin
          if (timer != '0) begin
            timer <= timer - 1'b1;
          end else begin
            state <= S_IDLE;
            if (rx_s2) begin
              rx_valid <= 1'b1;
              rx_data  <= shreg;
            end else begin
              frame_err <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

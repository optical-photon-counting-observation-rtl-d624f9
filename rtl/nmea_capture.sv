// nmea_capture: keeps the latest NMEA sentence from the GNSS receiver in
// registers that the host can read over the slow-control bus.
//
// A sentence starts with '$' and ends with a line feed (both kept). Bytes
// outside a sentence are ignored; a '$' inside one starts it again; bytes
// beyond BUF_BYTES are dropped. Two buffers of BUF_BYTES bytes alternate:
// one is being filled while the other holds the last complete sentence. When
// the line feed arrives the roles swap, `length` takes the sentence length
// and `seq` counts up, so a reader never sees a half-written sentence as long
// as it reads between two sentence ends (one NMEA sentence per second or so).
//
// Interface: bytes come as rx_valid/rx_data strobes; rd_addr selects a byte
// of the complete sentence and rd_data shows it in the same cycle. The paper
// says NMEA information is read from registers to obtain the UTC of the
// measurement start; the double buffer and its size are this design's.
module nmea_capture #(
  parameter int unsigned BUF_BYTES = 128   // power of two
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          rx_valid,
  input  logic [7:0]                    rx_data,
  input  logic [$clog2(BUF_BYTES)-1:0]  rd_addr,
  output logic [7:0]                    rd_data,
  output logic [$clog2(BUF_BYTES+1)-1:0] length,
  output logic [7:0]                    seq
);

  localparam int unsigned AW = $clog2(BUF_BYTES);
  localparam int unsigned LW = $clog2(BUF_BYTES + 1);
  localparam logic [7:0] CH_DOLLAR = 8'h24;
  localparam logic [7:0] CH_LF     = 8'h0A;

  logic [7:0]  mem [2*BUF_BYTES];
  logic        wr_bank;          // bank being filled; the other is readable
  logic        in_sentence;
  logic [LW-1:0] idx;            // bytes stored in the bank being filled
  logic        store;
  logic [AW-1:0] store_addr;

  assign store      = rx_valid && (rx_data == CH_DOLLAR || (in_sentence && idx != LW'(BUF_BYTES)));
  assign store_addr = (rx_data == CH_DOLLAR) ? '0 : idx[AW-1:0];
  assign rd_data    = mem[{~wr_bank, rd_addr}];

  always_ff @(posedge clk) begin
    if (store) mem[{wr_bank, store_addr}] <= rx_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_bank     <= 1'b0;
      in_sentence <= 1'b0;
      idx         <= '0;
      length      <= '0;
      seq         <= '0;
    end else if (rx_valid) begin
      if (rx_data == CH_DOLLAR) begin
        in_sentence <= 1'b1;
        idx         <= LW'(1);
      end else if (in_sentence) begin
        if (idx != LW'(BUF_BYTES)) idx <= idx + 1'b1;
        if (rx_data == CH_LF) begin
          in_sentence <= 1'b0;
          wr_bank     <= ~wr_bank;
          length      <= (idx != LW'(BUF_BYTES)) ? idx + 1'b1 : idx;
          seq         <= seq + 1'b1;
        end
      end
    end
  end

endmodule

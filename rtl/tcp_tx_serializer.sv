// tcp_tx_serializer: feeds light-curve events into the byte-wide TCP
// transmit port of the SiTCP network core.
//
// The FIFO is first-word-fall-through. When it is not empty and the TCP
// connection is open, the sender takes the word, pops it, and then writes its
// BYTES bytes, most significant first, one per cycle in which SiTCP does not
// assert tcp_tx_full. While the connection is closed no word is taken, so
// events accumulate in the FIFO (and are dropped there when it fills).
//
// Interface: tcp_tx_wr is high for one cycle per byte with tcp_tx_data.
// Throughput is one byte per clock at most, far beyond the 100BASE-T link.
// The SiTCP port names follow the SiTCP library; byte order and the absence
// of any framing are this design's choice.
module tcp_tx_serializer #(
  parameter int unsigned WIDTH = imony_pkg::EVENT_W   // multiple of 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             fifo_empty,
  input  logic [WIDTH-1:0] fifo_data,
  output logic             fifo_rd,
  input  logic             tcp_open,
  input  logic             tcp_tx_full,
  output logic             tcp_tx_wr,
  output logic [7:0]       tcp_tx_data
);

  localparam int unsigned BYTES = WIDTH / 8;
  localparam int unsigned CW    = $clog2(BYTES + 1);

  logic [WIDTH-1:0] shreg;
  logic [CW-1:0]    remaining;   // bytes still to send from shreg

  assign fifo_rd = (remaining == '0) && !fifo_empty && tcp_open;

  always_ff @(posedge clk) begin
    if (rst) begin
      shreg       <= '0;
      remaining   <= '0;
      tcp_tx_wr   <= 1'b0;
      tcp_tx_data <= '0;
    end else begin
      tcp_tx_wr <= 1'b0;
      if (fifo_rd) begin
        shreg     <= fifo_data;
        remaining <= CW'(BYTES);
      end else if (remaining != '0 && !tcp_tx_full) begin
        tcp_tx_wr   <= 1'b1;
        tcp_tx_data <= shreg[WIDTH-1 -: 8];
        shreg       <= shreg << 8;
        remaining   <= remaining - 1'b1;
      end
    end
  end

endmodule

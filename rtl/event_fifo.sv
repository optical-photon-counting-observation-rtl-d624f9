// event_fifo: the buffer between event building and the Ethernet sender that
// keeps the readout from adding dead time.
//
// A single-clock circular buffer of DEPTH words held in a memory array, with
// read and write pointers one bit wider than the address so that full and
// empty can be told apart. The read side is first-word-fall-through: rd_data
// shows the oldest word whenever empty is low, and rd_en (allowed only when
// not empty) removes it. A write while full and not read is refused and counted in
// drop_count, which saturates; level is the number of words held.
//
// Timing: a word written in cycle n is visible on rd_data in cycle n+1.
// Writing and reading in the same cycle is allowed at any fill level, a full
// FIFO included, where the read makes room for the write. The
// paper only states that a FIFO is present; depth, width and the drop
// counter are this design's choices.
module event_fifo #(
  parameter int unsigned WIDTH = imony_pkg::EVENT_W,
  parameter int unsigned DEPTH = 1024   // power of two
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   level,
  output logic [31:0]              drop_count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  assign level = wr_ptr - rd_ptr;
  assign empty = (wr_ptr == rd_ptr);
  assign full  = (wr_ptr[AW] != rd_ptr[AW]) && (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]);
  assign do_wr = wr_en && (!full || do_rd);
  assign do_rd = rd_en && !empty;
  assign rd_data = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      drop_count <= '0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      if (wr_en && !do_wr && drop_count != '1) drop_count <= drop_count + 1'b1;
    end
  end

  // Reading an empty FIFO is a protocol error of the reader.
  a_no_read_when_empty: assert property (@(posedge clk) disable iff (rst) rd_en |-> !empty)
    else $error("event_fifo: read while empty");

endmodule

// time_counters: the two counters that give every photon its relative time.
//
// A divider counts CLK_DIV cycles of the 5 ns clock and raises `tick` for one
// cycle at the end of each 100 ns period; this stands for the GNSS 10 MHz
// clock, from which the 5 ns clock is assumed to be derived, so the two stay
// in step. The sub-second counter adds one per tick and is cleared by every
// PPS pulse. The PPS counter adds one per PPS pulse and is cleared when a
// measurement starts. Together with the UTC of the PPS read from the NMEA
// sentence, (pps_count, subsec) gives the absolute time of an event to 100 ns.
//
// Timing: `subsec` and `pps_count` change on the clock edge after the tick
// or PPS pulse that moves them. A PPS in the same cycle as a tick wins: the
// sub-second counter becomes 0. `meas_start` together with a PPS leaves the
// PPS counter at 0. Counting with a PPS reset follows the paper; the widths,
// the wrap-around and the priority rules are this design's choice.
module time_counters #(
  parameter int unsigned CLK_DIV  = imony_pkg::TICK_DIV,
  parameter int unsigned SUBSEC_W = 24,
  parameter int unsigned PPS_W    = 24
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                pps_pulse,
  input  logic                meas_start,
  output logic                tick,
  output logic [SUBSEC_W-1:0] subsec,
  output logic [PPS_W-1:0]    pps_count
);

  localparam int unsigned DIV_W = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;

  logic [DIV_W-1:0] div_cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      div_cnt <= '0;
      tick    <= 1'b0;
    end else begin
      tick <= (div_cnt == DIV_W'(CLK_DIV - 1));
      if (div_cnt == DIV_W'(CLK_DIV - 1)) div_cnt <= '0;
      else                                div_cnt <= div_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      subsec <= '0;
    end else if (pps_pulse) begin
      subsec <= '0;
    end else if (tick) begin
      subsec <= subsec + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst || meas_start) begin
      pps_count <= '0;
    end else if (pps_pulse) begin
      pps_count <= pps_count + 1'b1;
    end
  end

endmodule

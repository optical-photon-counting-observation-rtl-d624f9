// event_builder: turns photon hits into light-curve events with a 100 ns
// time stamp.
//
// Hit pulses from the 5 ns clock domain are OR-ed into a pattern register for
// the current 100 ns bin. At the end of the bin (`tick`) the pattern, if any
// bit is set and the measurement is enabled, is written out as one event
// together with the PPS counter and the sub-second counter as they stand at
// that moment, and the pattern starts again from the hits of that very cycle.
// Several pixels firing in one bin therefore share one event, and each pixel
// can appear at most once per bin.
//
// Interface: ev_valid is a one-cycle strobe with ev_data (laid out as imony_pkg::event_t)
// on the cycle after the tick; there is no back-pressure, the FIFO behind it
// counts what it cannot take. The 100 ns stamp from a 5 ns sampled hit
// follows the paper; the event layout and the bin grouping are this design's.
module event_builder
#(
  parameter int unsigned N_CH     = 16,
  parameter int unsigned SUBSEC_W = 24,
  parameter int unsigned PPS_W    = 24
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         enable,
  input  logic [N_CH-1:0]              hit_pulse,
  input  logic                         tick,
  input  logic [SUBSEC_W-1:0]          subsec,
  input  logic [PPS_W-1:0]             pps_count,
  output logic                         ev_valid,
  output logic [N_CH+PPS_W+SUBSEC_W-1:0] ev_data
);

  logic [N_CH-1:0] pattern;
  logic [N_CH-1:0] pattern_now;

  // Hits arriving in the tick cycle still belong to the closing bin.
  assign pattern_now = pattern | hit_pulse;

  always_ff @(posedge clk) begin
    if (rst) begin
      pattern  <= '0;
      ev_valid <= 1'b0;
      ev_data  <= '0;
    end else begin
      ev_valid <= 1'b0;
      if (!enable) begin
        pattern <= '0;
      end else if (tick) begin
        pattern <= '0;
        if (|pattern_now) begin
          ev_valid <= 1'b1;
          ev_data  <= {pattern_now, pps_count, subsec};
        end
      end else begin
        pattern <= pattern_now;
      end
    end
  end

endmodule

// scaler: scaler mode of the acquisition, a count map of all pixels.
//
// A start pulse clears every channel's counter and loads the exposure, given
// in 100 ns ticks. While busy, each hit pulse adds one to its channel's
// counter (saturating at all-ones) and each tick takes one from the
// remaining exposure; when it reaches zero the scaler stops, raises `done`
// and holds the count map until the next start. A start while busy restarts
// the exposure. An exposure of zero ends on the next cycle with empty counts.
//
// Timing: hits are counted from the cycle after `start` up to and including
// the cycle of the last tick of the exposure, so the window is exposure x
// 100 ns long. The paper describes the per-channel count over a set exposure
// and the register holding of the result; widths, units and saturation are
// this design's choice.
module scaler #(
  parameter int unsigned N_CH  = 16,
  parameter int unsigned CNT_W = 32,
  parameter int unsigned EXP_W = 32
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  start,
  input  logic [EXP_W-1:0]      exposure,
  input  logic                  tick,
  input  logic [N_CH-1:0]       hit_pulse,
  output logic                  busy,
  output logic                  done,
  output logic [CNT_W-1:0]      counts [N_CH]
);

  logic [EXP_W-1:0] remain;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      remain <= '0;
    end else if (start) begin
      busy   <= 1'b1;
      done   <= 1'b0;
      remain <= exposure;
    end else if (busy) begin
      if (remain == '0 || (tick && remain == EXP_W'(1))) begin
        busy   <= 1'b0;
        done   <= 1'b1;
        remain <= '0;
      end else if (tick) begin
        remain <= remain - 1'b1;
      end
    end
  end

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    always_ff @(posedge clk) begin
      if (rst || start) begin
        counts[c] <= '0;
      end else if (busy && hit_pulse[c] && counts[c] != '1) begin
        counts[c] <= counts[c] + 1'b1;
      end
    end
  end

endmodule

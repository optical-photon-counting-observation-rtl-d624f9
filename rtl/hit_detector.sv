// hit_detector: brings the asynchronous comparator outputs of the frontend
// board into the 5 ns clock domain and marks each photon hit.
//
// Each line passes through a two-flip-flop synchroniser; a third register
// holds the previous sample, and a rising edge (low in the previous sample,
// high in the current one) gives a pulse of exactly one clock cycle on
// hit_pulse. The same module synchronises the GNSS PPS line when instantiated
// with N_CH = 1.
//
// Timing: hit_pulse rises three clock edges after the input rises (two for
// the synchroniser, one for the edge register). A pulse shorter than one
// clock period may be missed; an input must be low for at least one sample
// between hits. The paper fixes the 5 ns sampling and the 16 lines; the
// synchroniser depth and active-high polarity are this design's choice.
module hit_detector #(
  parameter int unsigned N_CH = 16
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [N_CH-1:0] hit_in,
  output logic [N_CH-1:0] hit_pulse
);

  logic [N_CH-1:0] sync1, sync2, prev;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync1     <= '0;
      sync2     <= '0;
      prev      <= '0;
      hit_pulse <= '0;
    end else begin
      sync1     <= hit_in;
      sync2     <= sync1;
      prev      <= sync2;
      hit_pulse <= sync2 & ~prev;
    end
  end

endmodule

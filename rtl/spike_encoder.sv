// spike_encoder: deterministic rate coding of the SNN's input features.
// Each of N_CH channels owns a 16-bit phase accumulator. When a channel is
// stepped with rate r, acc += r and the carry out of bit 15 is the spike, so
// a channel fires on average r / 65536 times per time step, evenly spread.
// The feature magnitude is turned into a rate by a left shift of RATE_SHIFT
// with saturation at 65535 (a magnitude of 2^(16-RATE_SHIFT) or more fires on
// every step). The paper reports rate encoding but not its circuit; the
// accumulator scheme and the shift are this design's choice.
// Interface: one channel per clock (step, ch, mag); spike is combinational
// for the addressed channel and the accumulator updates on the clock.
// clear zeroes every accumulator in one clock (part of the hard reset).
module spike_encoder
  import neurosec_pkg::*;
#(
  parameter int unsigned N_CH       = 33,
  parameter int unsigned RATE_SHIFT = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    step,
  input  logic [$clog2(N_CH)-1:0] ch,
  input  mag_t                    mag,
  output logic                    spike
);

  logic [15:0] acc [N_CH];
  logic [MAG_W+RATE_SHIFT-1:0] scaled;
  logic [15:0] rate;
  logic [16:0] sum;

  always_comb begin
    scaled = (MAG_W+RATE_SHIFT)'(mag) << RATE_SHIFT;
    rate   = (scaled > 65535) ? 16'hffff : scaled[15:0];
    sum    = {1'b0, acc[ch]} + {1'b0, rate};
    spike  = step && sum[16];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CH; i++) acc[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < N_CH; i++) acc[i] <= '0;
    end else if (step) begin
      acc[ch] <= sum[15:0];
    end
  end

endmodule

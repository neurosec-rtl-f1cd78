// sft_mixer: recombines a magnitude with an argument into a complex spectrum
// bin, re + j*im = mag * exp(j*phase), with a rotation-mode CORDIC. In the
// datapath it joins the (attacked or denoised) magnitude with the argument of
// the noisy input. Outputs are 18-bit signed so no magnitude can overflow.
// Timing: start taken when idle, done pulses 18 clocks later.
// The paper names the SFT mixer and says what it joins. The CORDIC
// implementation and the widths are this design's choice.
module sft_mixer
  import neurosec_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  mag_t   mag,
  input  phase_t phase,
  output logic   busy,
  output logic   done,
  output cmp_t   re,
  output cmp_t   im
);

  logic signed [CMP_W:0] xo, yo;
  logic [15:0]           zo;

  cordic #(.VECTORING(1'b0), .IN_W(CMP_W)) u_cordic (
    .clk, .rst_n, .start,
    .x_in(cmp_t'(mag)), .y_in('0), .z_in(phase),
    .busy, .done, .x_out(xo), .y_out(yo), .z_out(zo)
  );

  function automatic cmp_t sat(input logic signed [CMP_W:0] v);
    if (v > (CMP_W+1)'((1 << (CMP_W - 1)) - 1))   return cmp_t'((1 << (CMP_W - 1)) - 1);
    if (v < -(CMP_W+1)'(1 << (CMP_W - 1)))        return cmp_t'(-(1 << (CMP_W - 1)));
    return cmp_t'(v);
  endfunction

  // the residual angle zo of a converged rotation is ~0 and not needed
  assign re = sat(xo);
  assign im = sat(yo);

endmodule

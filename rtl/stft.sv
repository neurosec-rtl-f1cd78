// stft: short-time Fourier transform front end. dft_frame turns each N-sample
// frame into bins 0..N/2; a vectoring CORDIC then splits every bin into its
// absolute value (17-bit magnitude) and argument (16-bit binary angle), which
// is how the datapath consumes the spectrum. The rectangular bin value is
// passed along as well, since the SNR measurement compares complex spectra.
// Interface: a sample stream in (valid/ready) and a bin stream out
// (valid/ready), one bin in flight in the CORDIC at a time.
// Timing: per bin N+1 clocks of DFT, overlapped with the 18-clock CORDIC of
// the previous bin when N >= 18. The CORDIC's residual y is not needed.
// The paper splits each frame into magnitude and argument using a vendor
// FFT core. The DFT engine, the 64-sample rectangular frame without overlap
// and the CORDIC are this design's replacement for it.
module stft
  import neurosec_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  sample_t              in_sample,
  output logic                 out_valid,
  input  logic                 out_ready,
  output mag_t                 out_mag,
  output phase_t               out_phase,
  output coef_t                out_re,
  output coef_t                out_im,
  output logic [$clog2(N)-1:0] out_k,
  output logic                 out_last
);

  logic                 d_valid, d_ready, d_last;
  coef_t                d_re, d_im;
  logic [$clog2(N)-1:0] d_k;

  dft_frame #(.N(N)) u_dft (
    .clk, .rst_n, .in_valid, .in_ready, .in_sample,
    .out_valid(d_valid), .out_ready(d_ready), .out_re(d_re), .out_im(d_im),
    .out_k(d_k), .out_last(d_last)
  );

  logic                c_start, c_busy, c_done;
  logic signed [18:0]  c_x, c_y;
  logic [15:0]         c_z;

  cordic #(.VECTORING(1'b1), .IN_W(18)) u_cordic (
    .clk, .rst_n, .start(c_start),
    .x_in(18'(d_re)), .y_in(18'(d_im)), .z_in(16'h0),
    .busy(c_busy), .done(c_done), .x_out(c_x), .y_out(c_y), .z_out(c_z)
  );

  logic pending;  // CORDIC running for a bin we have taken

  // A bin is taken from the DFT when the CORDIC is idle and the output
  // register is free.
  assign d_ready = !c_busy && !c_done && !out_valid && !pending;
  assign c_start = d_valid && d_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= 1'b0; out_valid <= 1'b0;
      out_mag <= '0; out_phase <= '0; out_re <= '0; out_im <= '0; out_k <= '0; out_last <= 1'b0;
    end else begin
      if (c_start) begin
        pending  <= 1'b1;
        out_re   <= d_re;
        out_im   <= d_im;
        out_k    <= d_k;
        out_last <= d_last;
      end
      if (c_done) begin
        pending   <= 1'b0;
        out_valid <= 1'b1;
        out_mag   <= (c_x < 0) ? '0 : (c_x > 19'sd131071 ? '1 : mag_t'(c_x));
        out_phase <= c_z;
      end else if (out_valid && out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

endmodule

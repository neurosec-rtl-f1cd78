// perturbation_detector: per-frame SNR measurement and threshold test.
// For every bin it accumulates the clean energy S = sum |C|^2 and the
// deviation energy E = sum |Y - C|^2 between the composite spectrum Y (attacked
// magnitude with the noisy argument) and the clean spectrum C. After the last
// bin of a frame it forms
//   SNR = 10*log10(S/E) = 3.0103 * (log2 S - log2 E)   [dB, signed Q8.8]
// with a log2 taken as leading-one position plus the next 8 bits as a linear
// fraction (error below 0.09 in log2, 0.26 dB). The frame is flagged when the
// SNR deviates from the reference by more than the allowed deviation:
//   flag = |SNR - snr_ref| > snr_dev.
// E = 0 gives +127.99 dB, S = 0 gives -128 dB.
// Timing: res_valid pulses 2 clocks after the bin marked last; clear empties
// the accumulators (used by the hard reset).
// From the paper: the SNR of the composite signal, and an attack flagged
// when it deviates significantly from a threshold. This design's own
// choices: the two-sided test, the log2 approximation, the widths, and the
// default reference (the paper's operating SNR of 5.395 dB).
module perturbation_detector
  import neurosec_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic bin_valid,
  input  logic bin_last,
  input  cmp_t y_re,
  input  cmp_t y_im,
  input  coef_t c_re,
  input  coef_t c_im,
  input  snr_t snr_ref,
  input  snr_t snr_dev,
  output logic res_valid,
  output snr_t snr,
  output logic flag
);

  localparam int unsigned AW = 48;
  logic [AW-1:0] s_acc, e_acc;
  logic          fin;

  logic signed [CMP_W:0] dr, di;
  logic [2*CMP_W+1:0]    e_bin;
  logic [2*COEF_W:0]     s_bin;
  always_comb begin
    dr    = (CMP_W+1)'(y_re) - (CMP_W+1)'(c_re);
    di    = (CMP_W+1)'(y_im) - (CMP_W+1)'(c_im);
    e_bin = (2*CMP_W+2)'(dr * dr) + (2*CMP_W+2)'(di * di);
    s_bin = (2*COEF_W+1)'(c_re * c_re) + (2*COEF_W+1)'(c_im * c_im);
  end

  // log2 in Q8 of a nonzero value
  function automatic logic [15:0] log2q8(input logic [AW-1:0] v);
    int p;
    logic [AW-1:0] m;
    p = 0;
    for (int i = 0; i < AW; i++) if (v[i]) p = i;
    m = v << (AW - 1 - p);          // leading one now at bit AW-1
    return 16'(p * 256) + 16'(m[AW-2 -: 8]);
  endfunction

  logic signed [17:0] dl;
  logic signed [27:0] db;
  snr_t               snr_c;
  logic signed [17:0] dev;
  always_comb begin
    dl = 18'(log2q8(s_acc)) - 18'(log2q8(e_acc));
    db = (28'(dl) * 28'sd771) >>> 8;
    if (e_acc == 0)                snr_c = 16'sh7fff;
    else if (s_acc == 0)           snr_c = 16'sh8000;
    else if (db > 28'sd32767)      snr_c = 16'sh7fff;
    else if (db < -28'sd32768)     snr_c = 16'sh8000;
    else                           snr_c = snr_t'(db);
    dev = 18'(snr_c) - 18'(snr_ref);
    if (dev < 0) dev = -dev;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_acc <= '0; e_acc <= '0; fin <= 1'b0;
      res_valid <= 1'b0; snr <= '0; flag <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      fin       <= 1'b0;
      if (clear) begin
        s_acc <= '0; e_acc <= '0;
      end else if (fin) begin
        res_valid <= 1'b1;
        snr       <= snr_c;
        flag      <= dev > 18'(snr_dev);
        s_acc     <= '0;
        e_acc     <= '0;
      end else if (bin_valid) begin
        s_acc <= s_acc + AW'(s_bin);
        e_acc <= e_acc + AW'(e_bin);
        fin   <= bin_last;
      end
    end
  end

endmodule

// tb_perturbation_detector: frames of random clean spectra with composite
// spectra at controlled noise levels (SNR from about -10 to +25 dB, plus an
// exactly clean frame); the reported SNR is compared with 10*log10(S/E)
// computed here in floating point (tolerance 0.3 dB, the log2
// approximation's bound), the flag with |SNR - ref| > dev wherever the
// exact SNR is clear of the decision boundary, and res_valid must come
// 2 clocks after the last bin.
// The paper gives no test data. The stimulus, sizes and tolerances are this
// testbench's own.
module tb_perturbation_detector;
  import neurosec_pkg::*;
  localparam int NB = 33;
  logic clk = 0, rst_n = 0, clear = 0, bin_valid = 0, bin_last = 0, res_valid, flag;
  cmp_t y_re, y_im; coef_t c_re, c_im;
  snr_t snr_ref, snr_dev, snr;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  perturbation_detector dut (.*);

  function automatic real fabs(input real v); return v < 0 ? -v : v; endfunction

  initial begin
    real s, e, db, refdb, devdb;
    int noise, cyc;
    y_re = 0; y_im = 0; c_re = 0; c_im = 0;
    snr_ref = SNR_REF_DEFAULT; snr_dev = 16'sd768;   // 5.395 dB +- 3 dB
    refdb = 1381.0 / 256.0; devdb = 3.0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 60; f++) begin
      s = 0; e = 0;
      noise = (f == 0) ? 0 : $urandom_range(1, 12000);
      for (int k = 0; k < NB; k++) begin
        c_re = coef_t'($urandom_range(0, 16000) - 8000);
        c_im = coef_t'($urandom_range(0, 16000) - 8000);
        y_re = cmp_t'(int'(c_re) + (noise == 0 ? 0 : $urandom_range(0, 2 * noise) - noise));
        y_im = cmp_t'(int'(c_im) + (noise == 0 ? 0 : $urandom_range(0, 2 * noise) - noise));
        s += real'(c_re) * real'(c_re) + real'(c_im) * real'(c_im);
        e += real'(int'(y_re) - int'(c_re)) * real'(int'(y_re) - int'(c_re)) + real'(int'(y_im) - int'(c_im)) * real'(int'(y_im) - int'(c_im));
        bin_valid = 1; bin_last = (k == NB - 1);
        @(negedge clk);
        if (k % 3 == 0) begin bin_valid = 0; @(negedge clk); end   // gaps between bins
      end
      bin_valid = 0; bin_last = 0;
      cyc = 1;
      while (!res_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 2) begin failures++; $display("FAIL latency %0d", cyc); end
      if (e == 0) begin
        checks++;
        if (snr != 16'sh7fff || !flag) begin failures++; $display("FAIL clean frame snr %0d flag %0d", snr, flag); end
      end else begin
        db = 10.0 * $log10(s / e);
        checks++;
        if (fabs(real'(snr) / 256.0 - db) > 0.3) begin failures++; $display("FAIL snr %f exp %f", real'(snr) / 256.0, db); end
        if (fabs(fabs(db - refdb) - devdb) > 0.35) begin
          checks++;
          if (flag != (fabs(db - refdb) > devdb)) begin failures++; $display("FAIL flag %0d at %f dB", flag, db); end
        end
      end
      if (f == 30) begin
        // a cleared partial frame must not count
        c_re = 16'sd1000; c_im = 0; y_re = 18'sd9000; y_im = 0; bin_valid = 1;
        @(negedge clk); bin_valid = 0; clear = 1; @(negedge clk); clear = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

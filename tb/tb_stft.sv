// tb_stft: feeds three frames of random audio into the STFT front end and
// compares every bin's real part, imaginary part, magnitude and argument with
// a floating-point DFT computed here. Also checks bin order, the last flag
// and that a frame is finished in (N/2+1)*(N+1) clocks plus CORDIC slack.
// The paper gives no test data. The stimulus, sizes and tolerances are this
// testbench's own.
module tb_stft;
  import neurosec_pkg::*;
  localparam int N = 64;
  localparam int FRAMES = 3;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, out_last;
  sample_t in_sample;
  mag_t out_mag; phase_t out_phase; coef_t out_re, out_im;
  logic [$clog2(N)-1:0] out_k;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  stft #(.N(N)) dut (.*);

  function automatic real fabs(input real v); return v < 0 ? -v : v; endfunction

  int x [FRAMES][N];
  int f_out = 0, k_exp = 0;
  longint t_first, t_last;

  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++)
        x[f][n] = (f == 0) ? int'(12000.0 * $cos(2.0 * PI * 5.0 * n / N + 0.7)) + 300
                           : int'($urandom_range(0, 40000)) - 20000;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        in_valid = 1; in_sample = sample_t'(x[f][n]);
        @(posedge clk); while (!in_ready) @(posedge clk);
        #1;
      end
    in_valid = 0;
  end

  always @(posedge clk) if (out_valid && out_ready) begin
    real re, im, mg, ph, dph;
    re = 0; im = 0;
    for (int n = 0; n < N; n++) begin
      re += x[f_out][n] * $cos(2.0 * PI * k_exp * n / N) / N;
      im -= x[f_out][n] * $sin(2.0 * PI * k_exp * n / N) / N;
    end
    mg = $sqrt(re * re + im * im);
    checks += 4;
    if (int'(out_k) != k_exp) begin failures++; $display("FAIL k %0d exp %0d", out_k, k_exp); end
    if (fabs(out_re - re) > 1.5 || fabs(out_im - im) > 1.5) begin
      failures++; $display("FAIL f%0d k%0d re/im %0d %0d exp %f %f", f_out, k_exp, out_re, out_im, re, im);
    end
    if (fabs(out_mag - mg) > 3.0 + mg * 0.002) begin
      failures++; $display("FAIL f%0d k%0d mag %0d exp %f", f_out, k_exp, out_mag, mg);
    end
    if (out_mag > 16) begin
      ph  = $atan2(real'(out_im), real'(out_re)) * 65536.0 / (2.0 * PI);
      dph = real'(signed'(16'(out_phase - phase_t'(longint'($floor(ph + 0.5))))));
      if (fabs(dph) > 4.0 + 3000.0 / real'(out_mag)) begin failures++; $display("FAIL f%0d k%0d phase %0d exp %f", f_out, k_exp, out_phase, ph); end
    end
    if (out_last != (k_exp == N / 2)) begin failures++; $display("FAIL last"); end
    if (k_exp == 0 && f_out == 1) t_first = $time;
    if (k_exp == 0 && f_out == 2) t_last = $time;
    if (k_exp == N / 2) begin
      k_exp = 0; f_out++;
      if (f_out == FRAMES) begin
        checks++;
        if (int'((t_last - t_first) / 10) > (N / 2 + 1) * (N + 1) + 40) begin
          failures++; $display("FAIL frame period %0d clocks", (t_last - t_first) / 10);
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end else k_exp++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

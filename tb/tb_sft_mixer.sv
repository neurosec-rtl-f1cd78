// tb_sft_mixer: random magnitudes (full 17-bit range) and arguments covering
// all four quadrants; re and im are compared with mag*cos and mag*sin in
// floating point, and the 18-clock latency is checked.
// The paper gives no test data. The stimulus, sizes and tolerances are this
// testbench's own.
module tb_sft_mixer;
  import neurosec_pkg::*;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  mag_t mag; phase_t phase; cmp_t re, im;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sft_mixer dut (.*);

  function automatic real fabs(input real v); return v < 0 ? -v : v; endfunction

  initial begin
    int cyc;
    real a, er, ei, tol;
    mag = 0; phase = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      mag   = (t < 8) ? 17'd131071 : mag_t'($urandom_range(0, 131071));
      phase = (t < 8) ? phase_t'(t * 8192) : phase_t'($urandom_range(0, 65535));
      start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      a   = 2.0 * PI * real'(phase) / 65536.0;
      er  = real'(mag) * $cos(a);
      ei  = real'(mag) * $sin(a);
      tol = 3.0 + real'(mag) * 0.0004;  // 16-bit angles: about 4 angle units of error
      checks += 2;
      if (fabs(real'(re) - er) > tol || fabs(real'(im) - ei) > tol) begin
        failures++; $display("FAIL mag %0d ph %0d: %0d %0d exp %f %f", mag, phase, re, im, er, ei);
      end
      if (cyc != 18) begin failures++; $display("FAIL latency %0d", cyc); end
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

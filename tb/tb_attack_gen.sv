// tb_attack_gen: random magnitudes and attack settings for all three modes;
// each result is compared with the FGSM / PGD formulas evaluated here in
// plain integer arithmetic, and the latency (1 clock, or 1 + pgd_steps for
// PGD) is checked for every operation.
// The paper gives no test data. The stimulus, sizes and tolerances are this
// testbench's own.
module tb_attack_gen;
  import neurosec_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  attack_mode_e mode;
  mag_t eps, alpha, n_mag, c_mag, x;
  logic [3:0] pgd_steps;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  attack_gen dut (.*);

  function automatic int sgn(input int a); return a > 0 ? 1 : (a < 0 ? -1 : 0); endfunction
  function automatic int clip(input int v, input int lo, input int hi);
    return v < lo ? lo : (v > hi ? hi : v);
  endfunction

  function automatic int ref_model(input int m, input int n, input int c, input int e, input int a, input int s);
    int v, lo, hi;
    lo = clip(n - e, 0, 131071); hi = clip(n + e, 0, 131071);
    if (m == 1) return clip(n + e * sgn(n - c), 0, 131071);
    if (m == 2) begin
      v = n;
      for (int i = 0; i < s; i++) v = clip(v + a * sgn(v - c), lo, hi);
      return v;
    end
    return n;
  endfunction

  initial begin
    int cyc, expv, lat;
    mode = ATK_NONE; eps = 0; alpha = 0; n_mag = 0; c_mag = 0; pgd_steps = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      mode      = attack_mode_e'(t % 3);
      n_mag     = (t % 7 == 0) ? mag_t'($urandom_range(0, 50)) : mag_t'($urandom_range(0, 131071));
      c_mag     = (t % 5 == 0) ? n_mag : ((t % 11 == 0) ? mag_t'($urandom_range(0, 131071)) : mag_t'(int'(n_mag) + $urandom_range(0, 2000) - 1000));
      eps       = mag_t'($urandom_range(0, 4000));
      alpha     = mag_t'($urandom_range(0, 1500));
      pgd_steps = 4'($urandom_range(0, 15));
      start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      expv = ref_model(int'(mode), int'(n_mag), int'(c_mag), int'(eps), int'(alpha), int'(pgd_steps));
      lat  = (mode == ATK_PGD && pgd_steps != 0) ? 1 + int'(pgd_steps) : 1;
      checks += 2;
      if (int'(x) != expv) begin failures++; $display("FAIL mode %0d n %0d c %0d eps %0d a %0d s %0d: %0d exp %0d", mode, n_mag, c_mag, eps, alpha, pgd_steps, x, expv); end
      if (cyc != lat) begin failures++; $display("FAIL latency %0d exp %0d", cyc, lat); end
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

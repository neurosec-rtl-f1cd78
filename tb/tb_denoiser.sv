// tb_denoiser: random magnitudes and floors (including the edge cases
// x = floor, x = 0 and floor = 0) checked against max(x - floor, 0) one clock
// after each input.
// The paper gives no test data. The stimulus, sizes and tolerances are this
// testbench's own.
module tb_denoiser;
  import neurosec_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  mag_t x, noise_floor, d;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  denoiser dut (.*);

  initial begin
    int e;
    x = 0; noise_floor = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      x = mag_t'($urandom_range(0, 131071));
      noise_floor = (t % 4 == 0) ? x : ((t % 9 == 0) ? 0 : mag_t'($urandom_range(0, 131071)));
      if (t % 13 == 0) x = 0;
      in_valid = 1;
      e = int'(x) > int'(noise_floor) ? int'(x) - int'(noise_floor) : 0;
      @(negedge clk); in_valid = 0;
      checks += 2;
      if (!out_valid) begin failures++; $display("FAIL no out_valid"); end
      if (int'(d) != e) begin failures++; $display("FAIL d %0d exp %0d", d, e); end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL stray out_valid"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_spike_encoder: steps every channel of the encoder M times with a fixed
// random magnitude and checks that each channel produced exactly
// floor(M * rate / 65536) spikes, rate = min(mag << 3, 65535), starting from
// zeroed accumulators; then checks that clear restarts the phases.
// The paper gives no test data. The stimulus, sizes and tolerances are this
// testbench's own.
module tb_spike_encoder;
  import neurosec_pkg::*;
  localparam int N_CH = 33;
  localparam int M = 100;
  logic clk = 0, rst_n = 0, clear = 0, step = 0, spike;
  logic [$clog2(N_CH)-1:0] ch;
  mag_t mag;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  spike_encoder #(.N_CH(N_CH), .RATE_SHIFT(3)) dut (.*);

  int mags [N_CH];
  int cnt  [N_CH];

  task automatic run_and_check(input int steps);
    for (int c = 0; c < N_CH; c++) cnt[c] = 0;
    for (int s = 0; s < steps; s++)
      for (int c = 0; c < N_CH; c++) begin
        step = 1; ch = c[$clog2(N_CH)-1:0]; mag = mag_t'(mags[c]);
        #1; if (spike) cnt[c]++;
        @(negedge clk);
      end
    step = 0;
    for (int c = 0; c < N_CH; c++) begin
      longint rate, e;
      rate = longint'(mags[c]) * 8; if (rate > 65535) rate = 65535;
      e = (steps * rate) / 65536;
      checks++;
      if (cnt[c] != int'(e)) begin failures++; $display("FAIL ch %0d mag %0d: %0d spikes exp %0d", c, mags[c], cnt[c], e); end
    end
  endtask

  initial begin
    ch = 0; mag = 0;
    for (int c = 0; c < N_CH; c++)
      mags[c] = (c == 0) ? 0 : (c == 1 ? 131071 : (c == 2 ? 8192 : $urandom_range(0, 9000)));
    repeat (3) @(negedge clk); rst_n = 1;
    run_and_check(M);
    clear = 1; @(negedge clk); clear = 0;
    run_and_check(37);
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

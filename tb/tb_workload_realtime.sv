// tb_workload_realtime: the whole design at its default sizes, fed the way
// it would run in the field. Audio arrives at exactly 16 kHz against a
// 100 MHz clock, i.e. one noisy/clean sample pair every 6,250 clocks, and
// is processed at the operating point of about 5.4 dB input SNR.
// Audio: per 64-sample frame, the clean signal is three tones at random,
// mostly off-bin frequencies (so their energy leaks over many bins) with
// a random envelope. The noise is broadband (a sum of uniform variates),
// scaled per frame to put the frame's SNR at 5.395 dB. 40 frames are played;
// every fourth frame is attacked (FGSM in the first half, PGD in the second,
// eps 8000). The SNN is kept neutral (its output biases always pick "clean",
// since no trained weights exist), so detection here rests on the SNR test:
// reference 5.395 dB, allowed deviation +-3 dB.
// Checked:
//  * no sample is ever stalled: s_ready is high whenever a sample is due;
//  * every frame is decided before the next frame's samples are complete
//    (decision latency after a frame's last sample below 400,000 clocks);
//  * attacked frames are detected (SNR flag, attack, hard reset) and written
//    encrypted; clean frames are not flagged and are written in plain form.
//    The detection rate and false-positive count are printed;
//  * the SNR the design measures on clean frames lies within 1.5 dB of
//    5.395 dB, and their mean within 0.75 dB;
//  * frame, detection, hard-reset and block counters at the end; the rate
//    alarm stays off (10 detections are below the threshold of 16 per 32
//    frames).
// From the paper: the 16 kHz rate, the 100 MHz clock and the 5.395 dB SNR.
// The audio, attack schedule, attack strength and thresholds are this
// testbench's own.
module tb_workload_realtime;
  import neurosec_pkg::*;
  localparam int N = 64, NB = N / 2 + 1, NBLK = (NB + 3) / 4, F = 40, NH = 16;
  localparam int DEPTH = NH * NB + 3 * NH + NH + 3, BB = NH * NB + 3 * NH;
  localparam int PERIOD = 6250;                 // clocks per sample: 100 MHz / 16 kHz
  localparam real PI = 3.14159265358979323846;
  localparam real SNR_DB = 5.395;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic s_valid = 0, s_ready;
  sample_t s_noisy, s_clean;
  logic e_valid = 0, e_ready;
  logic [127:0] e_data = '0;
  logic w_we = 0;
  logic [$clog2(DEPTH)-1:0] w_addr;
  logic signed [7:0] w_data;
  logic mem_valid, mem_ready = 1, mem_enc;
  logic [31:0] mem_addr;
  logic [127:0] mem_data;
  logic d_start = 0, d_busy, d_done;
  logic [127:0] d_din = '0, d_dout;
  logic clr_flags = 0, dec_valid, err_fgsm, err_pgd, in_hard_reset, anomaly_alarm, policy_violation;
  decision_t dec;
  logic [15:0] hard_resets, frames, detections, blocks_written, blocks_encrypted, blocks_withheld;
  logic [2:0][7:0] snn_counts;
  always #5 clk = ~clk;

  neurosec_top dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic attack_mode_e atk_of(input int f);
    if (f % 4 != 2) return ATK_NONE;
    return f < F / 2 ? ATK_FGSM : ATK_PGD;
  endfunction

  // ---------------------------------------------------------------- audio
  int xn [F*N], xc [F*N];
  function automatic real noise_sample();
    return ($urandom_range(0, 2000) + $urandom_range(0, 2000) + $urandom_range(0, 2000)
            + $urandom_range(0, 2000)) / 2000.0 - 2.0;
  endfunction
  function automatic int clamp16(input real v);
    return v > 32767.0 ? 32767 : (v < -32768.0 ? -32768 : int'(v));
  endfunction
  initial for (int f = 0; f < F; f++) begin
    real c [N];
    real n [N];
    real fr [3], ph [3], amp [3], ec, en, k;
    amp[0] = 6000.0; amp[1] = 4000.0; amp[2] = 2500.0;
    for (int i = 0; i < 3; i++) begin
      fr[i]  = 2.0 + $urandom_range(0, 2600) / 100.0;
      ph[i]  = $urandom_range(0, 6283) / 1000.0;
      amp[i] = amp[i] * (0.6 + $urandom_range(0, 400) / 1000.0);
    end
    ec = 0; en = 0;
    for (int t = 0; t < N; t++) begin
      c[t] = 0;
      for (int i = 0; i < 3; i++) c[t] += amp[i] * $cos(2.0 * PI * fr[i] * t / N + ph[i]);
      n[t] = noise_sample();
      ec += c[t] * c[t]; en += n[t] * n[t];
    end
    k = $sqrt(ec / (en * $pow(10.0, SNR_DB / 10.0)));
    for (int t = 0; t < N; t++) begin
      xc[f * N + t] = clamp16(c[t]);
      xn[f * N + t] = clamp16(c[t] + k * n[t]);
    end
  end

  // ------------------------------------------------------------ monitors
  decision_t decs [F];
  longint    dec_at [F];
  longint    last_at [F];
  int        nd = 0, stalls = 0;
  int        enc_blocks_of [F];
  int        nblk = 0;
  longint    cyc = 0;
  initial for (int f = 0; f < F; f++) enc_blocks_of[f] = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dec_valid) begin
      if (nd < F) begin decs[nd] <= dec; dec_at[nd] <= cyc; end
      nd <= nd + 1;
    end
    if (mem_valid && mem_ready) begin
      if (nblk / NBLK < F) enc_blocks_of[nblk / NBLK] += int'(mem_enc);
      nblk <= nblk + 1;
    end
  end

  // ----------------------------------------------------------------- main
  initial begin : main
    int n_atk, n_det, n_clean, n_fp;
    real snr, snr_sum, worst;
    longint lat, max_lat;
    cfg = '0;
    cfg.attack_mode = atk_of(0);
    cfg.eps = mag_t'(8000); cfg.alpha = mag_t'(2000); cfg.pgd_steps = 4'd4; cfg.noise_floor = mag_t'(200);
    cfg.snr_ref = SNR_REF_DEFAULT; cfg.snr_dev = 16'sd768;
    cfg.anom_th = 8'd16;
    cfg.key = 128'h000102030405060708090a0b0c0d0e0f;
    w_addr = 0; w_data = 0; s_noisy = 0; s_clean = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      w_we = 1; w_addr = $clog2(DEPTH)'(a);
      w_data = (a == BB + NH) ? 8'sd100 : ((a > BB + NH) ? -8'sd100 : 8'sd0);
      @(negedge clk);
    end
    w_we = 0;
    // one sample every PERIOD clocks; the attack mode of a frame is set at
    // its middle sample: the previous frame has been decided by then, and
    // this frame's bins reach the attack stage only after its last sample
    for (int t = 0; t < F * N; t++) begin
      if (t % N == N / 2) cfg.attack_mode = atk_of(t / N);
      s_valid = 1; s_noisy = sample_t'(xn[t]); s_clean = sample_t'(xc[t]);
      @(posedge clk);
      while (!s_ready) begin stalls++; @(posedge clk); end
      if (t % N == N - 1) last_at[t / N] = cyc;
      @(negedge clk); s_valid = 0;
      repeat (PERIOD - 1) @(negedge clk);
    end
    while (nblk < F * NBLK) @(negedge clk);
    repeat (10) @(negedge clk);
    chk(stalls == 0, $sformatf("%0d clocks of input stall at 16 kHz", stalls));
    chk(nd == F, "one decision per frame");
    n_atk = 0; n_det = 0; n_clean = 0; n_fp = 0; snr_sum = 0; worst = 0; max_lat = 0;
    for (int f = 0; f < F; f++) begin
      bit atk;
      atk = (atk_of(f) != ATK_NONE);
      lat = dec_at[f] - last_at[f];
      if (lat > max_lat) max_lat = lat;
      chk(lat > 0 && lat < longint'(N) * PERIOD, $sformatf("frame %0d decision latency %0d", f, lat));
      chk(decs[f].snn_class == CLS_CLEAN, $sformatf("frame %0d neutral SNN", f));
      chk(decs[f].attack == atk && decs[f].snr_flag == atk, $sformatf("frame %0d decision (snr %f)", f, decs[f].snr / 256.0));
      chk(enc_blocks_of[f] == (atk ? NBLK : 0), $sformatf("frame %0d encrypted blocks %0d", f, enc_blocks_of[f]));
      if (atk) begin n_atk++; n_det += decs[f].attack; end
      else begin
        n_clean++; n_fp += decs[f].attack;
        snr = decs[f].snr / 256.0;
        snr_sum += snr;
        if ((snr - SNR_DB) * (snr - SNR_DB) > worst * worst) worst = snr - SNR_DB;
        chk(snr > SNR_DB - 1.5 && snr < SNR_DB + 1.5, $sformatf("frame %0d clean SNR %f dB", f, snr));
      end
    end
    chk(snr_sum / n_clean > SNR_DB - 0.75 && snr_sum / n_clean < SNR_DB + 0.75, "mean clean SNR");
    $display("input 16 kHz, %0d frames: %0d attacked, %0d detected; %0d clean, %0d false positives",
             F, n_atk, n_det, n_clean, n_fp);
    $display("clean-frame SNR measured: mean %f dB, worst deviation %f dB", snr_sum / n_clean, worst);
    $display("decision latency after a frame's last sample: at most %0d clocks (budget %0d)", max_lat, N * PERIOD);
    chk(frames == 16'(F) && detections == 16'(n_atk) && hard_resets == 16'(n_atk), "frame / detection / hard-reset counters");
    chk(blocks_written == 16'(F * NBLK) && blocks_encrypted == 16'(n_atk * NBLK) && blocks_withheld == 0, "block counters");
    chk(!anomaly_alarm && !policy_violation && err_fgsm == 1'b0 && err_pgd == 1'b0, "no alarm, no SNN error flags");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (F * N * PERIOD + 2000000) @(posedge clk);
    failures++;
    $display("watchdog: %0d frames decided, %0d blocks written", nd, nblk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

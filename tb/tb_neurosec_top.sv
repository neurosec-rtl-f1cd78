// tb_neurosec_top: end-to-end run of the whole design at its default sizes
// (64-point frames, 16 hidden neurons, 16 time steps, 32-frame window).
// Audio: the clean signal is two tones on exact bins (4 and 9, amplitudes
// 8000 and 5000); the noisy signal adds a third tone (bin 13, amplitude 5070),
// giving an input SNR of 5.39 dB, i.e. at the design's reference SNR.
// 36 frames are played with a per-frame schedule of simulated attack and of
// SNN verdict (the SNN is steered through its output biases, since no
// trained weights are available):
//   0-3 clean | 4-9 FGSM, SNN FGSM | 10-15 PGD, SNN PGD | 16-19 no attack,
//   SNN FGSM | 20-23 FGSM, SNN clean | 24-31 clean, with the audio sent
//   as AES-encrypted blocks of four sample pairs (encrypted here with an
//   aes128_enc core, decrypted by the design) | 32-35 clean, after the
//   anomaly alarm of the first 32-frame window (threshold 16) has locked
//   the output to encryption.
// Checked: every decision (attack, SNR flag, class, error flags), the SNR of
// unattacked frames against a floating-point reference, every written block
// (address, encryption tag; encrypted blocks are decrypted through the
// design's own decryption port) against a floating-point model of
// STFT -> attack -> denoise -> mixer, sticky flags, counters, and the frame
// period against real time (64 samples at 16 kHz = 400,000 clocks at
// 100 MHz). Input and memory backpressure are applied at random.
// Every mechanism listed in MECH must occur at least once.
// From the paper: the 16 kHz rate, the 100 MHz clock, the 5.39 dB SNR
// operating point and the batch of 32. The audio, schedule and tolerances
// are this testbench's own.
module tb_neurosec_top;
  import neurosec_pkg::*;
  localparam int N = 64, NB = N / 2 + 1, NBLK = (NB + 3) / 4, F = 36, NH = 16;
  localparam int DEPTH = NH * NB + 3 * NH + NH + 3, BB = NH * NB + 3 * NH;
  localparam real PI = 3.14159265358979323846;
  localparam int FLOOR = 200, EPS = 8000, ALPHA = 1500, STEPS = 4;

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
  logic [127:0] d_din, d_dout;
  logic clr_flags = 0, dec_valid, err_fgsm, err_pgd, in_hard_reset, anomaly_alarm, policy_violation;
  decision_t dec;
  logic [15:0] hard_resets, frames, detections, blocks_written, blocks_encrypted, blocks_withheld;
  logic [2:0][7:0] snn_counts;
  always #5 clk = ~clk;

  neurosec_top dut (.*);

  // encrypts the audio of frames ENC_LO..ENC_HI-1 before it enters the design
  localparam int ENC_LO = 24, ENC_HI = 32;
  logic te_start = 0, te_busy, te_done;
  logic [127:0] te_din = '0, te_dout;
  aes128_enc u_tenc (.clk, .rst_n, .start(te_start), .key(cfg.key), .din(te_din),
                     .busy(te_busy), .done(te_done), .dout(te_dout));

  int checks = 0, failures = 0;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------ schedule
  attack_mode_e atk_of [F];
  int cls_of [F];
  initial for (int f = 0; f < F; f++) begin
    atk_of[f] = (f >= 4 && f < 10) || (f >= 20 && f < 24) ? ATK_FGSM : (f >= 10 && f < 16 ? ATK_PGD : ATK_NONE);
    cls_of[f] = (f >= 4 && f < 10) || (f >= 16 && f < 20) ? 1 : (f >= 10 && f < 16 ? 2 : 0);
  end

  // ---------------------------------------------------------------- audio
  int xn [F*N], xc [F*N];
  initial for (int t = 0; t < F * N; t++) begin
    real c, n;
    c = 8000.0 * $cos(2.0 * PI * 4.0 * t / N + 0.3) + 5000.0 * $sin(2.0 * PI * 9.0 * t / N + 1.1);
    n = 5070.0 * $cos(2.0 * PI * 13.0 * t / N + 2.0);
    xc[t] = int'(c);
    xn[t] = int'(c) + int'(n);
  end

  // ------------------------------------------------------- mechanism tally
  typedef enum int {M_PLAIN, M_ENC_THREAT, M_ENC_LOCK, M_SNR_FLAG, M_FGSM_ERR, M_PGD_ERR,
                    M_SNN_ONLY, M_HARD_RESET, M_ANOM_ALARM, M_IN_STALL, M_MEM_STALL,
                    M_DECRYPT, M_ENC_INPUT, M_NUM} mech_e;
  int mech [M_NUM];
  initial for (int m = 0; m < M_NUM; m++) mech[m] = 0;

  always @(posedge clk) begin
    if (s_valid && !s_ready) mech[M_IN_STALL]++;
    if (mem_valid && !mem_ready) mech[M_MEM_STALL]++;
    if (e_valid && e_ready) mech[M_ENC_INPUT]++;
    if (rst_n && in_hard_reset) mech[M_HARD_RESET]++;
  end

  // ------------------------------------------------------------ decisions
  decision_t decs [F];
  bit        secure [F];
  longint    dec_time [F];
  int        nd = 0;
  always @(posedge clk) if (dec_valid) begin
    decs[nd]     <= dec;
    secure[nd]   <= dec.attack || anomaly_alarm;
    dec_time[nd] <= $time / 10;
    nd           <= nd + 1;
  end

  // reprogram the SNN verdict and attack for the next frame after a decision
  task automatic program_frame(input int f);
    cfg.attack_mode = atk_of[f];
    for (int o = 0; o < 3; o++) begin
      @(negedge clk);
      w_we = 1; w_addr = $clog2(DEPTH)'(BB + NH + o);
      w_data = (o == cls_of[f]) ? 8'sd100 : -8'sd100;
    end
    @(negedge clk); w_we = 0;
  endtask

  initial begin : control
    @(posedge rst_n);
    for (int f = 1; f < F; f++) begin
      @(posedge clk); while (!dec_valid) @(posedge clk);
      program_frame(f);
    end
  end

  // --------------------------------------------------------------- memory
  logic [127:0] blk_data [F*NBLK];
  bit           blk_enc  [F*NBLK];
  int           nblk = 0;
  always @(posedge clk) begin
    mem_ready <= ($urandom_range(0, 3) != 0);
    if (mem_valid && mem_ready) begin
      if (nblk < F * NBLK) begin
        blk_data[nblk] = mem_data;
        blk_enc[nblk]  = mem_enc;
        if (mem_addr != 32'(nblk * 16)) begin failures++; $display("FAIL address %h at block %0d", mem_addr, nblk); end
        checks++;
      end
      nblk++;
    end
  end

  // ------------------------------------------------------- reference model
  function automatic real fabs(input real v); return v < 0 ? -v : v; endfunction

  task automatic dft(input int f, input bit noisy, input int k, output real re, output real im);
    re = 0; im = 0;
    for (int n = 0; n < N; n++) begin
      int s;
      s = noisy ? xn[f * N + n] : xc[f * N + n];
      re += s * $cos(2.0 * PI * k * n / N) / N;
      im -= s * $sin(2.0 * PI * k * n / N) / N;
    end
  endtask

  function automatic real attacked(input attack_mode_e m, input real n, input real c);
    real v, lo, hi, s;
    s = (n > c) ? 1.0 : -1.0;
    if (m == ATK_FGSM) begin v = n + EPS * s; return v < 0 ? 0 : v; end
    if (m == ATK_PGD) begin
      lo = n - EPS < 0 ? 0 : n - EPS; hi = n + EPS;
      v = n;
      for (int i = 0; i < STEPS; i++) begin
        v = v + ALPHA * ((v > c) ? 1.0 : -1.0);
        v = v < lo ? lo : (v > hi ? hi : v);
      end
      return v;
    end
    return n;
  endfunction

  task automatic decrypt(input logic [127:0] ct, output logic [127:0] pt);
    @(negedge clk); d_din = ct; d_start = 1;
    @(negedge clk); d_start = 0;
    while (!d_done) @(negedge clk);
    pt = d_dout;
    mech[M_DECRYPT]++;
  endtask

  task automatic check_frame(input int f);
    logic [127:0] pt;
    real snr_s, snr_e;
    for (int b = 0; b < NBLK; b++) begin
      int idx;
      idx = f * NBLK + b;
      chk(blk_enc[idx] == secure[f], $sformatf("frame %0d block %0d encryption tag", f, b));
      if (blk_enc[idx]) decrypt(blk_data[idx], pt); else pt = blk_data[idx];
      for (int w = 0; w < 4; w++) begin
        int k;
        real nr, ni, cr, ci, nm, cm, ph, x, d, er, ei;
        logic signed [15:0] gre, gim;
        k = 4 * b + w;
        {gre, gim} = pt[127 - 32 * w -: 32];
        if (k >= NB) begin
          chk(gre == 0 && gim == 0, "padding word");
          continue;
        end
        dft(f, 1, k, nr, ni); dft(f, 0, k, cr, ci);
        nm = $sqrt(nr * nr + ni * ni); cm = $sqrt(cr * cr + ci * ci);
        if (atk_of[f] != ATK_NONE && fabs(nm - cm) < 4.0) continue;   // attack direction undefined
        x = attacked(atk_of[f], nm, cm);
        d = x > FLOOR ? x - FLOOR : 0;
        if (nm >= 50.0) begin
          ph = $atan2(ni, nr);
          er = d * $cos(ph); ei = d * $sin(ph);
          er = er > 32767 ? 32767 : (er < -32768 ? -32768 : er);
          ei = ei > 32767 ? 32767 : (ei < -32768 ? -32768 : ei);
          chk(fabs(gre - er) <= 8.0 + 0.002 * d && fabs(gim - ei) <= 8.0 + 0.002 * d,
              $sformatf("frame %0d bin %0d output %0d %0d exp %f %f", f, k, gre, gim, er, ei));
        end else if (d < 23000.0) begin
          chk(fabs($sqrt(real'(gre) * gre + real'(gim) * gim) - d) <= 8.0 + 0.002 * d,
              $sformatf("frame %0d bin %0d output magnitude exp %f", f, k, d));
        end
      end
    end
    // decision
    chk(decs[f].snn_class == snn_class_e'(cls_of[f]), $sformatf("frame %0d class %0d", f, decs[f].snn_class));
    chk(decs[f].snr_flag == (atk_of[f] != ATK_NONE), $sformatf("frame %0d snr flag (snr %0d)", f, decs[f].snr));
    chk(decs[f].attack == (atk_of[f] != ATK_NONE || cls_of[f] != 0), $sformatf("frame %0d attack", f));
    chk(decs[f].fgsm_err == (decs[f].attack && cls_of[f] == 1) && decs[f].pgd_err == (decs[f].attack && cls_of[f] == 2),
        $sformatf("frame %0d error flags", f));
    if (atk_of[f] == ATK_NONE) begin
      snr_s = 0; snr_e = 0;
      for (int k = 0; k < NB; k++) begin
        real nr, ni, cr, ci;
        dft(f, 1, k, nr, ni); dft(f, 0, k, cr, ci);
        snr_s += cr * cr + ci * ci;
        snr_e += (nr - cr) * (nr - cr) + (ni - ci) * (ni - ci);
      end
      chk(fabs(real'(decs[f].snr) / 256.0 - 10.0 * $log10(snr_s / snr_e)) < 0.5,
          $sformatf("frame %0d snr %f exp %f", f, real'(decs[f].snr) / 256.0, 10.0 * $log10(snr_s / snr_e)));
    end
    if (!decs[f].attack && !secure[f]) mech[M_PLAIN]++;
    if (decs[f].attack) mech[M_ENC_THREAT]++;
    if (!decs[f].attack && secure[f]) mech[M_ENC_LOCK]++;
    if (decs[f].snr_flag) mech[M_SNR_FLAG]++;
    if (decs[f].fgsm_err) mech[M_FGSM_ERR]++;
    if (decs[f].pgd_err) mech[M_PGD_ERR]++;
    if (decs[f].attack && !decs[f].snr_flag) mech[M_SNN_ONLY]++;
  endtask

  // ----------------------------------------------------------------- main
  initial begin : main
    int t, exp_det;
    longint maxp;
    cfg = '0;
    cfg.attack_mode = atk_of[0];
    cfg.eps = mag_t'(EPS); cfg.alpha = mag_t'(ALPHA); cfg.pgd_steps = 4'(STEPS); cfg.noise_floor = mag_t'(FLOOR);
    cfg.snr_ref = SNR_REF_DEFAULT; cfg.snr_dev = 16'sd768;    // 5.395 dB +- 3 dB
    cfg.anom_th = 8'd16;
    cfg.key = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    w_addr = 0; w_data = 0; s_noisy = 0; s_clean = 0; d_din = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // zero every weight and bias, then steer frame 0
    for (int a = 0; a < DEPTH; a++) begin
      w_we = 1; w_addr = $clog2(DEPTH)'(a); w_data = 0; @(negedge clk);
    end
    for (int o = 0; o < 3; o++) begin
      w_addr = $clog2(DEPTH)'(BB + NH + o); w_data = (o == cls_of[0]) ? 8'sd100 : -8'sd100; @(negedge clk);
    end
    w_we = 0;
    // stream all samples, with random gaps
    t = 0;
    while (t < F * N) begin
      if (t / N >= ENC_LO && t / N < ENC_HI) begin
        // four sample pairs per encrypted block
        logic [127:0] pt;
        s_valid = 0;
        @(negedge clk);
        cfg.in_encrypted = 1'b1;
        for (int w = 0; w < 4; w++) pt[127 - 32 * w -: 32] = {16'(xn[t + w]), 16'(xc[t + w])};
        te_din = pt; te_start = 1;
        @(negedge clk); te_start = 0;
        while (!te_done) @(negedge clk);
        e_data = te_dout; e_valid = 1;
        while (!e_ready) @(negedge clk);
        @(posedge clk); #1 e_valid = 0;
        t += 4;
        if (t / N == ENC_HI) begin
          // back to the plain stream once the last pairs have been taken
          @(negedge clk);
          while (!e_ready) @(negedge clk);
          cfg.in_encrypted = 1'b0;
        end
      end else begin
        s_valid = ($urandom_range(0, 4) != 0);
        s_noisy = sample_t'(xn[t]); s_clean = sample_t'(xc[t]);
        @(posedge clk);
        if (s_valid && s_ready) t++;
        #1;
      end
    end
    s_valid = 0;
    while (nblk < F * NBLK) @(negedge clk);
    repeat (10) @(negedge clk);
    if (anomaly_alarm) mech[M_ANOM_ALARM]++;
    for (int f = 0; f < F; f++) check_frame(f);
    // counters and sticky flags
    exp_det = 0;
    for (int f = 0; f < F; f++) exp_det += (atk_of[f] != ATK_NONE || cls_of[f] != 0);
    chk(frames == 16'(F) && detections == 16'(exp_det) && hard_resets == 16'(exp_det), "frame / detection / hard-reset counters");
    chk(blocks_written == 16'(F * NBLK) && blocks_withheld == 0 && !policy_violation, "block counters");
    chk(anomaly_alarm && err_fgsm && err_pgd, "sticky alarm and error flags");
    for (int f = 0; f < 32; f++) chk(secure[f] == (atk_of[f] != ATK_NONE || cls_of[f] != 0), "no lock before window end");
    clr_flags = 1; @(negedge clk); clr_flags = 0;
    chk(!anomaly_alarm && !err_fgsm && !err_pgd, "clr_flags");
    // real-time budget: a frame must be decided within the time its 64 samples last
    maxp = 0;
    for (int f = 8; f < F; f++) if (dec_time[f] - dec_time[f - 1] > maxp) maxp = dec_time[f] - dec_time[f - 1];
    $display("frame period (steady state): %0d clocks", maxp);
    chk(maxp <= N * 6250, "frame period within real time at 16 kHz / 100 MHz");
    for (int m = 0; m < M_NUM; m++) begin
      mech_e me;
      me = mech_e'(m);
      $display("mechanism %-14s : %0d", me.name(), mech[m]);
      chk(mech[m] > 0, $sformatf("mechanism %s never happened", me.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog: %0d frames decided, %0d blocks written", nd, nblk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

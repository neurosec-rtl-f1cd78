// neurosec_top: FPGA audio-security pipeline. Noisy audio and its clean
// reference stream in from external memory; every frame is transformed
// (STFT), optionally perturbed by a simulated FGSM/PGD attack, checked by
// the neuromorphic processor (SNR perturbation detector + SNN detector),
// denoised, recombined with the noisy argument and written back to memory:
// encrypted with AES-128 when the frame was judged attacked (or the anomaly
// detector has locked the output), in plain form otherwise. A separate AES
// decryptor restores encrypted blocks read back by the host.
//
// Per-bin sequencing (one bin in flight, bins of both transforms in step):
//   take bin -> attack_gen -> denoiser -> both mixers (composite for the SNR
//   test, denoised output) -> bin into neuro_proc and into the frame buffer.
// After the last bin of a frame the sequencer waits until neuro_proc has
// decided and the security module has sent the whole frame, then takes the
// next frame's bins. Meanwhile the STFTs keep buffering input samples.
//
// Interfaces: sample stream (s_valid/s_ready, one noisy and one clean 16-bit
// sample per transfer) or, when cfg.in_encrypted is set, AES-encrypted
// blocks of four sample pairs (e_valid/e_ready/e_data, see input_decrypt;
// switch the source only between blocks), SNN weight write port, 128-bit
// memory write stream with byte addresses, decryption port, configuration
// struct and status.
// Timing at the default sizes: about 12,540 clocks per 64-sample frame, far
// inside the 400,000 clocks that 64 samples last at 16 kHz with a 100 MHz
// clock. The DDR4 memory and its controller are outside this module.
// The block order follows the paper's FPGA diagram: memory, transform,
// attack, perturbation detection inside the neuromorphic processor, AES,
// anomaly detection, memory. The per-frame flow follows its algorithm
// description. The encrypted input follows its statement that audio is
// "securely transmitted and decrypted" before processing. Bin-serial
// sequencing, the interfaces, the source switch and the form of the
// decryption port are this design's choices.
module neurosec_top
  import neurosec_pkg::*;
#(
  parameter int unsigned N_FFT     = 64,
  parameter int unsigned N_HID     = 16,
  parameter int unsigned N_LAYERS  = 1,
  parameter int unsigned T_STEPS   = 16,
  parameter int unsigned WINDOW    = 32,
  parameter logic [31:0] BASE_ADDR = 32'h0,
  localparam int unsigned NB       = N_FFT / 2 + 1,
  localparam int unsigned DEPTH    = N_HID * NB + (N_LAYERS - 1) * N_HID * N_HID + 3 * N_HID
                                   + N_LAYERS * N_HID + 3,
  localparam int unsigned WA_W     = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  // audio from memory
  input  logic              s_valid,
  output logic              s_ready,
  input  sample_t           s_noisy,
  input  sample_t           s_clean,
  // audio from memory as AES-128 blocks of four sample pairs
  input  logic              e_valid,
  output logic              e_ready,
  input  logic [127:0]      e_data,
  // SNN weight / bias load
  input  logic              w_we,
  input  logic [WA_W-1:0]   w_addr,
  input  logic signed [7:0] w_data,
  // write-back to memory
  output logic              mem_valid,
  input  logic              mem_ready,
  output logic [31:0]       mem_addr,
  output logic [127:0]      mem_data,
  output logic              mem_enc,
  // decryption of data read back
  input  logic              d_start,
  input  logic [127:0]      d_din,
  output logic              d_busy,
  output logic              d_done,
  output logic [127:0]      d_dout,
  // status
  input  logic              clr_flags,
  output logic              dec_valid,
  output decision_t         dec,
  output logic              err_fgsm,
  output logic              err_pgd,
  output logic              in_hard_reset,
  output logic [15:0]       hard_resets,
  output logic              anomaly_alarm,
  output logic              policy_violation,
  output logic [15:0]       frames,
  output logic [15:0]       detections,
  output logic [15:0]       blocks_written,
  output logic [15:0]       blocks_encrypted,
  output logic [15:0]       blocks_withheld,
  output logic [2:0][7:0]   snn_counts
);

  localparam int unsigned K_W = $clog2(N_FFT);

  // ---------------------------------------------------------------- STFTs
  logic   n_in_ready, c_in_ready;
  logic   n_valid, c_valid, n_last, c_last, take;
  mag_t   n_mag, c_mag;
  phase_t n_ph, c_ph;
  coef_t  n_re, n_im, c_re, c_im;
  logic [K_W-1:0] n_k, c_k;

  // sample source: plain stream, or decrypted blocks when cfg.in_encrypted
  logic    x_valid, x_ready, e_s_valid, e_in_ready;
  sample_t x_noisy, x_clean, e_noisy, e_clean;

  input_decrypt u_in_dec (
    .clk, .rst_n, .key(cfg.key),
    .in_valid(e_valid && cfg.in_encrypted), .in_ready(e_in_ready), .in_data(e_data),
    .out_valid(e_s_valid), .out_ready(x_ready && cfg.in_encrypted),
    .out_noisy(e_noisy), .out_clean(e_clean)
  );

  assign x_ready = n_in_ready && c_in_ready;
  assign x_valid = cfg.in_encrypted ? e_s_valid : s_valid;
  assign x_noisy = cfg.in_encrypted ? e_noisy : s_noisy;
  assign x_clean = cfg.in_encrypted ? e_clean : s_clean;
  assign s_ready = x_ready && !cfg.in_encrypted;
  assign e_ready = e_in_ready && cfg.in_encrypted;

  stft #(.N(N_FFT)) u_stft_noisy (
    .clk, .rst_n, .in_valid(x_valid && x_ready), .in_ready(n_in_ready), .in_sample(x_noisy),
    .out_valid(n_valid), .out_ready(take), .out_mag(n_mag), .out_phase(n_ph),
    .out_re(n_re), .out_im(n_im), .out_k(n_k), .out_last(n_last)
  );

  stft #(.N(N_FFT)) u_stft_clean (
    .clk, .rst_n, .in_valid(x_valid && x_ready), .in_ready(c_in_ready), .in_sample(x_clean),
    .out_valid(c_valid), .out_ready(take), .out_mag(c_mag), .out_phase(c_ph),
    .out_re(c_re), .out_im(c_im), .out_k(c_k), .out_last(c_last)
  );

  // ------------------------------------------------------------ sequencer
  typedef enum logic [2:0] {Q_WAIT, Q_ATK, Q_DEN, Q_MIX, Q_PUSH, Q_FRAME} qst_e;
  qst_e st;

  // bin register: the noisy argument and clean spectrum wait here while the
  // magnitude goes through the attack, denoise and mix stages
  phase_t b_ph;
  coef_t  b_cre, b_cim;
  logic [K_W-1:0] b_k;
  logic   b_last;
  mag_t   b_x;
  logic   mix_y_done_q, mix_o_done_q;

  assign take = (st == Q_WAIT) && n_valid && c_valid;

  logic atk_done, atk_busy;
  mag_t atk_x;
  mag_t b_nmag, b_cmag;

  attack_gen u_attack (
    .clk, .rst_n, .start(st == Q_ATK), .mode(cfg.attack_mode), .eps(cfg.eps),
    .alpha(cfg.alpha), .pgd_steps(cfg.pgd_steps), .n_mag(b_nmag), .c_mag(b_cmag),
    .busy(atk_busy), .done(atk_done), .x(atk_x)
  );

  logic den_valid;
  mag_t den_d;
  denoiser u_denoise (
    .clk, .rst_n, .in_valid(atk_done), .x(atk_x), .noise_floor(cfg.noise_floor),
    .out_valid(den_valid), .d(den_d)
  );

  logic mix_y_busy, mix_y_done, mix_o_busy, mix_o_done;
  cmp_t y_re, y_im, o_re, o_im;

  sft_mixer u_mix_comp (
    .clk, .rst_n, .start(den_valid), .mag(b_x), .phase(b_ph),
    .busy(mix_y_busy), .done(mix_y_done), .re(y_re), .im(y_im)
  );

  sft_mixer u_mix_out (
    .clk, .rst_n, .start(den_valid), .mag(den_d), .phase(b_ph),
    .busy(mix_o_busy), .done(mix_o_done), .re(o_re), .im(o_im)
  );

  logic push;
  assign push = (st == Q_PUSH);

  // ---------------------------------------------------- neuromorphic core
  logic np_busy;
  neuro_proc #(.N_IN(NB), .N_HID(N_HID), .N_LAYERS(N_LAYERS), .T_STEPS(T_STEPS)) u_np (
    .clk, .rst_n, .snr_ref(cfg.snr_ref), .snr_dev(cfg.snr_dev),
    .bin_valid(push), .bin_k($clog2(NB)'(b_k)), .bin_last(b_last), .x_mag(b_x),
    .y_re, .y_im, .c_re(b_cre), .c_im(b_cim),
    .w_we, .w_addr, .w_data,
    .clr_flags, .busy(np_busy), .dec_valid, .dec, .err_fgsm, .err_pgd,
    .in_hard_reset, .hard_resets, .snn_counts
  );

  // ------------------------------------------------------ security module
  logic         sm_busy, sm_valid, sm_ready, sm_enc, sm_last, sm_frame_done;
  logic [127:0] sm_data;
  security_module #(.NB(NB)) u_sec (
    .clk, .rst_n, .key(cfg.key),
    .w_valid(push), .w_idx($clog2(NB)'(b_k)), .w_re(o_re), .w_im(o_im),
    .dec_valid, .secure(dec.attack || anomaly_alarm),
    .busy(sm_busy), .out_valid(sm_valid), .out_ready(sm_ready), .out_data(sm_data),
    .out_enc(sm_enc), .out_last(sm_last), .frame_done(sm_frame_done)
  );

  // ----------------------------------------------------- anomaly detector
  anomaly_detector #(.WINDOW(WINDOW), .ADDR_W(32), .BASE_ADDR(BASE_ADDR)) u_anom (
    .clk, .rst_n, .anom_th(cfg.anom_th), .clr(clr_flags),
    .dec_valid, .dec_attack(dec.attack),
    .in_valid(sm_valid), .in_ready(sm_ready), .in_data(sm_data), .in_enc(sm_enc),
    .mem_valid, .mem_ready, .mem_addr, .mem_data, .mem_enc,
    .alarm(anomaly_alarm), .violation(policy_violation),
    .frames, .detections, .blocks(blocks_written), .enc_blocks(blocks_encrypted),
    .withheld(blocks_withheld)
  );

  // ---------------------------------------------------------- decryption
  aes128_dec u_dec (
    .clk, .rst_n, .start(d_start), .key(cfg.key), .din(d_din),
    .busy(d_busy), .done(d_done), .dout(d_dout)
  );

  // ------------------------------------------------------ sequencer FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= Q_WAIT; b_ph <= '0; b_cre <= '0; b_cim <= '0; b_k <= '0; b_last <= 1'b0;
      b_x <= '0; b_nmag <= '0; b_cmag <= '0; mix_y_done_q <= 1'b0; mix_o_done_q <= 1'b0;
    end else begin
      unique case (st)
        Q_WAIT: if (take) begin
          b_nmag <= n_mag;
          b_cmag <= c_mag;
          b_ph   <= n_ph;
          b_cre  <= c_re;
          b_cim  <= c_im;
          b_k    <= n_k;
          b_last <= n_last;
          st     <= Q_ATK;
        end
        Q_ATK: st <= Q_DEN;                 // attack_gen started this clock
        Q_DEN: if (atk_done) begin
          b_x <= atk_x;
          st  <= Q_MIX;                     // mixers start with den_valid
        end
        Q_MIX: begin
          if (mix_y_done) mix_y_done_q <= 1'b1;
          if (mix_o_done) mix_o_done_q <= 1'b1;
          if ((mix_y_done || mix_y_done_q) && (mix_o_done || mix_o_done_q)) st <= Q_PUSH;
        end
        Q_PUSH: begin
          mix_y_done_q <= 1'b0;
          mix_o_done_q <= 1'b0;
          st <= b_last ? Q_FRAME : Q_WAIT;
        end
        Q_FRAME: if (sm_frame_done) st <= Q_WAIT;
        default: st <= Q_WAIT;
      endcase
    end
  end

  // the two transforms run in lock step
  assert property (@(posedge clk) disable iff (!rst_n)
                   take |-> (n_k == c_k) && (n_last == c_last));
  // bins are only offered to the processor while it collects a frame
  assert property (@(posedge clk) disable iff (!rst_n) push |-> !np_busy && !sm_busy);

endmodule

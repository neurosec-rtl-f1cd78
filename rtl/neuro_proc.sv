// neuro_proc: the neuromorphic processor. It watches each frame twice:
//  * the perturbation detector measures the frame's SNR against the clean
//    reference and flags a significant deviation, and
//  * the SNN detector classifies the frame's attacked magnitudes as clean,
//    FGSM or PGD.
// A frame is judged attacked when either fires. The decision sets the sticky
// error flags err_fgsm / err_pgd according to the SNN class (a frame flagged
// by the SNR test alone is reported through dec.snr_flag), and an attacked
// frame sends the processor into a one-clock HARD_RESET state that clears
// every SNN membrane, the spike encoder phases and the SNR accumulators.
// Interface: bins arrive as single-cycle bin_valid pulses (bin index,
// last flag, attacked magnitude, composite and clean spectra) while busy is
// low; busy is high from the last bin of a frame until its decision (and hard
// reset) is over. dec_valid pulses once per frame with the decision.
// Timing: decision 3 + SNN frame time clocks after the last bin.
// From the paper: the perturbation detector and the SNN detector working
// together, the hard reset on an attack, and the FGSM and PGD error flags.
// This design's own choices: combining the two verdicts by OR, the length
// of the hard reset and what it clears, and the report of an SNR-only
// detection.
module neuro_proc
  import neurosec_pkg::*;
#(
  parameter int unsigned N_IN    = 33,
  parameter int unsigned N_HID    = 16,
  parameter int unsigned N_LAYERS = 1,
  parameter int unsigned T_STEPS  = 16,
  parameter int unsigned W_W     = 8,
  localparam int unsigned N_OUT  = 3,
  localparam int unsigned DEPTH  = N_HID * N_IN + (N_LAYERS - 1) * N_HID * N_HID + N_OUT * N_HID
                                  + N_LAYERS * N_HID + N_OUT,
  localparam int unsigned WA_W   = $clog2(DEPTH),
  localparam int unsigned FA_W   = $clog2(N_IN)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  snr_t                  snr_ref,
  input  snr_t                  snr_dev,
  // bins of the current frame
  input  logic                  bin_valid,
  input  logic [FA_W-1:0]       bin_k,
  input  logic                  bin_last,
  input  mag_t                  x_mag,
  input  cmp_t                  y_re,
  input  cmp_t                  y_im,
  input  coef_t                 c_re,
  input  coef_t                 c_im,
  // weight memory load
  input  logic                  w_we,
  input  logic [WA_W-1:0]       w_addr,
  input  logic signed [W_W-1:0] w_data,
  // status
  input  logic                  clr_flags,
  output logic                  busy,
  output logic                  dec_valid,
  output decision_t             dec,
  output logic                  err_fgsm,
  output logic                  err_pgd,
  output logic                  in_hard_reset,
  output logic [15:0]           hard_resets,
  output logic [N_OUT-1:0][7:0] snn_counts
);

  typedef enum logic [2:0] {P_COLLECT, P_WAIT_SNR, P_SNN, P_DECIDE, P_HRST} pst_e;
  pst_e st;

  logic       pd_valid, pd_flag, snr_flag_q;
  snr_t       pd_snr, snr_q;
  logic       snn_start, snn_busy, snn_done;
  snn_class_e snn_cls;
  logic       hrst;

  assign hrst = (st == P_HRST);

  perturbation_detector u_pd (
    .clk, .rst_n, .clear(hrst),
    .bin_valid(bin_valid && st == P_COLLECT), .bin_last,
    .y_re, .y_im, .c_re, .c_im, .snr_ref, .snr_dev,
    .res_valid(pd_valid), .snr(pd_snr), .flag(pd_flag)
  );

  snn_detector #(.N_IN(N_IN), .N_HID(N_HID), .N_LAYERS(N_LAYERS), .N_OUT(N_OUT), .T_STEPS(T_STEPS), .W_W(W_W)) u_snn (
    .clk, .rst_n, .w_we, .w_addr, .w_data,
    .f_we(bin_valid && st == P_COLLECT), .f_addr(bin_k), .f_data(x_mag),
    .start(snn_start), .hard_reset(hrst), .busy(snn_busy), .done(snn_done),
    .cls(snn_cls), .counts(snn_counts)
  );

  assign snn_start = (st == P_WAIT_SNR) && pd_valid;

  logic attack;
  assign attack = snr_flag_q || (snn_cls != CLS_CLEAN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_COLLECT; snr_flag_q <= 1'b0; snr_q <= '0;
      dec_valid <= 1'b0; dec <= '0; err_fgsm <= 1'b0; err_pgd <= 1'b0; hard_resets <= '0;
    end else begin
      dec_valid <= 1'b0;
      if (clr_flags) begin
        err_fgsm <= 1'b0;
        err_pgd  <= 1'b0;
      end
      unique case (st)
        P_COLLECT:  if (bin_valid && bin_last) st <= P_WAIT_SNR;
        P_WAIT_SNR: if (pd_valid) begin
          snr_flag_q <= pd_flag;
          snr_q      <= pd_snr;
          st         <= P_SNN;
        end
        P_SNN:      if (snn_done) st <= P_DECIDE;
        P_DECIDE: begin
          dec_valid     <= 1'b1;
          dec.attack    <= attack;
          dec.snr_flag  <= snr_flag_q;
          dec.fgsm_err  <= attack && snn_cls == CLS_FGSM;
          dec.pgd_err   <= attack && snn_cls == CLS_PGD;
          dec.snn_class <= snn_cls;
          dec.snr       <= snr_q;
          if (attack && snn_cls == CLS_FGSM) err_fgsm <= 1'b1;
          if (attack && snn_cls == CLS_PGD)  err_pgd  <= 1'b1;
          st <= attack ? P_HRST : P_COLLECT;
        end
        P_HRST: begin
          hard_resets <= hard_resets + 16'd1;
          st          <= P_COLLECT;
        end
        default: st <= P_COLLECT;
      endcase
    end
  end

  assign busy          = (st != P_COLLECT);
  assign in_hard_reset = hrst;

  // the SNN runs only between the SNR result and the decision
  property p_snn_in_window;
    @(posedge clk) disable iff (!rst_n) snn_busy |-> (st == P_SNN);
  endproperty
  assert property (p_snn_in_window);

endmodule

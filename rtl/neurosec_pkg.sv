// neurosec_pkg: types and constants shared by the audio-security datapath.
// Samples are 16-bit signed PCM (16 kHz audio). Spectrum bins leave the
// transform as 16-bit signed real/imaginary parts, magnitudes are 17-bit
// unsigned and arguments are 16-bit binary angles (65536 units per turn, so
// angle arithmetic wraps for free). The mixer output keeps 18 bits so that a
// full-scale magnitude at any angle cannot overflow.
// The paper gives the 16-bit sample width and the 5.395 dB SNR, used here as
// the default SNR reference. Every other width and format is this design's
// choice.
package neurosec_pkg;

  localparam int unsigned SAMPLE_W = 16;  // PCM resolution
  localparam int unsigned COEF_W   = 16;  // real / imaginary part of a bin
  localparam int unsigned MAG_W    = 17;  // bin magnitude, unsigned
  localparam int unsigned PH_W     = 16;  // bin argument, binary angle
  localparam int unsigned CMP_W    = 18;  // mixer output (real / imaginary)
  localparam int unsigned SNR_W    = 16;  // SNR in dB, signed Q8.8

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [COEF_W-1:0]   coef_t;
  typedef logic        [MAG_W-1:0]    mag_t;
  typedef logic        [PH_W-1:0]     phase_t;
  typedef logic signed [CMP_W-1:0]    cmp_t;
  typedef logic signed [SNR_W-1:0]    snr_t;

  // Which perturbation the attack module synthesises.
  typedef enum logic [1:0] {
    ATK_NONE = 2'd0,
    ATK_FGSM = 2'd1,
    ATK_PGD  = 2'd2
  } attack_mode_e;

  // Output neurons of the SNN detector, in order.
  typedef enum logic [1:0] {
    CLS_CLEAN = 2'd0,
    CLS_FGSM  = 2'd1,
    CLS_PGD   = 2'd2
  } snn_class_e;

  // Run-time configuration of the whole design.
  typedef struct packed {
    attack_mode_e attack_mode;  // attack to simulate on the noisy magnitude
    mag_t         eps;          // FGSM step / PGD projection radius
    mag_t         alpha;        // PGD step size
    logic [3:0]   pgd_steps;    // PGD iterations (0 = none)
    mag_t         noise_floor;  // spectral-subtraction floor of the denoiser
    snr_t         snr_ref;      // SNR reference, dB Q8.8
    snr_t         snr_dev;      // allowed deviation from the reference, dB Q8.8
    logic [7:0]   anom_th;      // detections per window that raise an anomaly
    logic [127:0] key;          // AES-128 key
    logic         in_encrypted; // audio arrives as AES blocks on the e_* port
  } cfg_t;

  // Decision made for one frame by the neuromorphic processor.
  typedef struct packed {
    logic       attack;    // frame judged to be under attack
    logic       snr_flag;  // perturbation detector fired
    logic       fgsm_err;  // FGSM error flag
    logic       pgd_err;   // PGD error flag
    snn_class_e snn_class; // SNN detector verdict
    snr_t       snr;       // measured SNR, dB Q8.8
  } decision_t;

  // 5.395 dB in Q8.8, the SNR the design is characterised at.
  localparam snr_t SNR_REF_DEFAULT = 16'sd1381;

endpackage

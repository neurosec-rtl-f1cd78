// attack_gen: adversarial perturbation of one spectrum bin's magnitude.
// The loss gradient the attacks follow is approximated, as in the paper's
// flow, by comparing the noisy magnitude n with the clean magnitude c:
// g = sign(n - c) pushes the bin further from the clean target.
//   ATK_NONE : x = n
//   ATK_FGSM : x = n + eps * sign(n - c)                       (one step)
//   ATK_PGD  : x_0 = n, x_{i+1} = clip(x_i + alpha * sign(x_i - c),
//                                      n - eps, n + eps)        (pgd_steps)
// Every result is clamped to the magnitude range [0, 2^17 - 1].
// Timing: start is taken when idle; done pulses 1 clock after start for NONE
// and FGSM and 1 + pgd_steps clocks after start for PGD (one PGD iteration
// per clock). x holds until the next start.
// From the paper: FGSM and PGD attacks on the noisy magnitude, synthesised
// by comparing it with the clean magnitude. This design's own choices: the
// sign of that difference as the gradient, eps/alpha/steps as run-time
// settings, and a PGD without random start.
module attack_gen
  import neurosec_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  attack_mode_e mode,
  input  mag_t         eps,
  input  mag_t         alpha,
  input  logic [3:0]   pgd_steps,
  input  mag_t         n_mag,
  input  mag_t         c_mag,
  output logic         busy,
  output logic         done,
  output mag_t         x
);

  localparam int unsigned XW = MAG_W + 2;
  localparam logic signed [XW-1:0] MAXV = XW'((1 << MAG_W) - 1);
  typedef logic signed [XW-1:0] sx_t;

  function automatic sx_t clampv(input sx_t v, input sx_t lo, input sx_t hi);
    if (v < lo) return lo;
    if (v > hi) return hi;
    return v;
  endfunction

  sx_t cur, c0, lo, hi;
  logic [3:0] left;

  sx_t step_pgd;
  always_comb begin
    if (cur > c0)      step_pgd = clampv(cur + sx_t'(alpha), lo, hi);
    else if (cur < c0) step_pgd = clampv(cur - sx_t'(alpha), lo, hi);
    else               step_pgd = cur;
  end

  sx_t n_in, c_in, fgsm;
  always_comb begin
    n_in = sx_t'(n_mag);
    c_in = sx_t'(c_mag);
    if (n_in > c_in)      fgsm = clampv(n_in + sx_t'(eps), 0, MAXV);
    else if (n_in < c_in) fgsm = clampv(n_in - sx_t'(eps), 0, MAXV);
    else                  fgsm = n_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; c0 <= '0; lo <= '0; hi <= '0; left <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          c0 <= c_in;
          lo <= clampv(n_in - sx_t'(eps), 0, MAXV);
          hi <= clampv(n_in + sx_t'(eps), 0, MAXV);
          unique case (mode)
            ATK_FGSM: begin cur <= fgsm; done <= 1'b1; end
            ATK_PGD: begin
              cur <= n_in;
              if (pgd_steps == 0) done <= 1'b1;
              else begin busy <= 1'b1; left <= pgd_steps; end
            end
            default: begin cur <= n_in; done <= 1'b1; end
          endcase
        end
      end else begin
        cur  <= step_pgd;
        left <= left - 4'd1;
        if (left == 4'd1) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end

  assign x = mag_t'(cur);

endmodule

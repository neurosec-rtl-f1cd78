// dft_frame: frame-based discrete Fourier transform of real 16-bit audio.
// Samples arrive on a valid/ready stream and fill one of two N-sample banks
// (non-overlapping rectangular frames, hop = N). When a bank is full the
// engine computes bins k = 0 .. N/2 of
//     X[k] = (1/N) * sum_n x[n] * exp(-j*2*pi*k*n/N)
// with one complex multiply-accumulate per clock against a Q1.15 twiddle
// table (round(32767*cos), round(32767*sin), generated at elaboration). Each
// bin leaves on a valid/ready stream with its index and a last flag; while
// the engine works on one bank the other keeps filling, and in_ready drops
// only when both banks are full.
// Timing: N clocks per bin plus one clock per handshake; a frame takes about
// (N/2+1)*(N+1) clocks.
// The paper transforms the audio with a vendor FFT core. This engine, its
// frame length, rectangular window and 1/N scaling are this design's
// replacement for that core.
module dft_frame
  import neurosec_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  sample_t                in_sample,
  output logic                   out_valid,
  input  logic                   out_ready,
  output coef_t                  out_re,
  output coef_t                  out_im,
  output logic [$clog2(N)-1:0]   out_k,
  output logic                   out_last
);

  localparam int unsigned LN = $clog2(N);
  localparam int unsigned AW = SAMPLE_W + 16 + LN + 1;

  typedef logic signed [15:0] tw_tab_t [N];

  function automatic tw_tab_t gen_tw(input bit sine);
    tw_tab_t t;
    real ang;
    for (int i = 0; i < N; i++) begin
      ang  = 2.0 * 3.14159265358979323846 * real'(i) / real'(N);
      t[i] = 16'($rtoi(32767.0 * (sine ? $sin(ang) : $cos(ang)) + ((sine ? $sin(ang) : $cos(ang)) >= 0.0 ? 0.5 : -0.5)));
    end
    return t;
  endfunction

  localparam tw_tab_t COS_T = gen_tw(1'b0);
  localparam tw_tab_t SIN_T = gen_tw(1'b1);

  sample_t           mem [2][N];
  logic [1:0]        full;
  logic              wbank, rbank;
  logic [LN-1:0]     wcnt;

  typedef enum logic [1:0] {E_IDLE, E_MAC, E_OUT} est_e;
  est_e              est;
  logic [LN:0]       k;          // 0 .. N/2
  logic [LN-1:0]     n, idx;     // sample index, twiddle index (k*n mod N)
  logic signed [AW-1:0] acc_re, acc_im;

  assign in_ready = !full[wbank];

  // write side
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank <= 1'b0;
      wcnt  <= '0;
    end else if (in_valid && in_ready) begin
      wcnt <= wcnt + 1'b1;
      if (wcnt == LN'(N - 1)) wbank <= ~wbank;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wbank][wcnt] <= in_sample;
  end

  logic set_full, clr_full;
  assign set_full = in_valid && in_ready && (wcnt == LN'(N - 1));
  assign clr_full = (est == E_OUT) && out_ready && (k == (LN+1)'(N / 2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) full <= '0;
    else begin
      for (int b = 0; b < 2; b++) begin
        if (set_full && wbank == 1'(b)) full[b] <= 1'b1;
        else if (clr_full && rbank == 1'(b)) full[b] <= 1'b0;
      end
    end
  end

  // engine
  sample_t xs;
  logic signed [SAMPLE_W+15:0] pr, pi;
  always_comb begin
    xs = mem[rbank][n];
    pr = xs * COS_T[idx];
    pi = xs * SIN_T[idx];
  end

  function automatic coef_t scale_sat(input logic signed [AW-1:0] a);
    logic signed [AW-1:0] r;
    r = (a + (AW'(1) <<< (14 + LN))) >>> (15 + LN);
    if (r > 32767)       return 16'sd32767;
    else if (r < -32768) return -16'sd32768;
    else                 return coef_t'(r);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      est <= E_IDLE; rbank <= 1'b0; k <= '0; n <= '0; idx <= '0;
      acc_re <= '0; acc_im <= '0;
      out_valid <= 1'b0; out_re <= '0; out_im <= '0; out_k <= '0; out_last <= 1'b0;
    end else begin
      unique case (est)
        E_IDLE: if (full[rbank]) begin
          est <= E_MAC; k <= '0; n <= '0; idx <= '0; acc_re <= '0; acc_im <= '0;
        end
        E_MAC: begin
          acc_re <= acc_re + AW'(pr);
          acc_im <= acc_im - AW'(pi);
          idx    <= idx + k[LN-1:0];
          n      <= n + 1'b1;
          if (n == LN'(N - 1)) begin
            est       <= E_OUT;
            out_valid <= 1'b1;
            out_re    <= scale_sat(acc_re + AW'(pr));
            out_im    <= scale_sat(acc_im - AW'(pi));
            out_k     <= k[LN-1:0];
            out_last  <= (k == (LN+1)'(N / 2));
          end
        end
        E_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          if (k == (LN+1)'(N / 2)) begin
            est   <= E_IDLE;
            rbank <= ~rbank;
          end else begin
            est <= E_MAC; k <= k + 1'b1; n <= '0; idx <= '0; acc_re <= '0; acc_im <= '0;
          end
        end
        default: est <= E_IDLE;
      endcase
    end
  end

endmodule

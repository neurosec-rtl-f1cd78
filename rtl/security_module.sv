// security_module: output frame buffer and AES-128 encryption.
// The spectrum bins of the normal-operation output (denoised magnitude with
// the noisy argument) are written into a frame buffer as 32-bit words
// {re[15:0], im[15:0]}, each part saturated from the mixer's 18 bits. Once
// the neuromorphic processor has decided on the frame, the buffer is sent out
// as 128-bit blocks of four consecutive bins (bin 4b in bits 127:96; the
// words past the last bin are zero):
//   secure = 1 (threat detected, or anomaly lock): each block is encrypted
//               with AES-128 (electronic-codebook use of the cipher),
//   secure = 0: blocks leave in plain form ("normal operation").
// Interface: w_valid writes one bin; dec_valid/secure starts the flush; blocks
// leave on a valid/ready stream tagged with out_enc and out_last; frame_done
// pulses when the last block has been accepted. busy is high while flushing.
// Timing: a plain block is offered 2 clocks after the previous one was
// accepted, an encrypted block 13 clocks after.
// From the paper: AES encryption of the data in response to a detected
// threat. This design's own choices: packing the bins into blocks, the
// electronic-codebook use of the cipher, and encrypting every frame while
// the anomaly lock is on.
module security_module
  import neurosec_pkg::*;
#(
  parameter int unsigned NB = 33,
  localparam int unsigned NBLK = (NB + 3) / 4,
  localparam int unsigned IA_W = $clog2(NB)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [127:0]    key,
  input  logic            w_valid,
  input  logic [IA_W-1:0] w_idx,
  input  cmp_t            w_re,
  input  cmp_t            w_im,
  input  logic            dec_valid,
  input  logic            secure,
  output logic            busy,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [127:0]    out_data,
  output logic            out_enc,
  output logic            out_last,
  output logic            frame_done
);

  localparam int unsigned BA_W = (NBLK > 1) ? $clog2(NBLK) : 1;

  logic [31:0] fbuf [NBLK*4];

  function automatic logic [15:0] sat16(input cmp_t v);
    if (v > 32767)  return 16'h7fff;
    if (v < -32768) return 16'h8000;
    return 16'(v);
  endfunction

  always_ff @(posedge clk) begin
    if (w_valid) fbuf[w_idx] <= {sat16(w_re), sat16(w_im)};
  end

  typedef enum logic [1:0] {F_IDLE, F_PREP, F_ENC, F_OUT} fst_e;
  fst_e          st;
  logic          sec_q;
  logic [BA_W-1:0] b;

  logic [127:0]  blk;
  always_comb begin
    for (int w = 0; w < 4; w++)
      blk[127 - 32*w -: 32] = (int'(b) * 4 + w < NB) ? fbuf[int'(b) * 4 + w] : 32'h0;
  end

  logic         aes_start, aes_busy, aes_done;
  logic [127:0] aes_dout;
  aes128_enc u_aes (
    .clk, .rst_n, .start(aes_start), .key, .din(blk),
    .busy(aes_busy), .done(aes_done), .dout(aes_dout)
  );
  assign aes_start = (st == F_PREP) && sec_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= F_IDLE; sec_q <= 1'b0; b <= '0;
      out_valid <= 1'b0; out_data <= '0; out_enc <= 1'b0; out_last <= 1'b0; frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      unique case (st)
        F_IDLE: if (dec_valid) begin
          sec_q <= secure;
          b     <= '0;
          st    <= F_PREP;
        end
        F_PREP: begin
          if (sec_q) st <= F_ENC;
          else begin
            out_valid <= 1'b1; out_data <= blk; out_enc <= 1'b0;
            out_last  <= (int'(b) == NBLK - 1);
            st        <= F_OUT;
          end
        end
        F_ENC: if (aes_done) begin
          out_valid <= 1'b1; out_data <= aes_dout; out_enc <= 1'b1;
          out_last  <= (int'(b) == NBLK - 1);
          st        <= F_OUT;
        end
        F_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          if (int'(b) == NBLK - 1) begin
            st         <= F_IDLE;
            frame_done <= 1'b1;
          end else begin
            b  <= b + 1'b1;
            st <= F_PREP;
          end
        end
        default: st <= F_IDLE;
      endcase
    end
  end

  assign busy = (st != F_IDLE);

  // a valid block stays stable until it is accepted
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_enc);
  endproperty
  assert property (p_hold);

  // no frame is written while the previous one is being sent
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !w_valid);

endmodule

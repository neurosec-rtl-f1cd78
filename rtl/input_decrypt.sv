// input_decrypt: entry point for audio that reaches the design encrypted.
// Each 128-bit input block is AES-128 ciphertext (ECB, key from the
// configuration) of four noisy/clean sample pairs. The block is decrypted
// with an aes128_dec core and the four pairs are then handed out one per
// accepted transfer.
// Plaintext layout: word w (w = 0..3) sits at bits 127-32w down to 96-32w
// and holds {noisy[15:0], clean[15:0]}; word 0 is the earliest pair.
// Interface: in_valid/in_ready/in_data take one ciphertext block;
// out_valid/out_ready/out_noisy/out_clean give one sample pair.
// Timing: a block is accepted only when the previous one has been fully
// handed out. The first pair is valid 22 clocks after the block is taken,
// then one pair per clock while out_ready is high, so a block needs at
// least 26 clocks; at 16 kHz four pairs last 25,000 clocks at 100 MHz.
// From the paper: the system handles audio that was "securely transmitted
// and decrypted", and "is designed to process encrypted data"; AES is the
// cipher it names. The block layout, the use of the configured key for both
// directions and the handshake are this design's own choices.
module input_decrypt
  import neurosec_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic [127:0] key,
  // ciphertext blocks
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [127:0] in_data,
  // decrypted sample pairs
  output logic         out_valid,
  input  logic         out_ready,
  output sample_t      out_noisy,
  output sample_t      out_clean
);

  typedef enum logic [1:0] {I_IDLE, I_DEC, I_OUT} ist_e;
  ist_e         st;
  logic [127:0] pt;
  logic [1:0]   w;
  logic         a_busy, a_done;
  logic [127:0] a_dout;
  logic [31:0]  word;

  aes128_dec u_aes (
    .clk, .rst_n, .start(in_valid && in_ready), .key, .din(in_data),
    .busy(a_busy), .done(a_done), .dout(a_dout)
  );

  assign in_ready  = (st == I_IDLE);
  assign out_valid = (st == I_OUT);
  assign word      = pt[127 - 32 * w -: 32];
  assign out_noisy = sample_t'(word[31:16]);
  assign out_clean = sample_t'(word[15:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= I_IDLE; pt <= '0; w <= '0;
    end else begin
      unique case (st)
        I_IDLE: if (in_valid) st <= I_DEC;
        I_DEC:  if (a_done) begin pt <= a_dout; w <= '0; st <= I_OUT; end
        I_OUT:  if (out_ready) begin
                  w <= w + 2'd1;
                  if (w == 2'd3) st <= I_IDLE;
                end
        default: st <= I_IDLE;
      endcase
    end
  end

  // while a block is being decrypted the core is either busy or just done
  assert property (@(posedge clk) disable iff (!rst_n) (st == I_DEC) |-> (a_busy || a_done));

endmodule

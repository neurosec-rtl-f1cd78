// aes128_enc: iterative AES-128 encryptor (FIPS-197), one round per clock.
// A start pulse loads the plaintext and key; the initial AddRoundKey happens
// at load, rounds 1..10 follow on the next ten clocks with the round key
// expanded on the fly, so done rises 11 clocks after the clock that samples start and dout
// holds the ciphertext until the next start. start is ignored while busy.
// The paper names AES as the cipher of its security module; the key length
// (128 bit) and the round-per-cycle structure are this design's choices.
module aes128_enc
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] key,
  input  logic [127:0] din,
  output logic         busy,
  output logic         done,
  output logic [127:0] dout
);

  logic [127:0] state, rk;
  logic [3:0]   round;

  logic [127:0] rk_nxt, sr;
  always_comb begin
    rk_nxt = next_key(rk, rcon_of(round));
    sr     = shift_rows(sub_bytes(state));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '0;
      rk    <= '0;
      round <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          state <= din ^ key;
          rk    <= key;
          round <= 4'd1;
          busy  <= 1'b1;
        end
      end else begin
        rk    <= rk_nxt;
        state <= (round == 4'd10) ? (sr ^ rk_nxt) : (mix_columns(sr) ^ rk_nxt);
        if (round == 4'd10) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        round <= round + 4'd1;
      end
    end
  end

  assign dout = state;

endmodule

// aes128_dec: iterative AES-128 decryptor (FIPS-197 inverse cipher).
// After a start pulse the key schedule is first run forward for ten clocks to
// reach the last round key; the inverse cipher then runs ten rounds, one per
// clock, stepping the key schedule backwards on the fly. done rises 21
// cycles after start and dout holds the plaintext until the next start.
// The paper's flow restores encrypted data by decryption; the structure here
// is this design's choice.
module aes128_dec
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

  typedef enum logic [1:0] {S_IDLE, S_EXPAND, S_ROUND} st_e;
  st_e          st;
  logic [127:0] state, rk, ct;
  logic [3:0]   round;

  logic [127:0] rk_fwd, rk_back, isr;
  always_comb begin
    rk_fwd  = next_key(rk, rcon_of(round));
    rk_back = prev_key(rk, rcon_of(round));
    isr     = inv_sub_bytes(inv_shift_rows(state));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= S_IDLE;
      state <= '0;
      rk    <= '0;
      ct    <= '0;
      round <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          rk    <= key;
          ct    <= din;
          round <= 4'd1;
          st    <= S_EXPAND;
        end
        S_EXPAND: begin
          rk <= rk_fwd;
          if (round == 4'd10) begin
            state <= ct ^ rk_fwd;   // AddRoundKey with round key 10
            st    <= S_ROUND;
          end else begin
            round <= round + 4'd1;
          end
        end
        S_ROUND: begin
          // round counts down 10..1; rk_back is round key (round-1)
          rk <= rk_back;
          if (round == 4'd1) begin
            state <= isr ^ rk_back;
            st    <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= inv_mix_columns(isr ^ rk_back);
          end
          round <= round - 4'd1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);
  assign dout = state;

endmodule

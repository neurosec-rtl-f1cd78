// denoiser: magnitude denoiser of the normal-operation path. The paper only
// says the model outputs a denoised magnitude; this design uses the simplest
// spectral method, spectral subtraction with a programmable floor:
//   d = x - floor when x > floor, else 0.
// The output is registered: d is valid one clock after in_valid (out_valid).
module denoiser
  import neurosec_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  mag_t x,
  input  mag_t noise_floor,
  output logic out_valid,
  output mag_t d
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      d         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) d <= (x > noise_floor) ? x - noise_floor : '0;
    end
  end

endmodule

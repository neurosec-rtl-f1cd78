// cordic: iterative CORDIC, one micro-rotation per clock, used both ways the
// datapath needs it.
//   VECTORING = 1: (x_in, y_in) -> x_out = |x + jy|, z_out = arg(x + jy)
//   VECTORING = 0: (x_in = magnitude, z_in = angle) -> x_out + j*y_out
// Angles are 16-bit binary angles (65536 units per turn). The operands are
// carried with GUARD extra fraction bits; the CORDIC gain (1.6468) is removed
// at the end by a multiply with round(0.60725 * 2^15) = 19898. A quadrant
// pre-rotation by 180 degrees brings every input into the +-90 degree range
// the iteration converges over. Arctangent table: round(atan(2^-i) * 65536 /
// 2pi) for i = 0..15.
// Timing: start is taken when idle; done pulses ITER + 2 clocks later and the
// outputs hold until the next start.
// The paper does not say how its magnitude/argument split or its mixer are
// computed. The CORDIC, its widths and its iteration count are this
// design's choice.
module cordic #(
  parameter bit          VECTORING = 1'b1,
  parameter int unsigned IN_W      = 18,
  parameter int unsigned ITER      = 16,
  parameter int unsigned GUARD     = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic signed [IN_W-1:0] x_in,
  input  logic signed [IN_W-1:0] y_in,
  input  logic        [15:0]     z_in,
  output logic                   busy,
  output logic                   done,
  output logic signed [IN_W:0]   x_out,
  output logic signed [IN_W:0]   y_out,
  output logic        [15:0]     z_out
);

  localparam int unsigned IW = IN_W + GUARD + 3;
  localparam logic [15:0] ATAN [16] = '{16'd8192, 16'd4836, 16'd2555, 16'd1297,
                                        16'd651, 16'd326, 16'd163, 16'd81,
                                        16'd41, 16'd20, 16'd10, 16'd5,
                                        16'd3, 16'd1, 16'd1, 16'd0};
  localparam logic signed [16:0] KINV = 17'sd19898;

  logic signed [IW-1:0] x, y;
  logic        [15:0]   z;
  logic        [4:0]    it;
  logic                 scale;

  logic signed [IW-1:0] xs, ys, x0, y0;
  logic                 dir;  // 1: rotate counter-clockwise
  always_comb begin
    xs  = x >>> it;
    ys  = y >>> it;
    dir = VECTORING ? y[IW-1] : ~z[15];
    x0  = IW'(x_in) <<< GUARD;
    y0  = IW'(y_in) <<< GUARD;
  end

  logic signed [IW+17:0] xk, yk;
  always_comb begin
    xk = x * KINV;
    yk = y * KINV;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; z <= '0; it <= '0;
      busy <= 1'b0; scale <= 1'b0; done <= 1'b0;
      x_out <= '0; y_out <= '0; z_out <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          it   <= '0;
          if (VECTORING) begin
            if (x_in < 0) begin x <= -x0; y <= -y0; z <= 16'h8000; end
            else          begin x <=  x0; y <=  y0; z <= 16'h0000; end
          end else begin
            if (z_in[15] ^ z_in[14]) begin x <= -x0; y <= -y0; z <= z_in - 16'h8000; end
            else                     begin x <=  x0; y <=  y0; z <= z_in;            end
          end
        end
      end else if (!scale) begin
        if (dir) begin
          x <= x - ys;
          y <= y + xs;
          z <= z - ATAN[it[3:0]];
        end else begin
          x <= x + ys;
          y <= y - xs;
          z <= z + ATAN[it[3:0]];
        end
        if (it == 5'(ITER - 1)) scale <= 1'b1;
        it <= it + 5'd1;
      end else begin
        scale <= 1'b0;
        busy  <= 1'b0;
        done  <= 1'b1;
        x_out <= (IN_W+1)'((xk + (1 <<< (14 + GUARD))) >>> (15 + GUARD));
        y_out <= (IN_W+1)'((yk + (1 <<< (14 + GUARD))) >>> (15 + GUARD));
        z_out <= z;
      end
    end
  end

endmodule

// snn_detector: fully connected spiking network of leaky integrate-and-fire
// neurons, N_IN inputs -> N_LAYERS hidden layers of N_HID neurons -> N_OUT
// outputs, that classifies one spectrum frame as clean, FGSM-attacked or
// PGD-attacked (output neurons 0, 1, 2).
// Operation: the frame's N_IN bin magnitudes are written into a feature
// buffer; start then runs T_STEPS time steps. In each step the rate encoder
// turns every feature into a spike or not. Then the layers update in order
// (first hidden layer, ..., output layer). Each neuron reads the spikes that
// its source layer produced in the same step and updates its membrane
//   v <- v - (v >>> LEAK_SHIFT) + bias + sum of weights of spiking inputs
// and fires (resetting v to 0) when v >= V_TH. Output spikes are counted over
// the frame; the class is the output neuron with most spikes (ties go to the
// lower index, i.e. towards "clean"). Membranes and encoder phases carry over
// from frame to frame; only hard_reset clears them.
// Synaptic weights and biases (signed W_W bits) live in one memory written
// through the w_* port, laid out as
//   j*N_IN + i                                 input i -> first hidden layer
//                                              neuron j
//   WH_BASE + (l-1)*N_HID*N_HID + j*N_HID + i  neuron i of layer l-1 ->
//                                              neuron j of layer l, for
//                                              l = 1 .. N_LAYERS (the last l
//                                              is the output layer)
//   B_BASE + l*N_HID + j                       bias of neuron j of layer l
// with WH_BASE = N_HID*N_IN. With N_LAYERS = 1 the output weights start at
// N_HID*N_IN and the biases at N_HID*N_IN + N_OUT*N_HID.
// Timing: one synapse per clock, so a frame takes
//   T_STEPS*(N_IN + N_HID*(N_IN+2) + (N_LAYERS-1)*N_HID*(N_HID+2)
//            + N_OUT*(N_HID+2)) + 2
// clocks from the clock that samples start to done. From the paper: the
// network type, layers and neurons that are parameters, and the weight
// memory. This design's choices: neuron model, sizes, widths and the
// schedule.
module snn_detector
  import neurosec_pkg::*;
#(
  parameter int unsigned N_IN       = 33,
  parameter int unsigned N_HID      = 16,
  parameter int unsigned N_LAYERS   = 1,
  parameter int unsigned N_OUT      = 3,
  parameter int unsigned T_STEPS    = 16,
  parameter int unsigned W_W        = 8,
  parameter int unsigned V_W        = 16,
  parameter int          V_TH       = 64,
  parameter int unsigned LEAK_SHIFT = 4,
  parameter int unsigned RATE_SHIFT = 3,
  localparam int unsigned WH_BASE   = N_HID * N_IN,
  localparam int unsigned B_BASE    = WH_BASE + (N_LAYERS - 1) * N_HID * N_HID + N_OUT * N_HID,
  localparam int unsigned DEPTH     = B_BASE + N_LAYERS * N_HID + N_OUT,
  localparam int unsigned WA_W      = $clog2(DEPTH),
  localparam int unsigned FA_W      = $clog2(N_IN)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // weight / bias memory write port
  input  logic                       w_we,
  input  logic [WA_W-1:0]            w_addr,
  input  logic signed [W_W-1:0]      w_data,
  // feature buffer write port
  input  logic                       f_we,
  input  logic [FA_W-1:0]            f_addr,
  input  mag_t                       f_data,
  // control
  input  logic                       start,
  input  logic                       hard_reset,
  output logic                       busy,
  output logic                       done,
  output snn_class_e                 cls,
  output logic [N_OUT-1:0][7:0]      counts
);

  localparam int unsigned NV = N_LAYERS * N_HID + N_OUT;
  localparam int unsigned LW = $clog2(N_LAYERS + 1);
  localparam int unsigned CW = $clog2(N_IN > N_HID ? N_IN : N_HID) + 1;
  localparam int unsigned AW = V_W + 8;

  typedef enum logic [2:0] {S_IDLE, S_ENC, S_INIT, S_SYN, S_FIRE, S_DONE} st_e;
  st_e st;

  logic signed [W_W-1:0] wmem [DEPTH];
  mag_t                  feat [N_IN];
  logic signed [V_W-1:0] v    [NV];
  logic [N_IN-1:0]       in_spk;
  logic [N_LAYERS-1:0][N_HID-1:0] hid_spk;

  logic [7:0]            t;
  logic [LW-1:0]         lay;      // 0 .. N_LAYERS-1 hidden, N_LAYERS output
  logic                  is_out;
  logic [CW-1:0]         j, i;
  logic signed [AW-1:0]  acc;

  // weight memory
  always_ff @(posedge clk) if (w_we) wmem[w_addr] <= w_data;
  always_ff @(posedge clk) if (f_we) feat[f_addr] <= f_data;

  // encoder
  logic enc_spk;
  spike_encoder #(.N_CH(N_IN), .RATE_SHIFT(RATE_SHIFT)) u_enc (
    .clk, .rst_n, .clear(hard_reset), .step(st == S_ENC),
    .ch(FA_W'(i)), .mag(feat[FA_W'(i)]), .spike(enc_spk)
  );

  // addressing
  int unsigned nin, nneur, vidx;
  logic [WA_W-1:0] waddr, baddr;
  logic        src_spk;
  always_comb begin
    is_out  = (int'(lay) == N_LAYERS);
    nin     = (lay == '0) ? N_IN : N_HID;
    nneur   = is_out ? N_OUT : N_HID;
    vidx    = int'(lay) * N_HID + int'(j);
    waddr   = WA_W'((lay == '0) ? int'(j) * N_IN + int'(i)
                                : WH_BASE + (int'(lay) - 1) * N_HID * N_HID + int'(j) * N_HID + int'(i));
    baddr   = WA_W'(B_BASE + vidx);
    src_spk = (lay == '0) ? in_spk[FA_W'(i)] : hid_spk[int'(lay) - 1][i[$clog2(N_HID)-1:0]];
  end

  function automatic logic signed [V_W-1:0] sat_v(input logic signed [AW-1:0] a);
    if (a > AW'((1 <<< (V_W - 1)) - 1)) return V_W'((1 <<< (V_W - 1)) - 1);
    if (a < -AW'(1 <<< (V_W - 1)))      return V_W'(-(1 <<< (V_W - 1)));
    return V_W'(a);
  endfunction

  // argmax of the spike counts
  snn_class_e best;
  always_comb begin
    int b;
    b = 0;
    for (int o = 1; o < N_OUT; o++) if (counts[o] > counts[b]) b = o;
    best = snn_class_e'(b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; t <= '0; lay <= '0; j <= '0; i <= '0; acc <= '0;
      in_spk <= '0; hid_spk <= '0; counts <= '0; done <= 1'b0; cls <= CLS_CLEAN;
      for (int k = 0; k < NV; k++) v[k] <= '0;
    end else if (hard_reset) begin
      st <= S_IDLE; done <= 1'b0; in_spk <= '0; hid_spk <= '0;
      for (int k = 0; k < NV; k++) v[k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_ENC; t <= '0; i <= '0; counts <= '0;
        end
        S_ENC: begin
          in_spk[FA_W'(i)] <= enc_spk;
          if (int'(i) == N_IN - 1) begin
            st <= S_INIT; lay <= '0; j <= '0;
          end else i <= i + 1'b1;
        end
        S_INIT: begin
          acc <= AW'(v[vidx]) - AW'(v[vidx] >>> LEAK_SHIFT) + AW'(wmem[baddr]);
          i   <= '0;
          st  <= S_SYN;
        end
        S_SYN: begin
          if (src_spk) acc <= acc + AW'(wmem[waddr]);
          if (int'(i) == nin - 1) st <= S_FIRE;
          else i <= i + 1'b1;
        end
        S_FIRE: begin
          if (acc >= AW'(V_TH)) begin
            v[vidx] <= '0;
            if (!is_out) hid_spk[lay][j[$clog2(N_HID)-1:0]] <= 1'b1;
            else      counts[j[$clog2(N_OUT)-1:0]] <= counts[j[$clog2(N_OUT)-1:0]] + 8'd1;
          end else begin
            v[vidx] <= sat_v(acc);
            if (!is_out) hid_spk[lay][j[$clog2(N_HID)-1:0]] <= 1'b0;
          end
          if (int'(j) == nneur - 1) begin
            j <= '0;
            if (!is_out) begin
              lay <= lay + 1'b1; st <= S_INIT;
            end else if (int'(t) == T_STEPS - 1) begin
              st <= S_DONE;
            end else begin
              t <= t + 8'd1; i <= '0; st <= S_ENC;
            end
          end else begin
            j  <= j + 1'b1;
            st <= S_INIT;
          end
        end
        S_DONE: begin
          done <= 1'b1;
          cls  <= best;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

endmodule

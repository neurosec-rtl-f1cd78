// tb_snn_detector: runs two networks side by side on the same features, one
// with a single hidden layer and one with two, each loaded with its own
// random weights and biases. Each network's output spike counts and class
// are compared, frame by frame, with a behavioural model of the same network
// written here: rate encoder, leaky integrate-and-fire neurons, layer order,
// weight memory layout, membranes that persist across frames. Also checks
// each frame time against the schedule formula, that hard_reset returns the
// networks to their initial state, and that a frame with a strong bias on
// the FGSM output neuron is classified as FGSM.
// The paper gives no test data. The stimulus, sizes and tolerances are this
// testbench's own.
module tb_snn_detector;
  import neurosec_pkg::*;
  localparam int N_IN = 9, N_HID = 6, N_OUT = 3, T = 12, TH = 64, LS = 4;

  // reference model of a network with NL hidden layers
  class net_model #(int NL = 1);
    localparam int WHB = N_HID * N_IN;
    localparam int BB = WHB + (NL - 1) * N_HID * N_HID + N_OUT * N_HID;
    localparam int DEPTH = BB + NL * N_HID + N_OUT;
    localparam int NV = NL * N_HID + N_OUT;
    int w [DEPTH];
    int macc [N_IN];
    int v [NV];
    int mcnt [N_OUT];

    function int sat16(input int a);
      return a > 32767 ? 32767 : (a < -32768 ? -32768 : a);
    endfunction

    function void reset();
      foreach (macc[i]) macc[i] = 0;
      foreach (v[k]) v[k] = 0;
    endfunction

    function void randomize_w();
      for (int a = 0; a < DEPTH; a++) w[a] = (a >= BB) ? $urandom_range(0, 40) - 20 : $urandom_range(0, 200) - 100;
    endfunction

    function int frame_time();
      return T * (N_IN + N_HID * (N_IN + 2) + (NL - 1) * N_HID * (N_HID + 2) + N_OUT * (N_HID + 2)) + 2;
    endfunction

    function void frame(input int feat [N_IN]);
      bit src [N_IN];
      bit nxt [N_IN];
      int nsrc, nn, a, rate, vb;
      foreach (mcnt[o]) mcnt[o] = 0;
      for (int t = 0; t < T; t++) begin
        for (int i = 0; i < N_IN; i++) begin
          rate = feat[i] * 8; if (rate > 65535) rate = 65535;
          macc[i] += rate;
          src[i] = macc[i] >= 65536;
          macc[i] = macc[i] % 65536;
        end
        nsrc = N_IN;
        for (int l = 0; l <= NL; l++) begin
          nn = (l == NL) ? N_OUT : N_HID;
          for (int j = 0; j < nn; j++) begin
            vb = l * N_HID + j;
            a = v[vb] - (v[vb] >>> LS) + w[BB + vb];
            for (int i = 0; i < nsrc; i++)
              if (src[i]) a += (l == 0) ? w[j * N_IN + i] : w[WHB + (l - 1) * N_HID * N_HID + j * N_HID + i];
            if (a >= TH) begin v[vb] = 0; nxt[j] = 1; if (l == NL) mcnt[j]++; end
            else begin v[vb] = sat16(a); nxt[j] = 0; end
          end
          for (int j = 0; j < nn; j++) src[j] = nxt[j];
          nsrc = nn;
        end
      end
    endfunction

    function int cls();
      int b = 0;
      for (int o = 1; o < N_OUT; o++) if (mcnt[o] > mcnt[b]) b = o;
      return b;
    endfunction
  endclass

  typedef net_model #(1) model1_t;
  typedef net_model #(2) model2_t;
  localparam int D1 = model1_t::DEPTH, D2 = model2_t::DEPTH;

  logic clk = 0, rst_n = 0, f_we = 0, start = 0, hard_reset = 0;
  logic w_we1 = 0, w_we2 = 0, busy1, busy2, done1, done2;
  logic [$clog2(D1)-1:0] w_addr1;
  logic [$clog2(D2)-1:0] w_addr2;
  logic signed [7:0] w_data;
  logic [$clog2(N_IN)-1:0] f_addr;
  mag_t f_data;
  snn_class_e cls1, cls2;
  logic [N_OUT-1:0][7:0] counts1, counts2;
  int checks = 0, failures = 0;
  int feat [N_IN];
  model1_t m1;
  model2_t m2;
  always #5 clk = ~clk;

  snn_detector #(.N_IN(N_IN), .N_HID(N_HID), .N_LAYERS(1), .N_OUT(N_OUT), .T_STEPS(T), .V_TH(TH), .LEAK_SHIFT(LS)) dut1 (
    .clk, .rst_n, .w_we(w_we1), .w_addr(w_addr1), .w_data, .f_we, .f_addr, .f_data,
    .start, .hard_reset, .busy(busy1), .done(done1), .cls(cls1), .counts(counts1));
  snn_detector #(.N_IN(N_IN), .N_HID(N_HID), .N_LAYERS(2), .N_OUT(N_OUT), .T_STEPS(T), .V_TH(TH), .LEAK_SHIFT(LS)) dut2 (
    .clk, .rst_n, .w_we(w_we2), .w_addr(w_addr2), .w_data, .f_we, .f_addr, .f_data,
    .start, .hard_reset, .busy(busy2), .done(done2), .cls(cls2), .counts(counts2));

  task automatic load_w();
    for (int a = 0; a < D1; a++) begin
      w_we1 = 1; w_addr1 = a[$clog2(D1)-1:0]; w_data = 8'(m1.w[a]); @(negedge clk);
    end
    w_we1 = 0;
    for (int a = 0; a < D2; a++) begin
      w_we2 = 1; w_addr2 = a[$clog2(D2)-1:0]; w_data = 8'(m2.w[a]); @(negedge clk);
    end
    w_we2 = 0;
  endtask

  task automatic compare(input string name, input logic [N_OUT-1:0][7:0] counts, input snn_class_e cls,
                         input int mcnt [N_OUT], input int mcls, input int cyc, input int exp_cyc,
                         input bit check_time);
    checks += 2;
    for (int o = 0; o < N_OUT; o++)
      if (int'(counts[o]) != mcnt[o]) begin
        failures++; $display("FAIL %s count[%0d] %0d exp %0d", name, o, counts[o], mcnt[o]); break;
      end
    if (int'(cls) != mcls) begin failures++; $display("FAIL %s class %0d exp %0d", name, cls, mcls); end
    if (check_time) begin
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("FAIL %s frame time %0d exp %0d", name, cyc, exp_cyc); end
    end
  endtask

  task automatic run_frame(input bit check_time);
    int cyc, c1, c2;
    for (int i = 0; i < N_IN; i++) begin
      f_we = 1; f_addr = i[$clog2(N_IN)-1:0]; f_data = mag_t'(feat[i]); @(negedge clk);
    end
    f_we = 0;
    start = 1; @(negedge clk); start = 0;
    cyc = 1; c1 = 0; c2 = 0;
    while (c1 == 0 || c2 == 0) begin
      if (done1 && c1 == 0) c1 = cyc;
      if (done2 && c2 == 0) c2 = cyc;
      if (c1 == 0 || c2 == 0) begin @(negedge clk); cyc++; end
    end
    m1.frame(feat);
    m2.frame(feat);
    compare("1 layer", counts1, cls1, m1.mcnt, m1.cls(), c1, m1.frame_time(), check_time);
    compare("2 layers", counts2, cls2, m2.mcnt, m2.cls(), c2, m2.frame_time(), check_time);
  endtask

  initial begin
    m1 = new(); m2 = new();
    w_addr1 = 0; w_addr2 = 0; w_data = 0; f_addr = 0; f_data = 0;
    m1.randomize_w(); m2.randomize_w();
    m1.reset(); m2.reset();
    repeat (3) @(negedge clk); rst_n = 1;
    load_w();
    for (int f = 0; f < 8; f++) begin
      for (int i = 0; i < N_IN; i++) feat[i] = $urandom_range(0, 9000);
      run_frame(f == 0);
      if (f == 4) begin
        hard_reset = 1; @(negedge clk); hard_reset = 0;
        m1.reset(); m2.reset();
      end
    end
    // bias the FGSM output neuron above threshold: class must be FGSM
    m1.w[m1.BB + N_HID + 1] = 100; m1.w[m1.BB + N_HID + 0] = -100; m1.w[m1.BB + N_HID + 2] = -100;
    m2.w[m2.BB + 2 * N_HID + 1] = 100; m2.w[m2.BB + 2 * N_HID + 0] = -100; m2.w[m2.BB + 2 * N_HID + 2] = -100;
    load_w();
    run_frame(0);
    checks += 2;
    if (cls1 != CLS_FGSM) begin failures++; $display("FAIL forced class %0d (1 layer)", cls1); end
    if (cls2 != CLS_FGSM) begin failures++; $display("FAIL forced class %0d (2 layers)", cls2); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_neuro_proc: drives whole frames of bins into the neuromorphic processor.
// The SNN is steered through its output biases (one output neuron biased to
// fire every step, the others silenced) so its verdict is known; the frame
// SNR is set by the composite-spectrum noise. Checked per frame: attack,
// snr_flag, error flags, class, hard reset entry and count, busy during the
// decision, sticky err_fgsm/err_pgd and clr_flags.
// The paper gives no test data. The stimulus, sizes and tolerances are this
// testbench's own.
module tb_neuro_proc;
  import neurosec_pkg::*;
  localparam int NB = 9, NH = 4, T = 6;
  localparam int DEPTH = NH * NB + 3 * NH + NH + 3, BB = NH * NB + 3 * NH;
  logic clk = 0, rst_n = 0, bin_valid = 0, bin_last = 0, w_we = 0, clr_flags = 0;
  logic busy, dec_valid, err_fgsm, err_pgd, in_hard_reset;
  logic [$clog2(NB)-1:0] bin_k;
  logic [$clog2(DEPTH)-1:0] w_addr;
  logic signed [7:0] w_data;
  mag_t x_mag; cmp_t y_re, y_im; coef_t c_re, c_im;
  snr_t snr_ref, snr_dev;
  decision_t dec;
  logic [15:0] hard_resets;
  logic [2:0][7:0] snn_counts;
  int checks = 0, failures = 0, hrst_seen = 0;
  always #5 clk = ~clk;

  neuro_proc #(.N_IN(NB), .N_HID(NH), .T_STEPS(T)) dut (.*);

  always @(posedge clk) if (in_hard_reset) hrst_seen++;

  task automatic set_class(input int c);
    for (int a = 0; a < DEPTH; a++) begin
      w_we = 1; w_addr = a[$clog2(DEPTH)-1:0];
      w_data = (a == BB + NH + c) ? 8'sd100 : ((a >= BB + NH) ? -8'sd100 : 8'sd0);
      @(negedge clk);
    end
    w_we = 0;
  endtask

  // noise = 0: composite equals clean plus a fixed offset giving ~5.4 dB;
  // noise = 1: a large deviation (about -6 dB)
  task automatic frame(input bit big, input bit exp_attack, input bit exp_snr, input int exp_cls);
    int hr0, h0;
    hr0 = int'(hard_resets); h0 = hrst_seen;
    for (int k = 0; k < NB; k++) begin
      bin_valid = 1; bin_k = k[$clog2(NB)-1:0]; bin_last = (k == NB - 1);
      x_mag = mag_t'(1000 + 100 * k);
      c_re = 16'sd4000; c_im = -16'sd2000;
      y_re = big ? 18'sd12000 : 18'sd6400;   // |dev| 8000 or 2400 on |C| 4472
      y_im = -18'sd2000;
      @(negedge clk);
    end
    bin_valid = 0; bin_last = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL not busy after last bin"); end
    while (!dec_valid) @(negedge clk);
    checks += 5;
    if (dec.attack != exp_attack) begin failures++; $display("FAIL attack %0d", dec.attack); end
    if (dec.snr_flag != exp_snr) begin failures++; $display("FAIL snr_flag %0d snr %0d", dec.snr_flag, dec.snr); end
    if (int'(dec.snn_class) != exp_cls) begin failures++; $display("FAIL class %0d", dec.snn_class); end
    if (dec.fgsm_err != (exp_attack && exp_cls == 1) || dec.pgd_err != (exp_attack && exp_cls == 2)) begin
      failures++; $display("FAIL err flags %0d %0d", dec.fgsm_err, dec.pgd_err);
    end
    @(negedge clk); @(negedge clk);
    if ((int'(hard_resets) - hr0 != int'(exp_attack)) || (hrst_seen - h0 != int'(exp_attack))) begin
      failures++; $display("FAIL hard reset count %0d / %0d", int'(hard_resets) - hr0, hrst_seen - h0);
    end
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
  endtask

  initial begin
    bin_k = 0; w_addr = 0; w_data = 0; x_mag = 0; y_re = 0; y_im = 0; c_re = 0; c_im = 0;
    snr_ref = SNR_REF_DEFAULT; snr_dev = 16'sd768;
    repeat (3) @(negedge clk); rst_n = 1;
    set_class(0);
    frame(0, 0, 0, 0);                         // normal
    checks++; if (err_fgsm || err_pgd) begin failures++; $display("FAIL flags set"); end
    frame(1, 1, 1, 0);                         // SNR deviation only
    checks++; if (err_fgsm || err_pgd) begin failures++; $display("FAIL flags on snr-only"); end
    set_class(1);
    frame(0, 1, 0, 1);                         // SNN says FGSM
    checks++; if (!err_fgsm || err_pgd) begin failures++; $display("FAIL sticky fgsm"); end
    set_class(2);
    frame(1, 1, 1, 2);                         // both, PGD
    checks++; if (!err_fgsm || !err_pgd) begin failures++; $display("FAIL sticky pgd"); end
    clr_flags = 1; @(negedge clk); clr_flags = 0;
    checks++; if (err_fgsm || err_pgd) begin failures++; $display("FAIL clr_flags"); end
    set_class(0);
    frame(0, 0, 0, 0);
    checks++; if (hard_resets != 16'd3) begin failures++; $display("FAIL hard_resets %0d", hard_resets); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

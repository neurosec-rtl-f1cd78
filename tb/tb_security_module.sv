// tb_security_module: writes frames of random bins (some beyond 16-bit range
// to exercise saturation), then flushes them plain and encrypted under random
// backpressure. Plain blocks must equal the packed, saturated bins; encrypted
// blocks must decrypt (with the separately verified aes128_dec) to the same
// packed bins. Also checks block count, out_enc, out_last, frame_done and the
// spacing of encrypted blocks.
// The paper gives no test data. The stimulus, sizes and tolerances are this
// testbench's own.
module tb_security_module;
  import neurosec_pkg::*;
  localparam int NB = 10;
  localparam int NBLK = (NB + 3) / 4;
  logic clk = 0, rst_n = 0, w_valid = 0, dec_valid = 0, secure = 0;
  logic busy, out_valid, out_ready = 0, out_enc, out_last, frame_done;
  logic [127:0] key, out_data;
  logic [$clog2(NB)-1:0] w_idx;
  cmp_t w_re, w_im;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  security_module #(.NB(NB)) dut (.*);

  logic d_start = 0, d_busy, d_done;
  logic [127:0] d_dout, d_din;
  aes128_dec u_ref (.clk, .rst_n, .start(d_start), .key, .din(d_din), .busy(d_busy), .done(d_done), .dout(d_dout));

  logic [31:0] words [NBLK*4];
  int fd_count = 0;
  always @(posedge clk) if (frame_done) fd_count++;

  function automatic logic [15:0] s16(input int v);
    return v > 32767 ? 16'h7fff : (v < -32768 ? 16'h8000 : 16'(v));
  endfunction

  task automatic one_frame(input bit sec);
    int nb, fd0;
    logic [127:0] expb;
    for (int i = 0; i < NBLK * 4; i++) words[i] = 0;
    for (int k = 0; k < NB; k++) begin
      int re, im;
      re = $urandom_range(0, 140000) - 70000; im = $urandom_range(0, 80000) - 40000;
      w_valid = 1; w_idx = k[$clog2(NB)-1:0]; w_re = cmp_t'(re); w_im = cmp_t'(im);
      words[k] = {s16(re), s16(im)};
      @(negedge clk);
    end
    w_valid = 0;
    dec_valid = 1; secure = sec; @(negedge clk); dec_valid = 0;
    nb = 0; fd0 = fd_count;
    while (nb < NBLK) begin
      out_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (out_valid && out_ready) begin
        expb = {words[4*nb], words[4*nb+1], words[4*nb+2], words[4*nb+3]};
        checks += 3;
        if (out_enc != sec) begin failures++; $display("FAIL enc %0d", out_enc); end
        if (out_last != (nb == NBLK - 1)) begin failures++; $display("FAIL last"); end
        if (!sec) begin
          if (out_data !== expb) begin failures++; $display("FAIL plain %h exp %h", out_data, expb); end
        end else begin
          logic [127:0] ct;
          ct = out_data;
          @(negedge clk); out_ready = 0;
          d_din = ct; d_start = 1; @(negedge clk); d_start = 0;
          while (!d_done) @(negedge clk);
          if (d_dout !== expb) begin failures++; $display("FAIL decrypt %h exp %h", d_dout, expb); end
          nb++;
          continue;
        end
        nb++;
      end
      @(negedge clk);
    end
    out_ready = 0;
    repeat (2) @(negedge clk);
    checks += 2;
    if (fd_count - fd0 != 1) begin failures++; $display("FAIL frame_done %0d", fd_count - fd0); end
    if (busy) begin failures++; $display("FAIL busy after frame"); end
  endtask

  initial begin
    int t0;
    key = {$urandom, $urandom, $urandom, $urandom}; w_idx = 0; w_re = 0; w_im = 0; d_din = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    one_frame(0);
    one_frame(1);
    one_frame(0);
    one_frame(1);
    // spacing of encrypted blocks with a ready sink
    for (int k = 0; k < NB; k++) begin w_valid = 1; w_idx = k[$clog2(NB)-1:0]; w_re = 0; w_im = 0; @(negedge clk); end
    w_valid = 0; out_ready = 1;
    dec_valid = 1; secure = 1; @(negedge clk); dec_valid = 0;
    while (!out_valid) @(negedge clk);
    @(negedge clk); t0 = 1;
    while (!out_valid) begin @(negedge clk); t0++; end
    checks++;
    if (t0 != 13) begin failures++; $display("FAIL encrypted block spacing %0d", t0); end
    while (busy) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_input_decrypt: feeds ciphertext blocks to the input decryptor and
// checks the sample pairs that come out.
// First the FIPS-197 example ciphertext and the four NIST SP 800-38A ECB
// example ciphertexts, whose plaintexts are known, so the word order and the
// noisy/clean split are checked against fixed answers. Then 40 blocks of
// random samples under random keys, encrypted by the aes128_enc core (itself
// checked in its own testbench), with random gaps on the input and random
// out_ready.
// Checked: every pair in order, the latency from block acceptance to the
// first pair (22 clocks), in_ready held low while pairs of the current block
// are still pending, and the number of pairs delivered.
// The vectors come from the AES standards; everything else is this
// testbench's own.
module tb_input_decrypt;
  import neurosec_pkg::*;
  localparam int LAT = 22;
  logic clk = 0, rst_n = 0;
  logic [127:0] key = '0, in_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  sample_t out_noisy, out_clean;
  always #5 clk = ~clk;

  input_decrypt dut (.*);

  logic e_start = 0, e_busy, e_done;
  logic [127:0] e_din = '0, e_dout;
  aes128_enc u_enc (.clk, .rst_n, .start(e_start), .key, .din(e_din), .busy(e_busy), .done(e_done), .dout(e_dout));

  int checks = 0, failures = 0;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // {key, plaintext, ciphertext}
  localparam logic [383:0] KAT [5] = '{
    {128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff, 128'h69c4e0d86a7b0430d8cdb78070b4c55a},
    {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h6bc1bee22e409f96e93d7e117393172a, 128'h3ad77bb40d7a3660a89ecaf32466ef97},
    {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'hae2d8a571e03ac9c9eb76fac45af8e51, 128'hf5d3d58503b9699de785895a96fdbaaf},
    {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h30c81c46a35ce411e5fbc1191a0a52ef, 128'h43b1cd7f598ece23881b00e3ed030688},
    {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'hf69f2445df4f9b17ad2b417be66c3710, 128'h7b0c785e27e8ad3f8223207104725dd4}
  };
  localparam int NRND = 40;

  logic [31:0] exp_q [$];
  int  pending = 0, got = 0, ready_viol = 0, nlat = 0;
  realtime acc_t, first_t;
  bit  wait_first = 0;

  // consumer: random out_ready, everything sampled at the falling edge
  always @(negedge clk) if (rst_n) begin
    out_ready = ($urandom_range(0, 3) != 0);   // taken at the next rising edge
    if (pending > 0 && in_ready) ready_viol++;
    if (out_valid && wait_first) begin
      first_t = $realtime; wait_first = 0;
      chk(int'((first_t - acc_t) / 10.0) == LAT, $sformatf("latency %0d", int'((first_t - acc_t) / 10.0)));
      nlat++;
    end
    if (out_valid && out_ready) begin
      logic [31:0] e;
      e = exp_q.pop_front();
      chk(out_noisy == sample_t'(e[31:16]) && out_clean == sample_t'(e[15:0]),
          $sformatf("pair %0d: got %h/%h want %h", got, out_noisy, out_clean, e));
      got++; pending--;
    end
  end

  task automatic send(input logic [127:0] k, input logic [127:0] ct, input logic [127:0] pt);
    @(negedge clk);
    repeat ($urandom_range(0, 3)) @(negedge clk);
    key = k; in_data = ct; in_valid = 1;
    while (!in_ready) @(negedge clk);
    acc_t = $realtime;
    for (int w = 0; w < 4; w++) exp_q.push_back(pt[127 - 32 * w -: 32]);
    @(posedge clk);
    pending += 4; wait_first = 1;
    #1 in_valid = 0; in_data = '0;
  endtask

  task automatic encrypt(input logic [127:0] k, input logic [127:0] pt, output logic [127:0] ct);
    @(negedge clk); key = k; e_din = pt; e_start = 1;
    @(negedge clk); e_start = 0;
    while (!e_done) @(negedge clk);
    ct = e_dout;
  endtask

  initial begin : main
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 5; i++) send(KAT[i][383:256], KAT[i][127:0], KAT[i][255:128]);
    for (int i = 0; i < NRND; i++) begin
      logic [127:0] k, pt, ct;
      k = {$urandom, $urandom, $urandom, $urandom};
      pt = {$urandom, $urandom, $urandom, $urandom};
      while (pending > 0) @(negedge clk);      // the key port is shared with the encryptor
      encrypt(k, pt, ct);
      send(k, ct, pt);
    end
    while (pending > 0) @(negedge clk);
    repeat (5) @(negedge clk);
    chk(got == 4 * (5 + NRND), $sformatf("%0d pairs delivered", got));
    chk(nlat == 5 + NRND, "latency measured for every block");
    chk(ready_viol == 0, $sformatf("in_ready high on %0d clocks with pairs pending", ready_viol));
    chk(!out_valid && in_ready, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: %0d pairs delivered", got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

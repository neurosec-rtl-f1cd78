// tb_aes128_dec: decrypts the FIPS-197 known-answer ciphertexts, the NIST
// SP 800-38A ECB example blocks and further vectors computed with a software
// AES, and checks the recovered plaintexts and the 21-cycle latency. Then it
// runs 64 random keys and blocks through the encryptor (itself checked
// against known answers in its own testbench) and back through the
// decryptor, which must return the original block.
// The vectors come from the AES standards, not from the paper.
module tb_aes128_dec;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [127:0] key, din, dout;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  aes128_dec dut (.*);

  logic e_start = 0, e_busy, e_done;
  logic [127:0] e_dout;
  aes128_enc u_ref (.clk, .rst_n, .start(e_start), .key, .din, .busy(e_busy), .done(e_done), .dout(e_dout));

  // {key, plaintext, ciphertext}: the four ECB-AES128 example blocks of NIST
  // SP 800-38A, then eight random cases computed with a software AES.
  localparam logic [383:0] KAT [12] = '{
    {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h6bc1bee22e409f96e93d7e117393172a, 128'h3ad77bb40d7a3660a89ecaf32466ef97},
    {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'hae2d8a571e03ac9c9eb76fac45af8e51, 128'hf5d3d58503b9699de785895a96fdbaaf},
    {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h30c81c46a35ce411e5fbc1191a0a52ef, 128'h43b1cd7f598ece23881b00e3ed030688},
    {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'hf69f2445df4f9b17ad2b417be66c3710, 128'h7b0c785e27e8ad3f8223207104725dd4},
    {128'h38b4e652e44da7f2370d9e260e271365, 128'h50a4a3a6d07f5c0c332f8b1224083fd2, 128'h2a1526a93654497163eacbd8f2f0f4ba},
    {128'h2b902f8911e81818f8c99d5d5d983195, 128'h7504d90e945de2e8f54ee781cc75f636, 128'hf79a52bf2330c781f902a02e8f4f690d},
    {128'hd85099095aa300165a67036f9b540d6b, 128'h8f0be21124179c3dd9f73817ce6e118d, 128'he32fd7515c1aa8d69cb4a020307914f0},
    {128'h264aad6cb6dd210faf94acd3cf92c190, 128'h237cb11f5d108cf25930263938b370a1, 128'h8781a68284bb0f6f698db55868121471},
    {128'hb5769fa0f1483f95a90d9df2f130d60f, 128'hcf04bd93f50ae69514da8c659ce2b10c, 128'hf86e4f0766254df44514846bd7e68f81},
    {128'hccdaebf990d19838b0d7ec0b3e97818e, 128'hcb96c4dbadbe172296d5234a42b24c6b, 128'h0b597edb7e156fcaddcddbeceee1c6b8},
    {128'ha4e6ed24ec636a8ac0a1271e58662792, 128'h38aaf84e58056d8f2fa8edd094ba97ae, 128'h74b8c0884092c84d5636337375f8a7ff},
    {128'h8b15442ee2db611a91bfe39469733a92, 128'h47d58fa3c55018300372555fd235f118, 128'h66289b7e0a5307fbdc46b8c5e71effce}
  };

  task automatic run(input logic [127:0] k, input logic [127:0] c, input logic [127:0] exp);
    int cyc;
    @(negedge clk); key = k; din = c; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (dout !== exp) begin failures++; $display("FAIL pt %h exp %h", dout, exp); end
    checks++;
    if (cyc != 21) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    key = '0; din = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(128'h000102030405060708090a0b0c0d0e0f, 128'h69c4e0d86a7b0430d8cdb78070b4c55a,
        128'h00112233445566778899aabbccddeeff);
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3925841d02dc09fbdc118597196a0b32,
        128'h3243f6a8885a308d313198a2e0370734);
    run(128'h0, 128'h66e94bd4ef8a2c3b884cfa59ca342b2e, 128'h0);
    foreach (KAT[n]) run(KAT[n][383:256], KAT[n][127:0], KAT[n][255:128]);
    repeat (64) begin
      logic [127:0] k, p;
      k = {$urandom, $urandom, $urandom, $urandom};
      p = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); key = k; din = p; e_start = 1;
      @(negedge clk); e_start = 0;
      while (!e_done) @(negedge clk);
      run(k, e_dout, p);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

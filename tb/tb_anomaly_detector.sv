// tb_anomaly_detector: plays a sequence of frame decisions and blocks through
// the monitor (WINDOW = 4 frames, threshold 3 detections) and checks the
// registered memory write port, the performance counters, the rate alarm at
// the end of a window (not raised at 2 of 4, raised at 3 of 4), withholding of
// a plain block from an attacked frame, the violation flag, and clr.
// Memory backpressure is random. Every write is compared, at its handshake,
// with a queue of the blocks expected to pass: data, tag and address. The
// first block must reach the port exactly one clock after it was accepted.
// The paper gives no test data. The stimulus, sizes and tolerances are this
// testbench's own.
module tb_anomaly_detector;
  import neurosec_pkg::*;
  localparam int WINDOW = 4;
  logic clk = 0, rst_n = 0, clr = 0, dec_valid = 0, dec_attack = 0, in_valid = 0, in_enc = 0;
  logic in_ready, mem_valid, mem_ready = 1, mem_enc, alarm, violation;
  logic [127:0] in_data, mem_data;
  logic [31:0] mem_addr;
  logic [7:0] anom_th;
  logic [15:0] frames, detections, blocks, enc_blocks, withheld;
  int checks = 0, failures = 0;
  int exp_addr = 32'h100, n_blk = 0, n_enc = 0, n_frames = 0, n_det = 0, n_seen = 0;
  logic [128:0] expq[$];
  bit rand_ready = 1'b1;
  always #5 clk = ~clk;

  anomaly_detector #(.WINDOW(WINDOW), .ADDR_W(32), .BASE_ADDR(32'h100)) dut (.*);

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // memory side: random ready, every handshake checked against the queue
  always @(negedge clk) mem_ready <= rand_ready ? ($urandom_range(0, 2) != 0) : 1'b1;
  always @(posedge clk) if (rst_n && mem_valid && mem_ready) begin
    logic [128:0] e;
    if (expq.size() == 0) chk(0, "write with nothing expected");
    else begin
      e = expq.pop_front();
      chk(mem_data == e[127:0] && mem_enc == e[128] && mem_addr == 32'(exp_addr), "write data / address / tag");
      exp_addr += 16; n_seen++;
    end
  end

  task automatic decide(input bit atk);
    dec_valid = 1; dec_attack = atk; @(negedge clk); dec_valid = 0;
    n_frames++; n_det += atk;
  endtask

  task automatic block(input bit enc, input bit expect_written);
    logic [127:0] d;
    d = {$urandom, $urandom, $urandom, $urandom};
    in_valid = 1; in_data = d; in_enc = enc;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    if (expect_written) begin expq.push_back({enc, d}); n_blk++; n_enc += enc; end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic drain;
    int n = 0;
    while ((expq.size() != 0 || mem_valid) && n < 100) begin @(negedge clk); n++; end
    chk(expq.size() == 0 && !mem_valid, "all expected blocks written");
  endtask

  initial begin
    in_data = 0; anom_th = 3;
    repeat (3) @(negedge clk); rst_n = 1;
    // latency of the write stage: accepted on one clock, offered on the next
    rand_ready = 0; @(negedge clk);
    decide(0);
    in_valid = 1; in_data = 128'h1234; in_enc = 0; #1;
    chk(in_ready && !mem_valid, "empty stage accepts");
    expq.push_back({1'b0, 128'h1234}); n_blk++;
    @(negedge clk); in_valid = 0;
    chk(mem_valid && mem_data == 128'h1234, "one clock latency");
    drain(); rand_ready = 1;
    // window 1: 2 of 4 attacked, all encrypted as they should be
    block(0, 1); block(0, 1);
    decide(1); block(1, 1); block(1, 1);
    decide(1); block(1, 1);
    decide(0); block(0, 1);
    drain();
    chk(!alarm, "no alarm at 2 of 4");
    // window 2: 3 of 4 attacked -> alarm at window end
    decide(1); block(1, 1);
    decide(1); block(1, 1);
    chk(!alarm, "no alarm mid-window");
    decide(0); block(0, 1);
    decide(1); block(1, 1);
    chk(alarm && !violation, "rate alarm");
    chk(frames == 16'(n_frames) && detections == 16'(n_det), "frame counters");
    clr = 1; @(negedge clk); clr = 0;
    chk(!alarm, "clr");
    // policy violation: attacked frame, plain block (withheld, never written)
    decide(1); block(1, 1); block(0, 0); block(1, 1);
    drain();
    chk(alarm && violation && withheld == 16'd1, "violation");
    chk(blocks == 16'(n_blk) && enc_blocks == 16'(n_enc), "block counters");
    clr = 1; @(negedge clk); clr = 0;
    // threshold 0 disables the rate test
    anom_th = 0;
    repeat (4) begin decide(1); block(1, 1); end
    drain();
    chk(!alarm, "threshold 0 disables");
    chk(n_seen == n_blk && blocks == 16'(n_blk), "write count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

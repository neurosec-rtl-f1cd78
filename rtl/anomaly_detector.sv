// anomaly_detector: monitor between the security module and the memory.
// It keeps hardware performance counters of the design's activity (frames
// decided, frames judged attacked, blocks written, blocks written encrypted,
// blocks withheld) and raises two kinds of anomaly:
//  * rate anomaly: within a window of WINDOW frames (one batch) at least
//    anom_th frames were judged attacked (anom_th = 0 disables the test);
//  * policy violation: a frame judged attacked produced a block that is not
//    encrypted. Such a block is withheld from memory.
// Either sets the sticky alarm, which is reported to the security module as
// lock: from then on every frame is encrypted. clr clears alarm and
// violation. Blocks that pass are written to memory on a valid/ready stream
// with a byte address that starts at BASE_ADDR and grows by 16 per block,
// tagged with mem_enc so that a reader knows which blocks to decrypt.
// Timing: the memory write port is a registered output stage, so a block
// accepted on in_valid/in_ready appears on mem_valid one clock later; the
// stage takes one block per clock while mem_ready is high. A withheld block
// is consumed at once and never reaches the stage. Counters and the alarm
// update on the clock after the event (block counters on the memory
// handshake).
// From the paper: a monitor placed after the encryption that reports
// anomalies to the security module, and the use of hardware performance
// counters. This design's own choices: what counts as an anomaly (the two
// events above), the 32-frame window (read from the paper's batch size),
// the lock as the form of reporting, and the write port.
module anomaly_detector
  import neurosec_pkg::*;
#(
  parameter int unsigned WINDOW    = 32,
  parameter int unsigned ADDR_W    = 32,
  parameter logic [31:0] BASE_ADDR = 32'h0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        anom_th,
  input  logic              clr,
  input  logic              dec_valid,
  input  logic              dec_attack,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [127:0]      in_data,
  input  logic              in_enc,
  output logic              mem_valid,
  input  logic              mem_ready,
  output logic [ADDR_W-1:0] mem_addr,
  output logic [127:0]      mem_data,
  output logic              mem_enc,
  output logic              alarm,
  output logic              violation,
  output logic [15:0]       frames,
  output logic [15:0]       detections,
  output logic [15:0]       blocks,
  output logic [15:0]       enc_blocks,
  output logic [15:0]       withheld
);

  localparam int unsigned WC_W = $clog2(WINDOW + 1);

  logic            cur_attack;
  logic [WC_W-1:0] win_cnt, win_det;
  logic            bad;

  logic            take;
  logic [ADDR_W-1:0] next_addr;

  assign bad      = in_valid && !in_enc && cur_attack;
  assign in_ready = bad || !mem_valid || mem_ready;
  assign take     = in_valid && !bad && (!mem_valid || mem_ready);

  logic [WC_W-1:0] det_now;
  assign det_now = win_det + WC_W'(dec_attack);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_attack <= 1'b0; win_cnt <= '0; win_det <= '0;
      mem_valid <= 1'b0; mem_data <= '0; mem_enc <= 1'b0;
      mem_addr <= ADDR_W'(BASE_ADDR); next_addr <= ADDR_W'(BASE_ADDR); alarm <= 1'b0; violation <= 1'b0;
      frames <= '0; detections <= '0; blocks <= '0; enc_blocks <= '0; withheld <= '0;
    end else begin
      if (dec_valid) begin
        cur_attack <= dec_attack;
        frames     <= frames + 16'd1;
        detections <= detections + 16'(dec_attack);
        if (int'(win_cnt) == WINDOW - 1) begin
          win_cnt <= '0;
          win_det <= '0;
          if (anom_th != 0 && 32'(det_now) >= 32'(anom_th)) alarm <= 1'b1;
        end else begin
          win_cnt <= win_cnt + 1'b1;
          win_det <= det_now;
        end
      end
      if (mem_valid && mem_ready) begin
        mem_valid  <= 1'b0;
        blocks     <= blocks + 16'd1;
        enc_blocks <= enc_blocks + 16'(mem_enc);
      end
      if (take) begin
        mem_valid <= 1'b1;
        mem_data  <= in_data;
        mem_enc   <= in_enc;
        mem_addr  <= next_addr;
        next_addr <= next_addr + ADDR_W'(16);
      end
      if (bad) begin
        violation <= 1'b1;
        alarm     <= 1'b1;
        withheld  <= withheld + 16'd1;
      end
      if (clr) begin
        alarm     <= 1'b0;
        violation <= 1'b0;
      end
    end
  end

  // A block offered to memory stays unchanged until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_valid && !mem_ready |=> mem_valid && $stable(mem_data) && $stable(mem_addr) && $stable(mem_enc));

endmodule

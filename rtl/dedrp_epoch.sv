// dedrp_epoch: epoch counter and key manager (the dynamic part of "DE").
//
// Two keys are live in an epoch: the current key and the target key. Over the
// epoch every iTable entry moves ("transitions") to the target key. The epoch
// length is a number of cache misses; in its second half the cleaner runs.
// When the epoch is over and the cleaner has scanned the whole table, the bank
// pulses swap: the target key becomes the current key, a fresh random target
// key is loaded from rnd_key, the phase bit flips (which makes every iTable
// entry untransitioned again) and the miss count restarts.
//
// Interface and timing: miss counts one miss per cycle it is high; swap acts
// at the clock edge. second_half is high once the count reaches half the
// epoch, epoch_end once it reaches EPOCH_MISSES (it saturates there until the
// swap). Reset loads KEY0 as current key, KEY1 as target key and phase 0.
//
// Epoch length in misses and the key swap follow the paper; holding the swap
// until the cleaner is done and the phase bit are this design's choices.
module dedrp_epoch
  import dedrp_pkg::*;
#(
  parameter int unsigned EPOCH_MISSES = 65536,
  parameter key_t        KEY0 = 64'h0123456789ABCDEF,
  parameter key_t        KEY1 = 64'hFEDCBA9876543210,
  localparam int unsigned CNT_W = $clog2(EPOCH_MISSES + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             miss,
  input  logic             swap,
  input  key_t             rnd_key,
  output key_t             key_cur,
  output key_t             key_tgt,
  output logic             phase,
  output logic             second_half,
  output logic             epoch_end,
  output logic [CNT_W-1:0] count
);

  assign second_half = (count >= CNT_W'(EPOCH_MISSES / 2));
  assign epoch_end   = (count >= CNT_W'(EPOCH_MISSES));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_cur <= KEY0;
      key_tgt <= KEY1;
      phase   <= 1'b0;
      count   <= '0;
    end else if (swap) begin
      key_cur <= key_tgt;
      key_tgt <= rnd_key;
      phase   <= ~phase;
      count   <= '0;
    end else if (miss && !epoch_end) begin
      count <= count + 1'b1;
    end
  end

endmodule

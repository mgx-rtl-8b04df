// mgx_mac_engine -- keyed hash that produces one 64-bit MAC per protection
// block (one accelerator transfer, 512 bytes by default).
//
// MGX computes MAC = H_KIV(V || PA || VN) over the ciphertext V of a whole
// coarse-grained block, and names AES-GCM cores as the engines that provide
// it.  This block realises H with the GCM construction (a GMAC over the
// ciphertext): the 128-bit ciphertext beats are folded into a GHASH
// accumulator, acc = (acc ^ V_i) * H in GF(2^128), a final length block
// {64'b0, bit length} is folded in the same way, and the result is XORed
// with a mask AES_KIV(PA || VN) of the block's counter.  The mask binds the
// address and the version number, so a replayed (stale VN) or relocated
// block gives a different MAC.  The top 64 bits are kept, the MAC width the
// scheme uses for 512-byte blocks.  Using the GCM construction for H, the
// all-ones hash-key input and the truncation to the upper half are this
// design's choices.
//
// Interface: `start` clears the accumulator; each `beat_valid` folds in one
// ciphertext beat (one per cycle, one GF(2^128) multiply per cycle);
// `fin_valid` with `mask` folds in the length block and one cycle later
// pulses `tag_valid` with the 64-bit `tag`.  start, beat_valid and fin_valid
// must not be asserted in the same cycle.
module mgx_mac_engine
  import mgx_pkg::*;
#(
  parameter int unsigned MAX_BEATS = 32   // 512-byte block / 16-byte beats
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [127:0]  h,          // hash key AES_KIV(all-ones)
  input  logic          start,
  input  logic          beat_valid,
  input  logic [127:0]  beat,
  input  logic          fin_valid,
  input  logic [MAC_W-1:0] mask,    // upper half of AES_KIV(PA || VN)
  output logic          tag_valid,
  output logic [MAC_W-1:0] tag
);
  localparam int unsigned CNT_W = $clog2(MAX_BEATS + 1);

  logic [127:0]     acc;
  logic [CNT_W-1:0] nbeats;
  logic [127:0]     mul_in, mul_out;
  logic [63:0]      bitlen;

  assign bitlen  = 64'(nbeats) << 7;          // 128 bits per beat
  assign mul_in  = fin_valid ? (acc ^ {64'h0, bitlen}) : (acc ^ beat);
  assign mul_out = gf128_mul(mul_in, h);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      nbeats    <= '0;
      tag_valid <= 1'b0;
      tag       <= '0;
    end else begin
      tag_valid <= 1'b0;
      if (start) begin
        acc    <= '0;
        nbeats <= '0;
      end else if (beat_valid) begin
        acc    <= mul_out;
        nbeats <= nbeats + 1'b1;
      end else if (fin_valid) begin
        acc       <= mul_out;
        tag       <= mul_out[127:64] ^ mask;
        tag_valid <= 1'b1;
      end
    end
  end

  a_start_alone: assert property (@(posedge clk) disable iff (!rst_n)
                                  start |-> !(beat_valid || fin_valid))
    else $error("mgx_mac_engine: start together with beat/fin");
  a_beat_fin: assert property (@(posedge clk) disable iff (!rst_n)
                               !(beat_valid && fin_valid))
    else $error("mgx_mac_engine: beat and fin in the same cycle");
endmodule

// aes128_pipe -- fully pipelined AES-128 encryption core.
//
// The memory protection unit uses two of these: one under the encryption key
// K_Enc produces the counter-mode keystream AES_KEnc(PA || VN), the other under
// the integrity key K_IV produces the MAC hash key and the per-block MAC masks.
// The scheme only requires "AES"; the round structure is FIPS-197, and the
// pipelined organisation (one block accepted per cycle, ten register stages)
// is this design's choice, so that keystream generation keeps up with a
// 128-bit-per-cycle data path.
//
// Interface: in_valid/in_block/in_tag enter every cycle (no back-pressure);
// exactly LATENCY = 10 cycles later out_valid/out_block/out_tag appear.
// in_tag is carried unchanged alongside the block.  The round keys are
// expanded combinationally from `key`, which must stay constant while blocks
// are in flight.  Reset clears the valid bits only.
module aes128_pipe
  import mgx_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [127:0]       key,
  input  logic               in_valid,
  input  logic [127:0]       in_block,
  input  logic [TAG_W-1:0]   in_tag,
  output logic               out_valid,
  output logic [127:0]       out_block,
  output logic [TAG_W-1:0]   out_tag
);
  localparam int unsigned NR = 10;

  // Round keys: one generate step per key-schedule round.
  logic [127:0] rk [NR+1];
  assign rk[0] = key;
  for (genvar r = 1; r <= NR; r++) begin : g_key
    localparam logic [7:0] RCON = (r <= 8) ? 8'(1 << (r-1)) : ((r == 9) ? 8'h1b : 8'h36);
    assign rk[r] = next_round_key(rk[r-1], RCON);
  end

  // st[r] is the pipeline register after round r (r = 1..NR); the input
  // whitening with round key 0 is combinational in front of round 1.
  logic [127:0]     st  [1:NR];
  logic             vld [1:NR];
  logic [TAG_W-1:0] tg  [1:NR];

  for (genvar r = 1; r <= NR; r++) begin : g_round
    logic [127:0]     prev, nxt;
    logic             prev_v;
    logic [TAG_W-1:0] prev_t;
    if (r == 1) begin : g_first
      assign prev   = in_block ^ rk[0];
      assign prev_v = in_valid;
      assign prev_t = in_tag;
    end else begin : g_next
      assign prev   = st[r-1];
      assign prev_v = vld[r-1];
      assign prev_t = tg[r-1];
    end
    if (r == NR) begin : g_last
      assign nxt = shift_rows(sub_bytes(prev)) ^ rk[r];
    end else begin : g_mid
      assign nxt = mix_columns(shift_rows(sub_bytes(prev))) ^ rk[r];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[r] <= 1'b0;
        st[r]  <= '0;
        tg[r]  <= '0;
      end else begin
        vld[r] <= prev_v;
        st[r]  <= nxt;
        tg[r]  <= prev_t;
      end
    end
  end

  assign out_valid = vld[NR];
  assign out_block = st[NR];
  assign out_tag   = tg[NR];
endmodule

// mgx_mpu -- MGX memory protection unit: AES-CTR encryption plus one MAC per
// accelerator transfer, with the version number supplied from on-chip state.
//
// The functional unit issues transfers of `req_beats` 16-byte beats (up to
// MAX_BEATS = 32, i.e. the 512-byte blocks the scheme protects with one MAC;
// a smaller count gives fine-grained protection, e.g. 4 beats = 64 bytes).
// Every transfer carries the 64-bit VN that the control processor chose for
// it.  Beat i at address PA_i = req_addr + 16*i is encrypted as
//     V_i = U_i ^ AES_KEnc(PA_i || VN)
// and the whole transfer is protected by one 64-bit MAC
//     MAC = GHASH_H(V_0 .. V_{n-1}, length) ^ AES_KIV(req_addr || VN)
// (see mgx_mac_engine).  No VN ever leaves the chip, so there is no VN
// region and no integrity tree in DRAM; only the MACs are stored.
//
// Writes: the counters of all beats enter the K_Enc AES pipeline as soon as
// the request is accepted, so the keystream is ready before the data; each
// plaintext beat is then XORed and written to DRAM in the same cycle (one
// beat per cycle when DRAM accepts), folded into the MAC, and finally the
// MAC is written to its slot.
// Reads: the data beats and the MAC are requested from DRAM back to back;
// returning beats are decrypted and passed on while the MAC accumulates; the
// recomputed MAC is compared with the stored one and `done_auth_fail` is
// raised on a mismatch (tampering, relocation or replay of stale data).
// Decrypted beats are forwarded before the check completes; the consumer
// must discard the transfer when done_auth_fail is set.
//
// Memory layout (this design's choice): the MAC of a transfer starting at PA
// lives at MAC_BASE + (PA >> 6) * 8, one 8-byte slot for every 64-byte
// region, so that transfers of any granularity from 64 bytes to 512 bytes
// have a slot; transfers must therefore start on a 64-byte boundary.
// MAC_BASE = 16 GiB puts the MAC region right above a 16 GiB protected
// memory.  A DRAM word is 16 bytes, byte k in bits [8k+7:8k], with a byte
// strobe; read responses return in request order.
//
// Keys: a key_load pulse (only while idle) installs K_Enc and K_IV and
// derives the hash key H = AES_KIV(all-ones) in 11 cycles; requests are
// refused until then.  One transfer is handled at a time.
module mgx_mpu
  import mgx_pkg::*;
#(
  parameter int unsigned  MAX_BEATS     = 32,
  parameter int unsigned  LOG2_MAC_GRAN = 6,
  parameter logic [63:0]  MAC_BASE      = 64'h0000_0004_0000_0000
) (
  input  logic                clk,
  input  logic                rst_n,
  // keys from the control processor
  input  logic                key_load,
  input  logic [127:0]        k_enc,
  input  logic [127:0]        k_iv,
  output logic                key_ready,
  // transfer request from the functional unit
  input  logic                req_valid,
  output logic                req_ready,
  input  logic                req_we,
  input  logic [63:0]         req_addr,
  input  logic [$clog2(MAX_BEATS+1)-1:0] req_beats,
  input  vn_t                 req_vn,
  // plaintext in (writes)
  input  logic                wvalid,
  output logic                wready,
  input  logic [127:0]        wdata,
  // plaintext out (reads)
  output logic                rvalid,
  input  logic                rready,
  output logic [127:0]        rdata,
  // completion
  output logic                done_valid,
  output logic                done_we,
  output logic                done_auth_fail,
  // DRAM controller side (ciphertext and MACs)
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output logic                mem_req_we,
  output logic [63:0]         mem_req_addr,
  output logic [127:0]        mem_req_wdata,
  output logic [15:0]         mem_req_wstrb,
  input  logic                mem_rsp_valid,
  output logic                mem_rsp_ready,
  input  logic [127:0]        mem_rsp_rdata
);
  localparam int unsigned CNT_W = $clog2(MAX_BEATS + 1);
  localparam int unsigned IDX_W = (MAX_BEATS > 1) ? $clog2(MAX_BEATS) : 1;

  typedef enum logic [3:0] {
    S_NOKEY, S_KEYGEN, S_IDLE, S_WDATA, S_WFIN, S_WTAG, S_WMAC,
    S_RDATA, S_RFIN, S_RTAG, S_DONE
  } state_e;

  state_e state;

  // ------------------------------------------------------------------ keys
  logic [127:0] kenc_q, kiv_q, h_q;

  // ------------------------------------------------------------ request
  logic             we_q;
  logic [63:0]      base_q;
  logic [CNT_W-1:0] nbeats_q;
  vn_t              vn_q;
  logic [63:0]      mac_addr_q;     // 8-byte aligned; bit 3 picks the half of the 16-byte word

  // ------------------------------------------------- counter issue (K_Enc)
  logic [CNT_W-1:0] issue_cnt;      // counters sent into the AES pipeline
  logic             enc_in_valid, enc_out_valid;
  logic [127:0]     enc_in_block, enc_out_block;
  logic [IDX_W-1:0] enc_in_tag, enc_out_tag;

  logic busy_xfer;
  assign busy_xfer = (state == S_WDATA) || (state == S_RDATA);

  assign enc_in_valid = busy_xfer && (issue_cnt < nbeats_q);
  assign enc_in_tag   = IDX_W'(issue_cnt);
  assign enc_in_block = {base_q + (64'(issue_cnt) << 4), vn_q};

  aes128_pipe #(.TAG_W(IDX_W)) u_aes_enc (
    .clk, .rst_n, .key(kenc_q),
    .in_valid(enc_in_valid), .in_block(enc_in_block), .in_tag(enc_in_tag),
    .out_valid(enc_out_valid), .out_block(enc_out_block), .out_tag(enc_out_tag)
  );

  // keystream buffer, indexed by beat number
  logic [127:0]     ks_buf [MAX_BEATS];
  logic [CNT_W-1:0] ks_cnt;         // keystream beats available
  logic [CNT_W-1:0] data_cnt;       // data beats processed
  logic             ks_ok;
  assign ks_ok = (ks_cnt > data_cnt);

  always_ff @(posedge clk) begin
    if (enc_out_valid) ks_buf[enc_out_tag] <= enc_out_block;
  end

  // ---------------------------------------- H and MAC masks (K_IV)
  logic         mac_in_valid, mac_out_valid;
  logic [127:0] mac_in_block, mac_out_block;
  logic [0:0]   mac_in_tag, mac_out_tag;   // 1: hash key H, 0: block mask
  logic         mask_sent, mask_ok;
  logic [63:0]  mask_q;

  always_comb begin
    mac_in_valid = 1'b0;
    mac_in_block = {base_q, vn_q};
    mac_in_tag   = 1'b0;
    if (state == S_KEYGEN && !mask_sent) begin
      mac_in_valid = 1'b1;
      mac_in_block = '1;
      mac_in_tag   = 1'b1;
    end else if (busy_xfer && !mask_sent) begin
      mac_in_valid = 1'b1;
    end
  end

  aes128_pipe #(.TAG_W(1)) u_aes_iv (
    .clk, .rst_n, .key(kiv_q),
    .in_valid(mac_in_valid), .in_block(mac_in_block), .in_tag(mac_in_tag),
    .out_valid(mac_out_valid), .out_block(mac_out_block), .out_tag(mac_out_tag)
  );

  // ------------------------------------------------------------ MAC engine
  logic        me_start, me_beat, me_fin, me_tag_valid;
  logic [127:0] me_beat_data;
  logic [63:0] me_tag;

  mgx_mac_engine #(.MAX_BEATS(MAX_BEATS)) u_mac (
    .clk, .rst_n, .h(h_q), .start(me_start),
    .beat_valid(me_beat), .beat(me_beat_data),
    .fin_valid(me_fin), .mask(mask_q),
    .tag_valid(me_tag_valid), .tag(me_tag)
  );

  // ------------------------------------------------------------ datapath
  logic [CNT_W-1:0] rdreq_cnt;      // read requests sent (data + MAC)
  logic [63:0]      stored_mac;
  logic [63:0]      tag_q;
  logic             fail_q;

  logic wbeat_fire, rbeat_fire, rmac_fire;
  assign wbeat_fire = (state == S_WDATA) && (data_cnt < nbeats_q) && ks_ok && wvalid && mem_req_ready;
  assign rbeat_fire = (state == S_RDATA) && (data_cnt < nbeats_q) && ks_ok && mem_rsp_valid && rready;
  assign rmac_fire  = (state == S_RDATA) && (data_cnt == nbeats_q) && mem_rsp_valid;

  logic [127:0] ks_cur;
  assign ks_cur = ks_buf[data_cnt[IDX_W-1:0]];

  assign wready = (state == S_WDATA) && (data_cnt < nbeats_q) && ks_ok && mem_req_ready;
  assign rvalid = (state == S_RDATA) && (data_cnt < nbeats_q) && ks_ok && mem_rsp_valid;
  assign rdata  = mem_rsp_rdata ^ ks_cur;
  assign mem_rsp_ready = ((state == S_RDATA) && (data_cnt < nbeats_q) && ks_ok && rready) || rmac_fire;

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = base_q + (64'(data_cnt) << 4);
    mem_req_wdata = wdata ^ ks_cur;
    mem_req_wstrb = '1;
    if (state == S_WDATA) begin
      mem_req_valid = (data_cnt < nbeats_q) && ks_ok && wvalid;
      mem_req_we    = 1'b1;
    end else if (state == S_WMAC) begin
      mem_req_valid = 1'b1;
      mem_req_we    = 1'b1;
      mem_req_addr  = {mac_addr_q[63:4], 4'b0000};
      mem_req_wdata = {tag_q, tag_q};
      mem_req_wstrb = mac_addr_q[3] ? 16'hff00 : 16'h00ff;
    end else if (state == S_RDATA && rdreq_cnt <= nbeats_q) begin
      mem_req_valid = 1'b1;
      mem_req_addr  = (rdreq_cnt == nbeats_q) ? {mac_addr_q[63:4], 4'b0000}
                                              : base_q + (64'(rdreq_cnt) << 4);
    end
  end

  assign me_beat      = wbeat_fire || rbeat_fire;
  assign me_beat_data = wbeat_fire ? mem_req_wdata : mem_rsp_rdata;
  assign me_fin       = ((state == S_WFIN) || (state == S_RFIN)) && mask_ok;

  assign key_ready = (state != S_NOKEY) && (state != S_KEYGEN);
  assign req_ready = (state == S_IDLE) && !key_load;

  // ------------------------------------------------------------ control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_NOKEY;
      kenc_q      <= '0;
      kiv_q       <= '0;
      h_q         <= '0;
      we_q        <= 1'b0;
      base_q      <= '0;
      nbeats_q    <= '0;
      vn_q        <= '0;
      mac_addr_q  <= '0;
      issue_cnt   <= '0;
      ks_cnt      <= '0;
      data_cnt    <= '0;
      rdreq_cnt   <= '0;
      mask_sent   <= 1'b0;
      mask_ok     <= 1'b0;
      mask_q      <= '0;
      stored_mac  <= '0;
      tag_q       <= '0;
      fail_q      <= 1'b0;
      me_start    <= 1'b0;
      done_valid  <= 1'b0;
      done_we     <= 1'b0;
      done_auth_fail <= 1'b0;
    end else begin
      me_start   <= 1'b0;
      done_valid <= 1'b0;

      if (enc_in_valid) issue_cnt <= issue_cnt + 1'b1;
      if (enc_out_valid) ks_cnt <= ks_cnt + 1'b1;
      if (mac_in_valid) mask_sent <= 1'b1;
      if (mac_out_valid) begin
        if (mac_out_tag[0]) h_q <= mac_out_block;
        else begin
          mask_q  <= mac_out_block[127:64];
          mask_ok <= 1'b1;
        end
      end
      if (wbeat_fire || rbeat_fire) data_cnt <= data_cnt + 1'b1;
      if (state == S_RDATA && mem_req_valid && mem_req_ready) rdreq_cnt <= rdreq_cnt + 1'b1;

      unique case (state)
        S_NOKEY, S_IDLE: begin
          if (key_load) begin
            kenc_q    <= k_enc;
            kiv_q     <= k_iv;
            mask_sent <= 1'b0;
            state     <= S_KEYGEN;
          end else if (state == S_IDLE && req_valid) begin
            we_q       <= req_we;
            base_q     <= req_addr;
            nbeats_q   <= req_beats;
            vn_q       <= req_vn;
            mac_addr_q <= MAC_BASE + ((req_addr >> LOG2_MAC_GRAN) << 3);
            issue_cnt  <= '0;
            ks_cnt     <= '0;
            data_cnt   <= '0;
            rdreq_cnt  <= '0;
            mask_sent  <= 1'b0;
            mask_ok    <= 1'b0;
            me_start   <= 1'b1;
            state      <= req_we ? S_WDATA : S_RDATA;
          end
        end
        S_KEYGEN: if (mac_out_valid && mac_out_tag[0]) state <= S_IDLE;
        S_WDATA:  if (wbeat_fire && (data_cnt + 1'b1 == nbeats_q)) state <= S_WFIN;
        S_WFIN:   if (me_fin) state <= S_WTAG;
        S_WTAG:   if (me_tag_valid) begin
                    tag_q <= me_tag;
                    state <= S_WMAC;
                  end
        S_WMAC:   if (mem_req_ready) begin
                    fail_q <= 1'b0;
                    state  <= S_DONE;
                  end
        S_RDATA:  if (rmac_fire) begin
                    stored_mac <= mac_addr_q[3] ? mem_rsp_rdata[127:64] : mem_rsp_rdata[63:0];
                    state      <= S_RFIN;
                  end
        S_RFIN:   if (me_fin) state <= S_RTAG;
        S_RTAG:   if (me_tag_valid) begin
                    fail_q <= (me_tag != stored_mac);
                    state  <= S_DONE;
                  end
        S_DONE: begin
          done_valid     <= 1'b1;
          done_we        <= we_q;
          done_auth_fail <= fail_q;
          state          <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_req_aligned: assert property (@(posedge clk) disable iff (!rst_n)
      (req_valid && req_ready) |-> (req_addr[LOG2_MAC_GRAN-1:0] == '0))
    else $error("mgx_mpu: transfer not aligned to the MAC granularity");
  a_req_len: assert property (@(posedge clk) disable iff (!rst_n)
      (req_valid && req_ready) |-> (req_beats != '0 && 32'(req_beats) <= MAX_BEATS))
    else $error("mgx_mpu: transfer length out of range");
  a_ks_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
      enc_out_valid |-> (32'(ks_cnt) < MAX_BEATS))
    else $error("mgx_mpu: keystream buffer overrun");
endmodule

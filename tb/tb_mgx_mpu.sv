// tb_mgx_mpu -- self-checking test of the memory protection unit.
//
// Expected ciphertext and MAC values come from an independent software model
// of  V_i = U_i ^ AES_KEnc(PA_i || VN)  and
//     MAC = upper64(GHASH_H(V, len) ^ AES_KIV(PA || VN)), H = AES_KIV(1^128).
// The test
//   1. writes a 512-byte block (32 beats, one MAC) and compares the DRAM
//      ciphertext and the stored MAC with the model;
//   2. writes a 64-byte block (4 beats, fine-grained MAC) likewise;
//   3. reads both back: plaintext must match, MAC check must pass;
//   4. flips one ciphertext bit: the read must report an integrity failure;
//   5. replays an old block and its MAC after a newer write: failure;
//   6. reads with a wrong VN: failure;
//   7. checks the streaming rate: with a DRAM that never stalls, a 32-beat
//      write takes at most 32 + 17 cycles from request to completion (request
//      handshake, ten cycles of AES latency, MAC finish, MAC write, done),
//      and a 32-beat read at most 32 + 17 + DRAM latency;
//   8. repeats write/read round trips on a randomly stalling DRAM.
module tb_mgx_mpu;
  import mgx_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam logic [127:0] KENC = 128'h000102030405060708090a0b0c0d0e0f;
  localparam logic [127:0] KIV  = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam logic [63:0]  MACB = 64'h0000_0004_0000_0000;
  localparam int           LAT  = 8;

  logic key_load, key_ready;
  logic req_valid, req_ready, req_we;
  logic [63:0] req_addr;
  logic [5:0]  req_beats;
  vn_t         req_vn;
  logic wvalid, wready, rvalid, rready;
  logic [127:0] wdata, rdata;
  logic done_valid, done_we, done_auth_fail;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid, mem_rsp_ready;
  logic [63:0] mem_req_addr;
  logic [127:0] mem_req_wdata, mem_rsp_rdata;
  logic [15:0] mem_req_wstrb;
  logic stall_mode;

  mgx_mpu dut (
    .clk, .rst_n, .key_load, .k_enc(KENC), .k_iv(KIV), .key_ready,
    .req_valid, .req_ready, .req_we, .req_addr, .req_beats, .req_vn,
    .wvalid, .wready, .wdata, .rvalid, .rready, .rdata,
    .done_valid, .done_we, .done_auth_fail,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_req_wstrb, .mem_rsp_valid, .mem_rsp_ready, .mem_rsp_rdata
  );

  // Two DRAM models: one that never stalls, one that stalls at random.
  logic f_req_ready, f_rsp_valid, s_req_ready, s_rsp_valid;
  logic [127:0] f_rsp_rdata, s_rsp_rdata;
  mgx_dram_model #(.LATENCY(LAT), .STALL(1'b0)) dram (
    .clk, .rst_n, .req_valid(mem_req_valid && !stall_mode), .req_ready(f_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .req_wstrb(mem_req_wstrb), .rsp_valid(f_rsp_valid), .rsp_ready(mem_rsp_ready && !stall_mode),
    .rsp_rdata(f_rsp_rdata)
  );
  mgx_dram_model #(.LATENCY(LAT), .STALL(1'b1)) sdram (
    .clk, .rst_n, .req_valid(mem_req_valid && stall_mode), .req_ready(s_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .req_wstrb(mem_req_wstrb), .rsp_valid(s_rsp_valid), .rsp_ready(mem_rsp_ready && stall_mode),
    .rsp_rdata(s_rsp_rdata)
  );
  assign mem_req_ready = stall_mode ? s_req_ready : f_req_ready;
  assign mem_rsp_valid = stall_mode ? s_rsp_valid : f_rsp_valid;
  assign mem_rsp_rdata = stall_mode ? s_rsp_rdata : f_rsp_rdata;

  int checks = 0, failures = 0;
  int cycle = 0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [127:0] pattern(input longint unsigned seed, input longint unsigned i);
    longint unsigned hi, lo;
    hi = seed * 64'h9E3779B97F4A7C15 + i * 64'h632BE59BD9B4E019;
    lo = seed * 64'h2545F4914F6CDD1D + i;
    return {hi, lo};
  endfunction

  // One protected write of n beats of pattern(seed, i); returns cycles taken.
  task automatic do_write(input logic [63:0] addr, input vn_t vn, input int n,
                          input longint unsigned seed, output int cyc);
    int start, sent;
    start = cycle;
    req_valid = 1'b1; req_we = 1'b1; req_addr = addr; req_beats = 6'(n); req_vn = vn;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 1'b0;
    sent = 0;
    fork
      begin
        while (sent < n) begin
          wvalid = 1'b1;
          wdata = pattern(seed, longint'(sent));
          @(posedge clk);
          if (wready) sent++;
          #1;
        end
        wvalid = 1'b0;
      end
      begin
        do @(posedge clk); while (!done_valid);
      end
    join
    #1;
    check(done_we === 1'b1 && done_auth_fail === 1'b0, "write completion");
    cyc = cycle - start;
  endtask

  // One protected read; checks data against pattern(seed, i) if check_data.
  task automatic do_read(input logic [63:0] addr, input vn_t vn, input int n,
                         input longint unsigned seed, input bit check_data,
                         output bit auth_fail, output int cyc);
    int start, got, bad;
    start = cycle;
    req_valid = 1'b1; req_we = 1'b0; req_addr = addr; req_beats = 6'(n); req_vn = vn;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 1'b0;
    got = 0; bad = 0;
    rready = 1'b1;
    do begin
      @(posedge clk);
      if (rvalid && rready) begin
        if (rdata !== pattern(seed, longint'(got))) bad++;
        got++;
      end
      #1 rready = stall_mode ? (($urandom % 3) != 0) : 1'b1;
    end while (!done_valid);
    if (check_data) begin
      check(got == n, $sformatf("read beat count %0d", got));
      check(bad == 0, $sformatf("read plaintext mismatches %0d", bad));
    end
    auth_fail = done_auth_fail;
    cyc = cycle - start;
  endtask

  function automatic logic [63:0] mac_at(input logic [63:0] a, input bit stalled);
    logic [63:0] ma;
    logic [127:0] w;
    ma = MACB + ((a >> 6) << 3);
    w = stalled ? sdram.rd(ma) : dram.rd(ma);
    return ma[3] ? w[127:64] : w[63:0];
  endfunction

  bit fail;
  int cyc;
  logic [127:0] old_ct [32];
  logic [127:0] old_mac_word;

  initial begin
    key_load = 1'b0; req_valid = 1'b0; req_we = 1'b0; req_addr = '0; req_beats = '0;
    req_vn = '0; wvalid = 1'b0; wdata = '0; rready = 1'b1; stall_mode = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    check(key_ready === 1'b0 && req_ready === 1'b0, "no requests before keys");
    key_load = 1'b1;
    @(posedge clk); #1;
    key_load = 1'b0;
    repeat (11) @(posedge clk);
    #1 check(key_ready === 1'b1, "hash key derived within 11 cycles");

    // 1. 512-byte block, VN {00, 6}
    do_write(64'h1000, '{vtype: VT_FEATURE, cnt: 62'd6}, 32, 1, cyc);
    check(cyc <= 32 + 17, $sformatf("32-beat write took %0d cycles", cyc));
    check(dram.rd(64'h1000) === 128'h1be138aabea42a1a339187e220ed179d, "first ciphertext beat");
    check(dram.rd(64'h11f0) === 128'ha885bf0650387e862ca6d2e3df2dde71, "last ciphertext beat");
    check(mac_at(64'h1000, 0) === 64'h90076b7e53e42fde, "512-byte block MAC");
    check(dram.n_writes == 33, $sformatf("one MAC write per 512 bytes (%0d writes)", dram.n_writes));

    // 2. 64-byte block, VN {01, 3}
    do_write(64'h2040, '{vtype: VT_WEIGHT, cnt: 62'd3}, 4, 2, cyc);
    check(dram.rd(64'h2040) === 128'hc39b3a098fcb61eb9773f4004c149ff9, "64-byte block first beat");
    check(dram.rd(64'h2070) === 128'h145064e94b82e1c77045bc5befc8ee2c, "64-byte block last beat");
    check(mac_at(64'h2040, 0) === 64'h7c5810042ccb1624, "64-byte block MAC");

    // 3. read back
    do_read(64'h1000, '{vtype: VT_FEATURE, cnt: 62'd6}, 32, 1, 1, fail, cyc);
    check(!fail, "512-byte read verifies");
    check(cyc <= 32 + 17 + LAT, $sformatf("32-beat read took %0d cycles", cyc));
    do_read(64'h2040, '{vtype: VT_WEIGHT, cnt: 62'd3}, 4, 2, 1, fail, cyc);
    check(!fail, "64-byte read verifies");

    // 4. tamper with one bit of ciphertext
    dram.mem[60'(64'h1100 >> 4)] = dram.mem[60'(64'h1100 >> 4)] ^ (128'h1 << 77);
    do_read(64'h1000, '{vtype: VT_FEATURE, cnt: 62'd6}, 32, 1, 0, fail, cyc);
    check(fail, "tampered ciphertext detected");
    dram.mem[60'(64'h1100 >> 4)] = dram.mem[60'(64'h1100 >> 4)] ^ (128'h1 << 77);

    // 5. replay: keep the VN-6 block, overwrite with VN 7, put the old one back
    for (int i = 0; i < 32; i++) old_ct[i] = dram.rd(64'h1000 + 64'(16 * i));
    old_mac_word = dram.rd(MACB + ((64'h1000 >> 6) << 3));
    do_write(64'h1000, '{vtype: VT_FEATURE, cnt: 62'd7}, 32, 3, cyc);
    do_read(64'h1000, '{vtype: VT_FEATURE, cnt: 62'd7}, 32, 3, 1, fail, cyc);
    check(!fail, "new version verifies");
    for (int i = 0; i < 32; i++) dram.mem[60'(64'h1000 >> 4) + 60'(i)] = old_ct[i];
    dram.mem[60'((MACB + ((64'h1000 >> 6) << 3)) >> 4)] = old_mac_word;
    do_read(64'h1000, '{vtype: VT_FEATURE, cnt: 62'd7}, 32, 3, 0, fail, cyc);
    check(fail, "replayed stale block detected");

    // 6. wrong VN (type tag differs)
    do_read(64'h2040, '{vtype: VT_FEATURE, cnt: 62'd3}, 4, 2, 0, fail, cyc);
    check(fail, "wrong VN detected");

    // 7/8. random round trips on a stalling DRAM
    stall_mode = 1'b1;
    for (int k = 0; k < 6; k++) begin
      int n;
      logic [63:0] a;
      n = (k % 2) ? 32 : 1 + ($urandom % 8);
      a = 64'h10_0000 + 64'(k) * 64'h400;
      do_write(a, '{vtype: VT_GRADIENT, cnt: 62'(100 + k)}, n, longint'(10 + k), cyc);
      do_read(a, '{vtype: VT_GRADIENT, cnt: 62'(100 + k)}, n, longint'(10 + k), 1, fail, cyc);
      check(!fail, $sformatf("stalled round trip %0d verifies", k));
    end
    check(sdram.n_stalls > 0, "DRAM back-pressure exercised");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mgx_secure_accel -- end-to-end test of the MGX protection core at its
// default parameters.
//
// The testbench plays the control processor (VN-table commands and keys) and
// the functional unit (transfers and the arithmetic on the data), in front of
// a randomly stalling DRAM model.  Data are 16-byte beats of four 32-bit
// lanes.  It runs:
//
//  1. DNN inference, one tiled layer as in the tiled-conv pseudocode: input x
//     in t = 3 tiles of 512 bytes at one VN, weights as 64-byte blocks under
//     VN_W; per tile the layer reads x_i and w_i, re-reads the partial output
//     y (from the second tile on), accumulates y += w_i * x_i and writes y
//     under a fresh VN_F.  VN_F[y] must end at n + t and y must equal a
//     software reference.
//  2. One training step: gradients written under VN_G, a weight update
//     under VN_W + 1; reading the weights with the old VN_W must fail.
//  3. Two PageRank-style iterations of an 8-vertex SpMV in 4-vertex tiles:
//     adjacency tiles under a constant VN with one MAC per tile, rank vector
//     read with Iter-1, updated ranks written with Iter (ping-pong buffers).
//     Final ranks must equal the reference.
//  4. A flipped ciphertext bit and a replayed stale tile must be detected.
//  5. A VN overflow must raise cp_overflow; a key change must make data
//     written under the old keys fail verification.
//
// Every mechanism (coarse and fine MACs, VN increments of each kind, graph
// iterations, integrity failures, overflow, re-keying, DRAM back-pressure,
// read back-pressure) is counted, and one that never happened counts as a
// failure.
module tb_mgx_secure_accel;
  import mgx_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  // ---------------------------------------------------------------- DUT
  logic        cp_cmd_valid, cp_ovf_clear, cp_overflow, cp_key_load, cp_key_ready;
  vn_op_e      cp_cmd_op;
  logic [6:0]  cp_cmd_layer;
  logic [1:0]  cp_cmd_slot;
  vn_type_e    cp_cmd_vtype;
  logic [VNCNT_W-1:0] cp_cmd_value;
  logic [127:0] cp_k_enc, cp_k_iv;
  logic        fu_req_valid, fu_req_ready, fu_req_we, fu_wvalid, fu_wready;
  logic        fu_rvalid, fu_rready, fu_done_valid, fu_done_we, fu_done_auth_fail;
  logic [63:0] fu_req_addr;
  logic [5:0]  fu_req_beats;
  logic [1:0]  fu_req_slot;
  logic [127:0] fu_wdata, fu_rdata;
  logic        mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid, mem_rsp_ready;
  logic [63:0] mem_req_addr;
  logic [127:0] mem_req_wdata, mem_rsp_rdata;
  logic [15:0] mem_req_wstrb;

  mgx_secure_accel dut (.*);

  mgx_dram_model #(.LATENCY(20), .STALL(1'b1)) dram (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .req_wstrb(mem_req_wstrb), .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready),
    .rsp_rdata(mem_rsp_rdata)
  );

  // ---------------------------------------------------------------- bookkeeping
  int checks = 0, failures = 0;
  int n_coarse = 0, n_fine = 0, n_vn_f = 0, n_vn_g = 0, n_vn_w = 0, n_iter = 0;
  int n_authfail = 0, n_overflow = 0, n_rekey = 0, n_rd_backpressure = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  typedef logic [127:0] beat_t;
  typedef beat_t beats_t [];

  // ---------------------------------------------------------------- CP side
  task automatic vn_cmd(input vn_op_e op, input int layer, input int slot,
                        input longint value = 0, input vn_type_e vt = VT_FEATURE);
    cp_cmd_valid = 1'b1;
    cp_cmd_op    = op;
    cp_cmd_layer = 7'(layer);
    cp_cmd_slot  = 2'(slot);
    cp_cmd_value = VNCNT_W'(value);
    cp_cmd_vtype = vt;
    @(posedge clk); #1;
    cp_cmd_valid = 1'b0;
    case (op)
      VOP_WR_F: n_vn_f++;
      VOP_WR_G: n_vn_g++;
      VOP_WR_W: n_vn_w++;
      VOP_IT_INC: n_iter++;
      default: ;
    endcase
  endtask

  task automatic load_keys(input logic [127:0] ke, input logic [127:0] ki);
    cp_k_enc = ke; cp_k_iv = ki; cp_key_load = 1'b1;
    @(posedge clk); #1;
    cp_key_load = 1'b0;
    while (!cp_key_ready) begin @(posedge clk); #1; end
  endtask

  // ---------------------------------------------------------------- FU side
  task automatic count_gran(input int n);
    if (n == 32) n_coarse++; else n_fine++;
  endtask

  task automatic fu_write(input logic [63:0] addr, input int slot, input beats_t d);
    int sent;
    fu_req_valid = 1'b1; fu_req_we = 1'b1; fu_req_addr = addr;
    fu_req_beats = 6'(d.size()); fu_req_slot = 2'(slot);
    do @(posedge clk); while (!fu_req_ready);
    #1 fu_req_valid = 1'b0;
    sent = 0;
    fork
      begin
        while (sent < d.size()) begin
          fu_wvalid = 1'b1;
          fu_wdata  = d[sent];
          @(posedge clk);
          if (fu_wready) sent++;
          #1;
        end
        fu_wvalid = 1'b0;
      end
      begin
        do @(posedge clk); while (!fu_done_valid);
      end
    join
    #1;
    check(fu_done_we && !fu_done_auth_fail, "write completes");
    count_gran(d.size());
  endtask

  task automatic fu_read(input logic [63:0] addr, input int slot, input int n,
                         output beats_t d, output bit fail);
    int got;
    d = new[n];
    fu_req_valid = 1'b1; fu_req_we = 1'b0; fu_req_addr = addr;
    fu_req_beats = 6'(n); fu_req_slot = 2'(slot);
    do @(posedge clk); while (!fu_req_ready);
    #1 fu_req_valid = 1'b0;
    got = 0;
    do begin
      @(posedge clk);
      if (fu_rvalid && !fu_rready) n_rd_backpressure++;
      if (fu_rvalid && fu_rready) begin
        if (got < n) d[got] = fu_rdata;
        got++;
      end
      #1 fu_rready = (($urandom % 4) != 0);
    end while (!fu_done_valid);
    check(got == n, $sformatf("read returned %0d of %0d beats", got, n));
    fail = fu_done_auth_fail;
    if (fail) n_authfail++;
    count_gran(n);
  endtask

  // ---------------------------------------------------------------- data
  function automatic beat_t lanes_mul_add(input beat_t y, input beat_t w, input beat_t x);
    beat_t r;
    for (int l = 0; l < 4; l++) r[32*l +: 32] = y[32*l +: 32] + w[32*l +: 32] * x[32*l +: 32];
    return r;
  endfunction

  function automatic beat_t rnd_beat();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // address map (all 64-byte aligned)
  localparam logic [63:0] X_BASE  = 64'h0001_0000;   // 3 tiles x 512 B
  localparam logic [63:0] W_BASE  = 64'h0002_0000;   // 3 x 64 B
  localparam logic [63:0] Y_BASE  = 64'h0003_0000;   // 512 B
  localparam logic [63:0] G_BASE  = 64'h0004_0000;   // 512 B
  localparam logic [63:0] ADJ     = 64'h0005_0000;   // 4 tiles x 64 B
  localparam logic [63:0] RANK_A  = 64'h0006_0000;   // 2 segments x 64 B slots
  localparam logic [63:0] RANK_B  = 64'h0007_0000;
  localparam int T = 3;

  beat_t x_ref [T][32];
  beat_t w_ref [T][4];
  beat_t y_ref [32];
  beat_t adj_ref [2][2][4];   // [dst seg][src seg][row] lanes = columns
  logic [31:0] rank_ref [8];

  beats_t buf_d, x_d, w_d, y_d;
  bit fail;
  longint n_vn;

  initial begin
    cp_cmd_valid = 0; cp_ovf_clear = 0; cp_key_load = 0; cp_cmd_op = VOP_RD_F;
    cp_cmd_layer = 0; cp_cmd_slot = 0; cp_cmd_vtype = VT_FEATURE; cp_cmd_value = 0;
    cp_k_enc = 0; cp_k_iv = 0;
    fu_req_valid = 0; fu_req_we = 0; fu_req_addr = 0; fu_req_beats = 0; fu_req_slot = 0;
    fu_wvalid = 0; fu_wdata = 0; fu_rready = 1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    load_keys(128'h000102030405060708090a0b0c0d0e0f, 128'h2b7e151628aed2a6abf7158809cf4f3c);

    // ============ 1. tiled layer (inference) ============
    // input x (layer 0 output) at one VN, weights under VN_W
    vn_cmd(VOP_WR_F, 0, 0);
    n_vn = 1;                       // first feature write after reset: max VN_F 0 + 1
    for (int i = 0; i < T; i++) begin
      buf_d = new[32];
      for (int b = 0; b < 32; b++) begin x_ref[i][b] = rnd_beat(); buf_d[b] = x_ref[i][b]; end
      fu_write(X_BASE + 64'(i * 512), 0, buf_d);
    end
    vn_cmd(VOP_WR_W, 0, 1);
    for (int i = 0; i < T; i++) begin
      buf_d = new[4];
      for (int b = 0; b < 4; b++) begin w_ref[i][b] = rnd_beat(); buf_d[b] = w_ref[i][b]; end
      fu_write(W_BASE + 64'(i * 64), 1, buf_d);
    end
    for (int b = 0; b < 32; b++) y_ref[b] = '0;
    for (int i = 0; i < T; i++) begin
      beats_t acc;
      acc = new[32];
      vn_cmd(VOP_RD_F, 0, 0);
      fu_read(X_BASE + 64'(i * 512), 0, 32, x_d, fail);
      check(!fail, $sformatf("x tile %0d verifies", i));
      vn_cmd(VOP_RD_W, 0, 1);
      fu_read(W_BASE + 64'(i * 64), 1, 4, w_d, fail);
      check(!fail, $sformatf("w tile %0d verifies", i));
      if (i > 0) begin
        vn_cmd(VOP_RD_F, 1, 2);
        fu_read(Y_BASE, 2, 32, y_d, fail);
        check(!fail, $sformatf("partial y %0d verifies", i));
      end else begin
        y_d = new[32];
        for (int b = 0; b < 32; b++) y_d[b] = '0;
      end
      for (int b = 0; b < 32; b++) begin
        acc[b] = lanes_mul_add(y_d[b], w_d[b % 4], x_d[b]);
        y_ref[b] = lanes_mul_add(y_ref[b], w_ref[i][b % 4], x_ref[i][b]);
      end
      vn_cmd(VOP_WR_F, 1, 3);
      fu_write(Y_BASE, 3, acc);
    end
    vn_cmd(VOP_RD_F, 1, 2);
    fu_read(Y_BASE, 2, 32, y_d, fail);
    check(!fail, "final y verifies");
    // the VN the table handed out must be n + t: read again under that constant
    vn_cmd(VOP_CONST, 0, 2, n_vn + T, VT_FEATURE);
    fu_read(Y_BASE, 2, 32, y_d, fail);
    check(!fail, "y authenticates under the constant VN n + t");
    begin
      int bad = 0;
      for (int b = 0; b < 32; b++) if (y_d[b] !== y_ref[b]) bad++;
      check(bad == 0, $sformatf("layer output matches reference (%0d bad beats)", bad));
    end

    // ============ 4a. tamper with y ============
    dram.mem[60'(Y_BASE >> 4) + 60'd5] = dram.mem[60'(Y_BASE >> 4) + 60'd5] ^ 128'h100;
    fu_read(Y_BASE, 2, 32, y_d, fail);
    check(fail, "tampered output detected");
    dram.mem[60'(Y_BASE >> 4) + 60'd5] = dram.mem[60'(Y_BASE >> 4) + 60'd5] ^ 128'h100;
    fu_read(Y_BASE, 2, 32, y_d, fail);
    check(!fail, "restored output verifies");

    // ============ 2. training step ============
    vn_cmd(VOP_WR_G, 1, 0);
    buf_d = new[32];
    for (int b = 0; b < 32; b++) buf_d[b] = rnd_beat();
    fu_write(G_BASE, 0, buf_d);
    vn_cmd(VOP_RD_G, 1, 0);
    fu_read(G_BASE, 0, 32, y_d, fail);
    check(!fail, "gradient verifies");
    begin
      int bad = 0;
      for (int b = 0; b < 32; b++) if (y_d[b] !== buf_d[b]) bad++;
      check(bad == 0, "gradient data");
    end
    // the gradient VN is {tag 10, 1}; the same count with the feature tag fails
    vn_cmd(VOP_CONST, 0, 0, 1, VT_GRADIENT);
    fu_read(G_BASE, 0, 32, x_d, fail);
    check(!fail, "gradient authenticates under {10, 1}");
    vn_cmd(VOP_CONST, 0, 0, 1, VT_FEATURE);
    fu_read(G_BASE, 0, 32, x_d, fail);
    check(fail, "gradient under {00, 1} fails (type tag is bound)");
    // weight update: w -= g (lane-wise) under VN_W + 1
    vn_cmd(VOP_RD_W, 0, 1);
    fu_read(W_BASE, 1, 4, w_d, fail);
    check(!fail, "weights before update verify");
    for (int b = 0; b < 4; b++)
      for (int l = 0; l < 4; l++) w_d[b][32*l +: 32] = w_d[b][32*l +: 32] - y_d[b][32*l +: 32];
    vn_cmd(VOP_WR_W, 0, 1);
    fu_write(W_BASE, 1, w_d);
    fu_read(W_BASE, 1, 4, x_d, fail);
    check(!fail && x_d[3] === w_d[3], "updated weights verify");
    // replay: old VN_W is no longer valid for the updated block
    vn_cmd(VOP_CONST, 0, 1, 1, VT_WEIGHT);       // VN_W before the update was 1
    fu_read(W_BASE, 1, 4, x_d, fail);
    check(fail, "weights read with stale VN_W fail");

    // ============ 3. PageRank-style SpMV, 2 iterations ============
    for (int v = 0; v < 8; v++) rank_ref[v] = 32'(v + 1);
    vn_cmd(VOP_CONST, 0, 2, 0, VT_GRAPH);          // adjacency: constant VN
    for (int d = 0; d < 2; d++)
      for (int s = 0; s < 2; s++) begin
        buf_d = new[4];
        for (int r = 0; r < 4; r++) begin
          for (int c = 0; c < 4; c++) adj_ref[d][s][r][32*c +: 32] = (($urandom % 3) == 0) ? 32'($urandom % 5 + 1) : 32'd0;
          buf_d[r] = adj_ref[d][s][r];
        end
        fu_write(ADJ + 64'((d * 2 + s) * 64), 2, buf_d);
      end
    vn_cmd(VOP_WR_IT, 0, 1);                          // initial ranks, Iter = 0
    for (int s = 0; s < 2; s++) begin
      buf_d = new[1];
      buf_d[0] = {rank_ref[4*s+3], rank_ref[4*s+2], rank_ref[4*s+1], rank_ref[4*s]};
      fu_write(RANK_A + 64'(s * 64), 1, buf_d);
    end
    for (int it = 1; it <= 2; it++) begin
      logic [63:0] src, dst;
      logic [31:0] nr [8];
      src = (it % 2) ? RANK_A : RANK_B;
      dst = (it % 2) ? RANK_B : RANK_A;
      vn_cmd(VOP_IT_INC, 0, 0);
      vn_cmd(VOP_RD_IT, 0, 0);
      vn_cmd(VOP_WR_IT, 0, 1);
      for (int d = 0; d < 2; d++) begin
        logic [31:0] part [4];
        for (int r = 0; r < 4; r++) part[r] = '0;
        for (int s = 0; s < 2; s++) begin
          beats_t a, rk;
          fu_read(ADJ + 64'((d * 2 + s) * 64), 2, 4, a, fail);
          check(!fail, "adjacency tile verifies");
          fu_read(src + 64'(s * 64), 0, 1, rk, fail);
          check(!fail, "rank segment verifies");
          for (int r = 0; r < 4; r++)
            for (int c = 0; c < 4; c++) part[r] += a[r][32*c +: 32] * rk[0][32*c +: 32];
        end
        buf_d = new[1];
        buf_d[0] = {part[3], part[2], part[1], part[0]};
        fu_write(dst + 64'(d * 64), 1, buf_d);
      end
      for (int d = 0; d < 8; d++) begin
        nr[d] = '0;
        for (int s = 0; s < 8; s++) nr[d] += adj_ref[d / 4][s / 4][d % 4][32*(s % 4) +: 32] * rank_ref[s];
      end
      rank_ref = nr;
    end
    begin
      int bad = 0;
      vn_cmd(VOP_WR_IT, 0, 0);   // slot 0 := Iter, the VN of the last rank write
      for (int s = 0; s < 2; s++) begin
        beats_t rk;
        fu_read(RANK_A + 64'(s * 64), 0, 1, rk, fail);
        check(!fail, "final rank segment verifies");
        for (int c = 0; c < 4; c++) if (rk[0][32*c +: 32] !== rank_ref[4*s + c]) bad++;
      end
      check(bad == 0, $sformatf("PageRank-style ranks match reference (%0d bad)", bad));
    end
    // the last rank write used Iter = 2 with the graph tag
    vn_cmd(VOP_CONST, 0, 0, 2, VT_GRAPH);
    begin
      beats_t rk;
      fu_read(RANK_A, 0, 1, rk, fail);
      check(!fail, "final ranks authenticate under the constant VN {11, 2}");
    end
    // buffer A now holds Iter-2 data; reading it with Iter-1 must fail
    vn_cmd(VOP_RD_IT, 0, 0);
    begin
      beats_t rk;
      fu_read(RANK_A, 0, 1, rk, fail);
      check(fail, "rank read with an old VN fails");
    end

    // ============ 5a. overflow ============
    vn_cmd(VOP_SET_F, 10, 0, -1);
    vn_cmd(VOP_WR_F, 11, 0);
    check(cp_overflow === 1'b1, "VN overflow raised");
    if (cp_overflow) n_overflow++;
    cp_ovf_clear = 1'b1;
    @(posedge clk); #1;
    cp_ovf_clear = 1'b0;

    // ============ 5b. re-key ============
    load_keys(128'hfeffe9928665731c6d6a8f9467308308, 128'h00000000000000000000000000000001);
    n_rekey++;
    vn_cmd(VOP_RD_F, 1, 2);
    fu_read(Y_BASE, 2, 32, y_d, fail);
    check(fail, "data under the old keys fails after re-keying");

    // ============ mechanism coverage ============
    $display("mechanisms: coarse=%0d fine=%0d vnF=%0d vnG=%0d vnW=%0d iter=%0d authfail=%0d ovf=%0d rekey=%0d dram_stall=%0d rd_bp=%0d",
             n_coarse, n_fine, n_vn_f, n_vn_g, n_vn_w, n_iter, n_authfail, n_overflow, n_rekey,
             dram.n_stalls, n_rd_backpressure);
    check(n_coarse > 0, "coarse 512-byte MAC used");
    check(n_fine > 0, "fine-grained MAC used");
    check(n_vn_f > 0 && n_vn_g > 0 && n_vn_w > 0, "VN_F, VN_G, VN_W increments");
    check(n_iter > 0, "graph iteration counter");
    check(n_authfail >= 4, "integrity failures detected");
    check(n_overflow > 0, "overflow");
    check(n_rekey > 0, "re-keying");
    check(dram.n_stalls > 0, "DRAM back-pressure");
    check(n_rd_backpressure > 0, "read back-pressure");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

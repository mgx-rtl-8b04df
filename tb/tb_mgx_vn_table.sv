// tb_mgx_vn_table -- checks VN generation against the scheme's worked examples.
//
//  * tiled layer: input x at VN n = 5, output y written t = 3 times gets
//    n+1, n+2, n+3 and is re-read between tiles with the previous value;
//  * residual block: layers written t = 2,1,3,1 times end at
//    VN_F[x_i] = n' + sum(t_k);
//  * weights: one VN_W, incremented per update, tag 01;
//  * gradients: VN_G per layer, tag 10;
//  * graph: rank read with Iter-1, updated rank written with Iter, tag 11;
//  * overflow: a write past 2^62-1 sets the sticky flag and leaves the slot;
//  * an entry never written since reset reads as 0;
//  * 200 random feature reads/writes ($urandom) against a reference model.
// Every command result is visible one cycle after the command.
module tb_mgx_vn_table;
  import mgx_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NL = 127;
  localparam int NS = 4;

  logic                 cmd_valid, ovf_clear, overflow;
  vn_op_e               cmd_op;
  logic [6:0]           cmd_layer;
  logic [1:0]           cmd_slot;
  vn_type_e             cmd_vtype;
  logic [VNCNT_W-1:0]   cmd_value;
  vn_t                  slot_vn [NS];

  mgx_vn_table #(.NUM_LAYERS(NL), .NUM_SLOTS(NS)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_op, .cmd_layer, .cmd_slot, .cmd_vtype,
    .cmd_value, .ovf_clear, .slot_vn, .overflow
  );

  int checks = 0, failures = 0;

  task automatic cmd(input vn_op_e op, input int layer, input int slot, input longint value);
    cmd_valid = 1'b1;
    cmd_op    = op;
    cmd_layer = 7'(layer);
    cmd_slot  = 2'(slot);
    cmd_value = VNCNT_W'(value);
    @(posedge clk); #1;
    cmd_valid = 1'b0;
  endtask

  task automatic expect_vn(input int slot, input logic [1:0] tag, input longint cnt, input string what);
    checks++;
    if (slot_vn[slot].vtype !== vn_type_e'(tag) || slot_vn[slot].cnt !== VNCNT_W'(cnt)) begin
      failures++;
      $display("FAIL %s: slot %0d = {%b,%0d}, want {%b,%0d}", what, slot,
               slot_vn[slot].vtype, slot_vn[slot].cnt, tag, cnt);
    end
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  longint n;
  int t_res [4];
  longint acc;

  initial begin
    cmd_valid = 1'b0; ovf_clear = 1'b0; cmd_op = VOP_RD_F; cmd_layer = '0;
    cmd_slot = '0; cmd_vtype = VT_FEATURE; cmd_value = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;

    // never-written entry reads 0
    cmd(VOP_RD_F, 40, 0, 0);
    expect_vn(0, 2'b00, 0, "unwritten VN_F");

    // tiled layer (layer 1 reads layer 0's x)
    n = 5;
    cmd(VOP_SET_F, 0, 0, n);
    for (int i = 1; i <= 3; i++) begin
      cmd(VOP_RD_F, 0, 0, 0);
      expect_vn(0, 2'b00, n, "x read VN stays n");
      if (i > 1) begin
        cmd(VOP_RD_F, 1, 1, 0);
        expect_vn(1, 2'b00, n + i - 1, "partial y read VN");
      end
      cmd(VOP_WR_F, 1, 2, 0);
      expect_vn(2, 2'b00, n + i, "y write VN");
    end
    cmd(VOP_RD_F, 1, 3, 0);
    expect_vn(3, 2'b00, n + 3, "final VN_F[y] = n+t");

    // residual block on top: layers 2..5 with t = 2,1,3,1
    t_res = '{2, 1, 3, 1};
    acc = n + 3;
    for (int k = 0; k < 4; k++) begin
      for (int w = 0; w < t_res[k]; w++) cmd(VOP_WR_F, 2 + k, 0, 0);
      acc += t_res[k];
    end
    acc = n + 3;
    for (int k = 0; k < 4; k++) begin
      acc += t_res[k];
      cmd(VOP_RD_F, 2 + k, 1, 0);
      expect_vn(1, 2'b00, acc, $sformatf("residual VN_F[x%0d]", k + 1));
    end

    // weights
    cmd(VOP_RD_W, 0, 2, 0);
    expect_vn(2, 2'b01, 0, "initial VN_W");
    cmd(VOP_WR_W, 0, 2, 0);
    expect_vn(2, 2'b01, 1, "VN_W after update");
    cmd(VOP_RD_W, 0, 3, 0);
    expect_vn(3, 2'b01, 1, "VN_W read after update");

    // gradients
    cmd(VOP_SET_G, 9, 0, 100);
    cmd(VOP_WR_G, 8, 0, 0);
    expect_vn(0, 2'b10, 101, "VN_G write");
    cmd(VOP_RD_G, 8, 1, 0);
    expect_vn(1, 2'b10, 101, "VN_G read");
    cmd(VOP_RD_G, 9, 1, 0);
    expect_vn(1, 2'b10, 100, "VN_G set value");

    // graph iterations
    cmd(VOP_IT_INC, 0, 0, 0);
    cmd(VOP_RD_IT, 0, 0, 0);
    expect_vn(0, 2'b11, 0, "rank read VN = Iter-1");
    cmd(VOP_WR_IT, 0, 1, 0);
    expect_vn(1, 2'b11, 1, "updated rank write VN = Iter");
    cmd(VOP_IT_INC, 0, 0, 0);
    cmd(VOP_RD_IT, 0, 0, 0);
    expect_vn(0, 2'b11, 1, "next iteration reads the last write VN");

    // constant VN for read-only data
    cmd_vtype = VT_WEIGHT;
    cmd(VOP_CONST, 0, 3, 77);
    expect_vn(3, 2'b01, 77, "constant VN");

    // random feature reads/writes against a reference model of VN_F
    begin
      longint ref_f [int];
      longint ref_max;
      int     lay, sl;
      ref_max = 0;
      cmd(VOP_SET_F, 30, 0, 1000);
      ref_f[30] = 1000;
      ref_max = 1000;
      for (int i = 0; i < 200; i++) begin
        lay = 30 + int'($urandom_range(0, 15));
        sl  = int'($urandom_range(0, NS - 1));
        if ($urandom_range(0, 1) == 1) begin
          cmd(VOP_WR_F, lay, sl, 0);
          ref_max++;
          ref_f[lay] = ref_max;
          expect_vn(sl, 2'b00, ref_max, "random write VN");
        end else begin
          cmd(VOP_RD_F, lay, sl, 0);
          expect_vn(sl, 2'b00, ref_f.exists(lay) ? ref_f[lay] : 0, "random read VN");
        end
      end
    end


    // overflow
    check(overflow === 1'b0, "no overflow yet");
    cmd(VOP_SET_F, 20, 0, -1);      // 2^62-1
    cmd(VOP_RD_F, 20, 2, 0);
    cmd(VOP_WR_F, 21, 2, 0);
    check(overflow === 1'b1, "overflow flagged");
    expect_vn(2, 2'b00, (64'h1 << 62) - 1, "slot unchanged on overflow");
    ovf_clear = 1'b1;
    @(posedge clk); #1;
    ovf_clear = 1'b0;
    check(overflow === 1'b0, "overflow cleared");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

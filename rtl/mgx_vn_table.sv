// mgx_vn_table -- on-chip version-number (VN) state and VN generation.
//
// MGX never stores VNs in DRAM: the kernel on the accelerator's control
// processor derives each VN from a small on-chip state.  This block holds that
// state and performs the VN bookkeeping the scheme describes, so that the
// control processor only issues one command per tensor access:
//
//   * VN_F[l]  -- VN of the output features of layer l (DNN forward pass).
//                 A write takes a fresh value: the largest VN_F handed out so
//                 far plus one (tiled layers write several times and simply
//                 issue several writes).  A read returns the value last
//                 assigned to that layer.
//   * VN_G[l]  -- the same for the gradients of layer l (backpropagation).
//   * VN_W     -- one VN for all weights, incremented on each weight update.
//   * Iter     -- graph processing: the rank vector is read with Iter-1 and
//                 the updated rank vector written with Iter.
//   * CONST    -- a caller-given VN for read-only data (e.g. the adjacency
//                 matrix or data loaded once by the host).
//
// The result of a command is the full 64-bit VN field of the counter: a
// 2-bit data-type tag (00 features, 01 weights, 10 gradients) above a 62-bit
// count, as in the scheme's counter layout.  It is written into one of
// NUM_SLOTS slot registers; the memory protection unit encrypts each
// transfer with the VN of the slot the functional unit names.  The slots,
// the tag 11 for graph data, the command set and the single-cycle timing are
// this design's choices.  NUM_LAYERS = 127 matches the 127-layer, 1 KB VN
// state example (127 VN_F + one VN_W, 64 bits each); the VN_G table adds the
// per-layer gradient VNs that training needs.
//
// A count that would pass 2^62-1 is not wrapped: the command sets the sticky
// `overflow` flag (the memory must then be re-encrypted under a new key) and
// leaves the state unchanged.  Reset (a fresh start under new keys) clears all VNs to 0
// through per-entry valid bits, so the tables themselves need no reset.
//
// Timing: cmd_valid is always accepted; slot_vn and overflow reflect the
// command from the next clock edge on.
module mgx_vn_table
  import mgx_pkg::*;
#(
  parameter int unsigned NUM_LAYERS = 127,
  parameter int unsigned NUM_SLOTS  = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cmd_valid,
  input  vn_op_e                        cmd_op,
  input  logic [$clog2(NUM_LAYERS)-1:0] cmd_layer,
  input  logic [$clog2(NUM_SLOTS)-1:0]  cmd_slot,
  input  vn_type_e                      cmd_vtype,   // tag for VOP_CONST
  input  logic [VNCNT_W-1:0]            cmd_value,   // for SET and CONST
  input  logic                          ovf_clear,
  output vn_t                           slot_vn [NUM_SLOTS],
  output logic                          overflow
);
  localparam logic [VNCNT_W-1:0] VN_MAX = '1;

  logic [VNCNT_W-1:0] vnf_mem [NUM_LAYERS];
  logic [VNCNT_W-1:0] vng_mem [NUM_LAYERS];
  logic [NUM_LAYERS-1:0] vnf_ok, vng_ok;
  logic [VNCNT_W-1:0] max_f, max_g, vnw, iter;

  logic [VNCNT_W-1:0] rd_f, rd_g;
  assign rd_f = vnf_ok[cmd_layer] ? vnf_mem[cmd_layer] : '0;
  assign rd_g = vng_ok[cmd_layer] ? vng_mem[cmd_layer] : '0;

  // Decode the command into a result VN and the state updates.
  logic        res_en, ovf;
  vn_t         res;
  logic        wr_f, wr_g;
  logic [VNCNT_W-1:0] wr_val;

  always_comb begin
    res_en = 1'b0;
    res    = '{vtype: VT_FEATURE, cnt: '0};
    ovf    = 1'b0;
    wr_f   = 1'b0;
    wr_g   = 1'b0;
    wr_val = cmd_value;
    unique case (cmd_op)
      VOP_SET_F:  begin wr_f = 1'b1; wr_val = cmd_value; end
      VOP_SET_G:  begin wr_g = 1'b1; wr_val = cmd_value; end
      VOP_RD_F:   begin res_en = 1'b1; res = '{vtype: VT_FEATURE,  cnt: rd_f}; end
      VOP_RD_G:   begin res_en = 1'b1; res = '{vtype: VT_GRADIENT, cnt: rd_g}; end
      VOP_WR_F: begin
        if (max_f == VN_MAX) ovf = 1'b1;
        else begin
          wr_f = 1'b1; wr_val = max_f + 1'b1;
          res_en = 1'b1; res = '{vtype: VT_FEATURE, cnt: max_f + 1'b1};
        end
      end
      VOP_WR_G: begin
        if (max_g == VN_MAX) ovf = 1'b1;
        else begin
          wr_g = 1'b1; wr_val = max_g + 1'b1;
          res_en = 1'b1; res = '{vtype: VT_GRADIENT, cnt: max_g + 1'b1};
        end
      end
      VOP_RD_W:   begin res_en = 1'b1; res = '{vtype: VT_WEIGHT, cnt: vnw}; end
      VOP_WR_W: begin
        if (vnw == VN_MAX) ovf = 1'b1;
        else begin res_en = 1'b1; res = '{vtype: VT_WEIGHT, cnt: vnw + 1'b1}; end
      end
      VOP_IT_INC: if (iter == VN_MAX) ovf = 1'b1;
      VOP_RD_IT:  begin res_en = 1'b1; res = '{vtype: VT_GRAPH, cnt: iter - 1'b1}; end
      VOP_WR_IT:  begin res_en = 1'b1; res = '{vtype: VT_GRAPH, cnt: iter}; end
      VOP_CONST:  begin res_en = 1'b1; res = '{vtype: cmd_vtype, cnt: cmd_value}; end
      default: ;
    endcase
  end

  // VN tables: plain arrays (no reset) qualified by valid bits.
  always_ff @(posedge clk) begin
    if (cmd_valid && wr_f) vnf_mem[cmd_layer] <= wr_val;
    if (cmd_valid && wr_g) vng_mem[cmd_layer] <= wr_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vnf_ok   <= '0;
      vng_ok   <= '0;
      max_f    <= '0;
      max_g    <= '0;
      vnw      <= '0;
      iter     <= '0;
      overflow <= 1'b0;
      for (int s = 0; s < NUM_SLOTS; s++) slot_vn[s] <= '{vtype: VT_FEATURE, cnt: '0};
    end else begin
      if (ovf_clear) overflow <= 1'b0;
      if (cmd_valid) begin
        if (ovf) overflow <= 1'b1;
        if (wr_f) begin
          vnf_ok[cmd_layer] <= 1'b1;
          if (wr_val > max_f) max_f <= wr_val;
        end
        if (wr_g) begin
          vng_ok[cmd_layer] <= 1'b1;
          if (wr_val > max_g) max_g <= wr_val;
        end
        case (cmd_op)
          VOP_SET_W:  vnw  <= cmd_value;
          VOP_SET_IT: iter <= cmd_value;
          VOP_WR_W:   if (!ovf) vnw <= vnw + 1'b1;
          VOP_IT_INC: if (!ovf) iter <= iter + 1'b1;
          default: ;
        endcase
        if (res_en) slot_vn[cmd_slot] <= res;
      end
    end
  end

  a_layer_range: assert property (@(posedge clk) disable iff (!rst_n)
                                  cmd_valid |-> (32'(cmd_layer) < NUM_LAYERS))
    else $error("mgx_vn_table: layer index out of range");
endmodule

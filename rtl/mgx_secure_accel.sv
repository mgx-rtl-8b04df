// mgx_secure_accel -- the trusted memory-protection core of an MGX secure
// accelerator: the on-chip VN state plus the memory protection unit.
//
// In the MGX accelerator organisation the control processor runs the
// application kernel and supplies version numbers and keys, the functional
// unit (e.g. a systolic array or an SpMV engine) issues addresses, read/write
// and plaintext, and the memory protection unit with its encryption /
// integrity engine turns these into ciphertext and MACs for the DRAM
// controller.  The control processor, the functional unit and the DRAM
// controller are not part of this RTL; their connections are the ports:
//
//   cp_*   control processor: VN-table commands (mgx_vn_table), key load,
//          overflow status (the memory must be re-keyed when set);
//   fu_*   functional unit: transfer requests naming a VN slot instead of a
//          VN, plaintext write beats, plaintext read beats, completion with
//          the integrity result;
//   mem_*  DRAM controller: ciphertext and MAC traffic, 16-byte words.
//
// The functional unit's request carries `fu_req_slot`; the VN held in that
// slot of the VN table (set by the control processor before the transfer)
// is passed with the request to the protection unit.  The slot indirection
// is this design's choice for "the control processor provides the VN values
// for the memory reads and writes of each instruction".  Timing is that of
// the two sub-blocks: a VN command is visible in its slot on the next cycle,
// a transfer streams one 16-byte beat per cycle after 10 cycles of AES
// latency.  The scheme's second DRAM controller (host memory) is not
// modelled: there is a single DRAM port.
module mgx_secure_accel
  import mgx_pkg::*;
#(
  parameter int unsigned  NUM_LAYERS    = 127,
  parameter int unsigned  NUM_SLOTS     = 4,
  parameter int unsigned  MAX_BEATS     = 32,
  parameter int unsigned  LOG2_MAC_GRAN = 6,
  parameter logic [63:0]  MAC_BASE      = 64'h0000_0004_0000_0000
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // control processor
  input  logic                           cp_cmd_valid,
  input  vn_op_e                         cp_cmd_op,
  input  logic [$clog2(NUM_LAYERS)-1:0]  cp_cmd_layer,
  input  logic [$clog2(NUM_SLOTS)-1:0]   cp_cmd_slot,
  input  vn_type_e                       cp_cmd_vtype,
  input  logic [VNCNT_W-1:0]             cp_cmd_value,
  input  logic                           cp_ovf_clear,
  output logic                           cp_overflow,
  input  logic                           cp_key_load,
  input  logic [127:0]                   cp_k_enc,
  input  logic [127:0]                   cp_k_iv,
  output logic                           cp_key_ready,
  // functional unit
  input  logic                           fu_req_valid,
  output logic                           fu_req_ready,
  input  logic                           fu_req_we,
  input  logic [63:0]                    fu_req_addr,
  input  logic [$clog2(MAX_BEATS+1)-1:0] fu_req_beats,
  input  logic [$clog2(NUM_SLOTS)-1:0]   fu_req_slot,
  input  logic                           fu_wvalid,
  output logic                           fu_wready,
  input  logic [127:0]                   fu_wdata,
  output logic                           fu_rvalid,
  input  logic                           fu_rready,
  output logic [127:0]                   fu_rdata,
  output logic                           fu_done_valid,
  output logic                           fu_done_we,
  output logic                           fu_done_auth_fail,
  // DRAM controller
  output logic                           mem_req_valid,
  input  logic                           mem_req_ready,
  output logic                           mem_req_we,
  output logic [63:0]                    mem_req_addr,
  output logic [127:0]                   mem_req_wdata,
  output logic [15:0]                    mem_req_wstrb,
  input  logic                           mem_rsp_valid,
  output logic                           mem_rsp_ready,
  input  logic [127:0]                   mem_rsp_rdata
);
  vn_t slot_vn [NUM_SLOTS];

  mgx_vn_table #(.NUM_LAYERS(NUM_LAYERS), .NUM_SLOTS(NUM_SLOTS)) u_vn_table (
    .clk, .rst_n,
    .cmd_valid(cp_cmd_valid), .cmd_op(cp_cmd_op), .cmd_layer(cp_cmd_layer),
    .cmd_slot(cp_cmd_slot), .cmd_vtype(cp_cmd_vtype), .cmd_value(cp_cmd_value),
    .ovf_clear(cp_ovf_clear), .slot_vn, .overflow(cp_overflow)
  );

  mgx_mpu #(
    .MAX_BEATS(MAX_BEATS), .LOG2_MAC_GRAN(LOG2_MAC_GRAN), .MAC_BASE(MAC_BASE)
  ) u_mpu (
    .clk, .rst_n,
    .key_load(cp_key_load), .k_enc(cp_k_enc), .k_iv(cp_k_iv), .key_ready(cp_key_ready),
    .req_valid(fu_req_valid), .req_ready(fu_req_ready), .req_we(fu_req_we),
    .req_addr(fu_req_addr), .req_beats(fu_req_beats), .req_vn(slot_vn[fu_req_slot]),
    .wvalid(fu_wvalid), .wready(fu_wready), .wdata(fu_wdata),
    .rvalid(fu_rvalid), .rready(fu_rready), .rdata(fu_rdata),
    .done_valid(fu_done_valid), .done_we(fu_done_we), .done_auth_fail(fu_done_auth_fail),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_req_wstrb, .mem_rsp_valid, .mem_rsp_ready, .mem_rsp_rdata
  );
endmodule

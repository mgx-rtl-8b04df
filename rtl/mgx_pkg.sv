// mgx_pkg -- types, constants and arithmetic shared by the MGX memory
// protection blocks.
//
// Counter layout (the 128-bit AES-CTR input): bits [127:64] hold the 64-bit
// physical address of the 16-byte block, bits [63:0] the 64-bit version
// number.  The top two VN bits carry a data-type tag (00 features, 01
// weights, 10 gradients), the remaining 62 bits the count, as in the
// counter-construction figure of the scheme.  The tag 11 for graph vertex
// data, and the exact position [63:62] of the tag, are this design's choice.
//
// The AES helpers implement FIPS-197 AES-128: the S-box is computed as the
// GF(2^8) inverse followed by the affine map, so no lookup table is stored.
// gf128_mul is the GCM field multiply (bit-reflected, R = 0xE1 || 0^120).
package mgx_pkg;

  localparam int unsigned ADDR_W   = 64;   // address half of the counter
  localparam int unsigned VN_W     = 64;   // version-number half of the counter
  localparam int unsigned VNCNT_W  = 62;   // count bits below the 2-bit tag
  localparam int unsigned BEAT_W   = 128;  // one AES block / one data beat
  localparam int unsigned MAC_W    = 64;   // stored MAC width

  typedef enum logic [1:0] {
    VT_FEATURE  = 2'b00,
    VT_WEIGHT   = 2'b01,
    VT_GRADIENT = 2'b10,
    VT_GRAPH    = 2'b11
  } vn_type_e;

  typedef struct packed {
    vn_type_e            vtype;
    logic [VNCNT_W-1:0]  cnt;
  } vn_t;

  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    vn_t               vn;
  } ctr_t;

  // Commands the control processor sends to the VN table.
  typedef enum logic [3:0] {
    VOP_SET_F   = 4'd0,   // VN_F[layer] := value, max VN_F := max(max, value)
    VOP_SET_G   = 4'd1,   // VN_G[layer] := value, likewise
    VOP_SET_W   = 4'd2,   // VN_W := value
    VOP_SET_IT  = 4'd3,   // Iter := value
    VOP_RD_F    = 4'd4,   // slot := {00, VN_F[layer]}
    VOP_WR_F    = 4'd5,   // max VN_F += 1; VN_F[layer] := max; slot := {00, max}
    VOP_RD_G    = 4'd6,
    VOP_WR_G    = 4'd7,
    VOP_RD_W    = 4'd8,   // slot := {01, VN_W}
    VOP_WR_W    = 4'd9,   // VN_W += 1; slot := {01, VN_W}
    VOP_IT_INC  = 4'd10,  // Iter += 1
    VOP_RD_IT   = 4'd11,  // slot := {11, Iter-1}  (rank vector read)
    VOP_WR_IT   = 4'd12,  // slot := {11, Iter}    (updated rank vector write)
    VOP_CONST   = 4'd13   // slot := {tag, value}  (read-only data, e.g. adjacency matrix)
  } vn_op_e;

  // ---------------------------------------------------------------- GF(2^8)
  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf8_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, t;
    p = '0;
    t = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ t;
      t = xtime(t);
    end
    return p;
  endfunction

  // a^254 = a^-1 in GF(2^8) (0 maps to 0)
  function automatic logic [7:0] gf8_inv(input logic [7:0] a);
    logic [7:0] a2, a4, a8, a16, a32, a64, a128, r;
    a2   = gf8_mul(a, a);
    a4   = gf8_mul(a2, a2);
    a8   = gf8_mul(a4, a4);
    a16  = gf8_mul(a8, a8);
    a32  = gf8_mul(a16, a16);
    a64  = gf8_mul(a32, a32);
    a128 = gf8_mul(a64, a64);
    r = gf8_mul(a128, a64);
    r = gf8_mul(r, a32);
    r = gf8_mul(r, a16);
    r = gf8_mul(r, a8);
    r = gf8_mul(r, a4);
    r = gf8_mul(r, a2);
    return r;
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] a);
    logic [7:0] b, s;
    b = gf8_inv(a);
    for (int i = 0; i < 8; i++)
      s[i] = b[i] ^ b[(i+4)%8] ^ b[(i+5)%8] ^ b[(i+6)%8] ^ b[(i+7)%8];
    return s ^ 8'h63;
  endfunction

  // ---------------------------------------------------------------- AES-128
  // Byte k of a 128-bit block is bits [127-8k -: 8]; byte k sits in row k%4,
  // column k/4 of the AES state.
  function automatic logic [7:0] get_byte(input logic [127:0] s, input int k);
    return s[127-8*k -: 8];
  endfunction

  function automatic logic [127:0] sub_bytes(input logic [127:0] s);
    logic [127:0] r;
    for (int k = 0; k < 16; k++) r[127-8*k -: 8] = sbox(get_byte(s, k));
    return r;
  endfunction

  function automatic logic [127:0] shift_rows(input logic [127:0] s);
    logic [127:0] r;
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++)
        r[127-8*(4*c+row) -: 8] = get_byte(s, 4*((c+row)%4) + row);
    return r;
  endfunction

  function automatic logic [127:0] mix_columns(input logic [127:0] s);
    logic [127:0] r;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(s, 4*c);
      a1 = get_byte(s, 4*c+1);
      a2 = get_byte(s, 4*c+2);
      a3 = get_byte(s, 4*c+3);
      r[127-8*(4*c)   -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      r[127-8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      r[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      r[127-8*(4*c+3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return r;
  endfunction

  // One key-schedule step: round key i from round key i-1 and rcon_i.
  function automatic logic [127:0] next_round_key(input logic [127:0] k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    w0 = k[127:96]; w1 = k[95:64]; w2 = k[63:32]; w3 = k[31:0];
    t  = {sbox(w3[23:16]) ^ rcon, sbox(w3[15:8]), sbox(w3[7:0]), sbox(w3[31:24])};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // ---------------------------------------------------------------- GF(2^128)
  // GCM multiply: bit 127 of a vector is the coefficient of x^0.
  function automatic logic [127:0] gf128_mul(input logic [127:0] x, input logic [127:0] y);
    logic [127:0] z, v;
    z = '0;
    v = y;
    for (int i = 127; i >= 0; i--) begin
      if (x[i]) z = z ^ v;
      v = v[0] ? ({1'b0, v[127:1]} ^ {8'he1, 120'h0}) : {1'b0, v[127:1]};
    end
    return z;
  endfunction

endpackage

// guardnn_pkg: types, sizes and AES helper functions shared by the GuardNN
// secure-accelerator blocks.
//
// Addresses handled by the memory protection are block addresses: one unit is
// one 128-bit (16-byte) memory block, the unit that AES-CTR encrypts. Memory
// moves in chunks of CHUNK_BLOCKS blocks (512 bytes), and a bus beat carries
// N_LANES blocks, one per AES engine. The last beat of a chunk is only
// partly used when N_LANES does not divide CHUNK_BLOCKS.
//
// The 128-bit AES-CTR counter of a block is {VN, block address}: a 64-bit
// version number and the 64-bit address of the block. The 128-bit block
// size, 64-bit VN, AES-128 and 512-byte chunk follow the paper; putting the
// VN in the upper half and the address in the lower half is this design's
// choice.
//
// The AES S-box is computed at elaboration from its definition (inverse in
// GF(2^8) followed by the affine map) rather than stored as a table.
package guardnn_pkg;

  localparam int unsigned BLK_W        = 128;  // AES block / memory block
  localparam int unsigned ADDR_W       = 64;   // block address width
  localparam int unsigned VN_W         = 64;   // version number width
  localparam int unsigned MAC_W        = 64;   // stored MAC width
  localparam int unsigned CHUNK_BLOCKS = 32;   // 512-byte protection chunk
  localparam int unsigned N_LANES      = 3;    // AES engines per memory path
  localparam int unsigned AES_LATENCY  = 12;   // pipelined AES latency

  typedef logic [BLK_W-1:0]  blk_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [VN_W-1:0]   vn_t;
  typedef logic [MAC_W-1:0]  mac_t;

  // Kind of data an access to protected memory carries; it selects the VN.
  // Gradients use the VN of their matching features, so they travel as
  // KIND_FEATURE. KIND_RAW bypasses the protection and is granted only to
  // the controller, which uses it for session-encrypted user buffers.
  typedef enum logic [1:0] {
    KIND_WEIGHT  = 2'd0,
    KIND_FEATURE = 2'd1,
    KIND_RAW     = 2'd2
  } kind_e;

  // GuardNN instructions issued by the (untrusted) host.
  typedef enum logic [3:0] {
    OP_GET_PK        = 4'd0,
    OP_INIT_SESSION  = 4'd1,
    OP_SET_WEIGHT    = 4'd2,
    OP_SET_INPUT     = 4'd3,
    OP_FORWARD       = 4'd4,
    OP_SET_READ_CTR  = 4'd5,
    OP_EXPORT_OUTPUT = 4'd6,
    OP_SIGN_OUTPUT   = 4'd7
  } opcode_e;

  // One instruction with its operands. Which operands an opcode uses:
  //   INIT_SESSION  : integrity (1 = confidentiality and integrity)
  //   SET_WEIGHT    : src (user ciphertext), dst (protected), count (chunks),
  //                   arg (session nonce the user encrypted with)
  //   SET_INPUT     : as SET_WEIGHT
  //   FORWARD       : arg (base-accelerator instruction, passed on)
  //   SET_READ_CTR  : slot, src (first block), dst (last block), arg (CTR_F,R)
  //   EXPORT_OUTPUT : src (protected), dst (user buffer), count (chunks)
  typedef struct packed {
    opcode_e     op;
    logic        integrity;
    logic [3:0]  slot;
    addr_t       src;
    addr_t       dst;
    logic [31:0] count;
    logic [63:0] arg;
  } instr_t;

  // Requests to the public-key unit (key exchange, certificate, signature).
  typedef enum logic [1:0] {
    PKC_GET_PK = 2'd0,
    PKC_KEX    = 2'd1,
    PKC_SIGN   = 2'd2
  } pkc_op_e;

  // The four attestation hashes: instruction sequence, inputs, weights and
  // exported outputs.
  typedef enum logic [1:0] {
    HS_INSTR  = 2'd0,
    HS_INPUT  = 2'd1,
    HS_WEIGHT = 2'd2,
    HS_OUTPUT = 2'd3
  } hash_sel_e;

  // Status codes reported for the last instruction.
  typedef enum logic [2:0] {
    ST_OK          = 3'd0,
    ST_NO_SESSION  = 3'd1,
    ST_INTEGRITY   = 3'd2,
    ST_CTR_EXHAUST = 3'd3,
    ST_BAD_OP      = 3'd4
  } status_e;

  // ---------------------------------------------------------------- AES ---
  function automatic logic [7:0] xtime(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  typedef logic [255:0][7:0] sbox_t;

  // S-box from its definition: inverse through exp/log tables of the
  // generator 3, then the FIPS-197 affine transform with constant 0x63.
  function automatic sbox_t gen_sbox();
    sbox_t t;
    logic [255:0][7:0] exp_t;
    logic [255:0][7:0] log_t;
    logic [7:0] p;
    logic [7:0] inv;
    p = 8'h01;
    exp_t = '0;
    log_t = '0;
    for (int i = 0; i < 255; i++) begin
      exp_t[i] = p;
      log_t[p] = 8'(i);
      p = p ^ xtime(p);
    end
    for (int x = 0; x < 256; x++) begin
      if (x == 0) inv = 8'h00;
      else        inv = exp_t[(255 - int'(log_t[x])) % 255];
      t[x] = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]}
                 ^ {inv[4:0], inv[7:5]} ^ {inv[3:0], inv[7:4]} ^ 8'h63;
    end
    return t;
  endfunction

  localparam sbox_t SBOX = gen_sbox();

  // State byte i is bits [127-8i -: 8]; bytes 4c..4c+3 form column c.
  function automatic logic [7:0] sbyte(input blk_t s, input int i);
    return s[127-8*i -: 8];
  endfunction

  function automatic blk_t sub_shift(input blk_t s);
    blk_t o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127-8*(4*c+r) -: 8] = SBOX[sbyte(s, 4*((c+r)%4)+r)];
    return o;
  endfunction

  function automatic blk_t mix_columns(input blk_t s);
    blk_t o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = sbyte(s, 4*c);   a1 = sbyte(s, 4*c+1);
      a2 = sbyte(s, 4*c+2); a3 = sbyte(s, 4*c+3);
      o[127-8*(4*c)   -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      o[127-8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      o[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      o[127-8*(4*c+3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  // Next AES-128 round key from the previous one; rcon is the round constant.
  function automatic blk_t next_round_key(input blk_t k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    w0 = k[127:96]; w1 = k[95:64]; w2 = k[63:32]; w3 = k[31:0];
    t  = {SBOX[w3[23:16]] ^ rcon, SBOX[w3[15:8]], SBOX[w3[7:0]], SBOX[w3[31:24]]};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // Number of beats that carry one chunk.
  function automatic int unsigned beats_per_chunk(input int unsigned lanes);
    return (CHUNK_BLOCKS + lanes - 1) / lanes;
  endfunction

endpackage

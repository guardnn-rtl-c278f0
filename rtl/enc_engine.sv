// enc_engine: AES counter-mode encryption engine for LANES memory blocks
// per cycle, one pipelined AES-128 core per lane.
//
// Lane i of a beat holds the 128-bit block at address in_addr + i. Its
// keystream is AES_key({in_vn, in_addr + i}) and the output is the data
// XOR the keystream, so the same engine encrypts and decrypts. With
// in_bypass set the data passes unchanged, with the same latency; this is
// used for the protection-off case and for buffers that are already
// session-encrypted.
//
// Timing: a beat accepted with in_valid leaves at out_valid 12 cycles
// later, one beat per cycle, no stalls. The data rides along the AES
// pipeline as its side information, so the keystream is not computed ahead
// of the data (this design's simplification: counter mode would allow it).
//
// From the paper: AES-128 in counter mode, a counter made of the 128-bit
// block's address and a 64-bit VN, three engines to match the memory
// bandwidth, 12-cycle pipelined engines. The order of VN and address within
// the counter and the lane-per-engine arrangement are this design's.
module enc_engine
  import guardnn_pkg::*;
#(
  parameter int unsigned LANES = N_LANES,
  parameter int unsigned TAG_W = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  blk_t                  key,
  input  logic                  in_valid,
  input  logic                  in_bypass,
  input  vn_t                   in_vn,
  input  addr_t                 in_addr,
  input  blk_t [LANES-1:0]      in_data,
  input  logic [TAG_W-1:0]      in_tag,
  output logic                  out_valid,
  output blk_t [LANES-1:0]      out_data,
  output logic [TAG_W-1:0]      out_tag
);

  // Lane 0 also carries the bypass flag and the caller's tag.
  localparam int unsigned SIDE_W = BLK_W + 1 + TAG_W;

  blk_t [LANES-1:0] ks;
  blk_t [LANES-1:0] dly;
  logic [LANES-1:0] vld;
  logic [LANES-1:0] byp;
  logic [TAG_W-1:0] tag_l [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic [SIDE_W-1:0] side_out;
    aes128_core #(.TAG_W(SIDE_W)) u_aes (
      .clk      (clk),
      .rst_n    (rst_n),
      .key      (key),
      .in_valid (in_valid),
      .in_block ({in_vn, in_addr + ADDR_W'(i)}),
      .in_tag   ({in_data[i], in_bypass, in_tag}),
      .out_valid(vld[i]),
      .out_block(ks[i]),
      .out_tag  (side_out)
    );
    assign dly[i]   = side_out[SIDE_W-1 -: BLK_W];
    assign byp[i]   = side_out[TAG_W];
    assign tag_l[i] = side_out[TAG_W-1:0];
    assign out_data[i] = byp[i] ? dly[i] : (dly[i] ^ ks[i]);
  end

  assign out_valid = vld[0];
  assign out_tag   = tag_l[0];

endmodule

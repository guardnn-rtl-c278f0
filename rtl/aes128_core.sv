// aes128_core: fully pipelined AES-128 encryption, one block per cycle.
//
// The memory encryption and integrity engines only ever encrypt (AES in
// counter mode, and an AES-based MAC), so no decryption datapath exists.
// Pipeline: an input register applies round key 0, ten registered rounds
// follow, and an output register closes the pipe. A block presented with
// in_valid appears at out_valid exactly LATENCY = 12 cycles later, matching
// the 12-cycle latency the paper gives for its pipelined AES engines. A new
// block can enter every cycle; the pipeline never stalls.
//
// The eleven round keys are expanded combinationally from `key`. The key is
// a session key that changes only between sessions, so it must be held
// stable while blocks are in flight (this design's choice; a per-stage key
// pipeline would remove the rule at the cost of ten more 128-bit registers
// per stage).
//
// TAG_W bits of side information travel with each block unchanged.
module aes128_core
  import guardnn_pkg::*;
#(
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  blk_t             key,
  input  logic             in_valid,
  input  blk_t             in_block,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output blk_t             out_block,
  output logic [TAG_W-1:0] out_tag
);

  localparam logic [10:1][7:0] RCON = {8'h36, 8'h1b, 8'h80, 8'h40, 8'h20,
                                       8'h10, 8'h08, 8'h04, 8'h02, 8'h01};

  blk_t rk [11];

  always_comb begin
    rk[0] = key;
    for (int r = 1; r <= 10; r++) rk[r] = next_round_key(rk[r-1], RCON[r]);
  end

  // Stage 0 holds the state after AddRoundKey(0); stage r after round r.
  blk_t             st  [11];
  logic             vld [11];
  logic [TAG_W-1:0] tg  [11];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 11; s++) vld[s] <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      for (int s = 1; s < 11; s++) vld[s] <= vld[s-1];
      out_valid <= vld[10];
    end
  end

  always_ff @(posedge clk) begin
    st[0] <= in_block ^ rk[0];
    tg[0] <= in_tag;
    for (int s = 1; s < 10; s++) begin
      st[s] <= mix_columns(sub_shift(st[s-1])) ^ rk[s];
      tg[s] <= tg[s-1];
    end
    st[10]    <= sub_shift(st[9]) ^ rk[10];
    tg[10]    <= tg[9];
    out_block <= st[10];
    out_tag   <= tg[10];
  end

endmodule

// iv_engine: integrity-verification MAC engine. It computes one MAC_W-bit
// MAC per 512-byte chunk from the chunk's ciphertext, addresses and VN.
//
// The MAC is an XOR-MAC built from AES-128 under a separate MAC key:
// every block i of the chunk gives t_i = AES_kmac(C_i XOR {VN, addr_i}),
// and the MAC is the upper MAC_W bits of the XOR of all t_i. Binding the
// VN and the address into every term makes a block moved to another
// address, or replayed with an older VN, fail the check. The same engine
// makes the MAC on a write and recomputes it on a read.
//
// Interface: a chunk arrives as beats of LANES blocks (lane i at address
// in_addr + i, lanes masked off by in_mask are not part of the chunk);
// in_last marks the chunk's final beat. mac_valid pulses with the chunk's MAC
// 13 cycles after that last beat (12 for AES, 1 to accumulate). Beats may
// come every cycle and chunks back to back.
//
// The paper says that a MAC over data value, address and VN protects each
// 512-byte chunk and that AES engines serve both encryption and integrity;
// it does not name the MAC function. The XOR-MAC, the separate key and the
// 64-bit MAC are this design's choices.
module iv_engine
  import guardnn_pkg::*;
#(
  parameter int unsigned LANES = N_LANES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  blk_t             key,
  input  logic             in_valid,
  input  logic [LANES-1:0] in_mask,
  input  logic             in_last,
  input  vn_t              in_vn,
  input  addr_t            in_addr,
  input  blk_t [LANES-1:0] in_ct,
  output logic             mac_valid,
  output mac_t             mac
);

  blk_t [LANES-1:0] t;
  logic [LANES-1:0] vld;
  logic [LANES-1:0] msk;
  logic [LANES-1:0] lst;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic [1:0] side;
    aes128_core #(.TAG_W(2)) u_aes (
      .clk      (clk),
      .rst_n    (rst_n),
      .key      (key),
      .in_valid (in_valid),
      .in_block (in_ct[i] ^ {in_vn, in_addr + ADDR_W'(i)}),
      .in_tag   ({in_mask[i], in_last}),
      .out_valid(vld[i]),
      .out_block(t[i]),
      .out_tag  (side)
    );
    assign msk[i] = side[1];
    assign lst[i] = side[0];
  end

  blk_t beat_x;
  always_comb begin
    beat_x = '0;
    for (int i = 0; i < LANES; i++)
      if (msk[i]) beat_x ^= t[i];
  end

  blk_t acc;
  blk_t acc_next;
  assign acc_next = acc ^ beat_x;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      mac_valid <= 1'b0;
      mac       <= '0;
    end else begin
      mac_valid <= 1'b0;
      if (vld[0]) begin
        if (lst[0]) begin
          acc       <= '0;
          mac_valid <= 1'b1;
          mac       <= acc_next[BLK_W-1 -: MAC_W];
        end else begin
          acc <= acc_next;
        end
      end
    end
  end

endmodule

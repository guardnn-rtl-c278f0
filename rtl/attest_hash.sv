// attest_hash: keeps the four running attestation hashes that the signed
// report covers: the sequence of instructions with their operands, the
// imported inputs, the imported weights and the exported outputs.
//
// Each hash is a SHA-256 chain: the 256-bit value starts at the SHA-256
// initial value on `clear` and is replaced by
// SHA256_compress(value, message block) for every 512-bit message block fed
// to it. A message block is four 128-bit words taken on in_valid/in_ready,
// first word in the high bits; `sel` (guardnn_pkg::hash_sel_e) picks the
// chain and must stay the same for the four words of one block. Because the
// controller always feeds whole blocks (an instruction is one block, a
// 512-byte chunk is eight), the chain needs no length padding; the verifier
// recomputes the same chain.
//
// Timing: words are taken one per cycle; after the fourth, the compression
// runs one round per cycle for 64 cycles, during which busy is high and
// in_ready low. A chunk of 32 words therefore takes about 8 x 68 cycles.
//
// From the paper: the accelerator hashes inputs and weights as they are
// imported and the executed instructions with their operands, and signs
// those hashes with the output's. SHA-256, the chaining without padding
// and the choice to hash the exported output here are this design's.
module attest_hash
  import guardnn_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clear,
  input  logic      in_valid,
  output logic      in_ready,
  input  hash_sel_e sel,
  input  blk_t      in_word,
  output logic      busy,
  output logic [3:0][255:0] digest
);

  localparam logic [63:0][31:0] K = {
    32'hc67178f2, 32'hbef9a3f7, 32'ha4506ceb, 32'h90befffa, 32'h8cc70208, 32'h84c87814, 32'h78a5636f, 32'h748f82ee,
    32'h682e6ff3, 32'h5b9cca4f, 32'h4ed8aa4a, 32'h391c0cb3, 32'h34b0bcb5, 32'h2748774c, 32'h1e376c08, 32'h19a4c116,
    32'h106aa070, 32'hf40e3585, 32'hd6990624, 32'hd192e819, 32'hc76c51a3, 32'hc24b8b70, 32'ha81a664b, 32'ha2bfe8a1,
    32'h92722c85, 32'h81c2c92e, 32'h766a0abb, 32'h650a7354, 32'h53380d13, 32'h4d2c6dfc, 32'h2e1b2138, 32'h27b70a85,
    32'h14292967, 32'h06ca6351, 32'hd5a79147, 32'hc6e00bf3, 32'hbf597fc7, 32'hb00327c8, 32'ha831c66d, 32'h983e5152,
    32'h76f988da, 32'h5cb0a9dc, 32'h4a7484aa, 32'h2de92c6f, 32'h240ca1cc, 32'h0fc19dc6, 32'hefbe4786, 32'he49b69c1,
    32'hc19bf174, 32'h9bdc06a7, 32'h80deb1fe, 32'h72be5d74, 32'h550c7dc3, 32'h243185be, 32'h12835b01, 32'hd807aa98,
    32'hab1c5ed5, 32'h923f82a4, 32'h59f111f1, 32'h3956c25b, 32'he9b5dba5, 32'hb5c0fbcf, 32'h71374491, 32'h428a2f98
  };
  localparam logic [255:0] H0 = {32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                 32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [383:0]     msg;
  logic [1:0]       nwords;
  hash_sel_e        cur_sel;
  logic [6:0]       round;
  logic [15:0][31:0] w;          // w[0] is W[t]
  logic [7:0][31:0]  v;          // a..h, v[7] = a

  assign busy     = (round != 0);
  assign in_ready = !busy;

  // One SHA-256 round on v with schedule word w[0].
  logic [31:0] a, b, c, d, e, f, g, h, t1, t2, wn;
  always_comb begin
    {a, b, c, d, e, f, g, h} = v;
    t1 = h + (rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25)) + ((e & f) ^ (~e & g))
           + K[round - 7'd1] + w[0];
    t2 = (rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
    // next schedule word W[t+16]
    wn = (rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10)) + w[9]
       + (rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3)) + w[0];
  end

  logic [511:0] blk4;
  assign blk4 = {msg, in_word};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) digest[i] <= H0;
      msg     <= '0;
      nwords  <= '0;
      cur_sel <= HS_INSTR;
      round   <= '0;
      w       <= '0;
      v       <= '0;
    end else if (clear) begin
      for (int i = 0; i < 4; i++) digest[i] <= H0;
      nwords <= '0;
      round  <= '0;
    end else if (round != 0) begin
      v <= {t1 + t2, a, b, c, d + t1, e, f, g};
      w <= {wn, w[15:1]};
      if (round == 7'd64) begin
        round <= '0;
        digest[cur_sel] <= { digest[cur_sel][255:224] + t1 + t2, digest[cur_sel][223:192] + a,
                             digest[cur_sel][191:160] + b,       digest[cur_sel][159:128] + c,
                             digest[cur_sel][127:96]  + d + t1,  digest[cur_sel][95:64]   + e,
                             digest[cur_sel][63:32]   + f,       digest[cur_sel][31:0]    + g };
      end else begin
        round <= round + 1'b1;
      end
    end else if (in_valid) begin
      msg    <= {msg[255:0], in_word};
      nwords <= nwords + 1'b1;
      if (nwords == 2'd3) begin
        cur_sel <= sel;
        v       <= digest[sel];
        // W[0] is the first 32 bits of the block.
        for (int i = 0; i < 16; i++) w[i] <= blk4[511 - 32*i -: 32];
        round   <= 7'd1;
      end
    end
  end

endmodule

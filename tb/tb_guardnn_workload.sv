// tb_guardnn_workload: runs scaled-down DNN workloads through the secure
// accelerator at its default parameters: a layer-by-layer inference over
// several inputs and one training step, in integrity mode.
//
// The network has NL layers (8, as many weighted layers as AlexNet), each
// with one 512-byte weight chunk and one 512-byte feature chunk; the
// stand-in accelerator computes a "layer" as the lane-wise 32-bit sum of
// its feature and weight chunk. Real layer sizes are far larger; what is
// kept is the instruction and counter schedule, which does not depend on
// the size of a layer, only on the number of feature writes.
//
// Inference: SetWeight imports all layers' weights; for each of N_IN
// inputs, SetInput writes the input (CTR_F,W = 0) and each Forward l
// reads feature chunk l under the read counter the host sets with
// SetReadCTR (the CTR_F,W it was written with) and writes chunk l+1 with
// CTR_F,W = l+1. After the last layer the output is exported and the user
// decrypts it; SignOutput signs the four hashes, which are compared with a
// reference SHA-256 chain.
// Training step: a forward pass, then a backward pass whose gradient
// chunks live at their own addresses and use the feature VNs (the host
// tracks the CTR_F,W of each one), the input gradient is exported, and the
// user imports updated weights with SetWeight (CTR_W = 2). Replaying a
// weight chunk saved before the update is then caught by the MAC check.
// Every layer output and gradient in DRAM is checked against the expected
// ciphertext; each mechanism is counted and must happen.
module tb_guardnn_workload;
  import guardnn_pkg::*;
  import aes_ref_pkg::*;

  localparam int L = N_LANES;
  localparam int NL = 8;
  localparam int N_IN = 2;
  localparam int NUM_SLOTS = 8;  // read-counter table size of the top
  localparam addr_t MAC_BASE = 64'h0000_0001_0000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // DUT ports
  logic instr_valid, instr_ready, status_valid, session_on, ci_mode, integrity_fail;
  instr_t instr;
  status_e status;
  logic [62:0] exp_ctr;
  logic [30:0] ctr_in; logic [31:0] ctr_fw; logic [62:0] ctr_w;
  logic pkc_req, pkc_done; pkc_op_e pkc_op; blk_t pkc_session_key;
  logic [3:0][255:0] hashes;
  logic trng_ready, trng_valid; blk_t trng_data;
  logic acc_start, acc_done; logic [63:0] acc_instr;
  logic a_req_valid, a_req_ready, a_req_write, a_wr_valid, a_wr_ready, a_rd_valid, a_done, a_done_err;
  kind_e a_req_kind; addr_t a_req_addr;
  blk_t [L-1:0] a_wr_data, a_rd_data; logic [7:0] a_rd_beat;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_wvalid, mem_wready, mem_rvalid;
  addr_t mem_req_addr; logic [7:0] mem_req_beats;
  blk_t [L-1:0] mem_wdata, mem_rdata; logic [L-1:0] mem_wmask;

  guardnn_top dut (.*);
  dram_model #(.LANES(L)) u_dram (.*);
  acc_model  #(.LANES(L)) u_acc (.*);

  int checks = 0, failures = 0;
  task automatic chk(input logic [127:0] got, input logic [127:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  // ---------------------------------------------- public-key unit, TRNG ---
  blk_t KS;                 // session key the key exchange agrees on
  blk_t trng_words [$];
  int   n_getpk = 0, n_kex = 0, n_sign = 0;
  logic [3:0][255:0] signed_hashes;
  always @(posedge clk) begin
    pkc_done <= 0;
    if (pkc_req && !pkc_done) begin
      repeat (5) @(posedge clk);
      case (pkc_op)
        PKC_GET_PK: n_getpk++;
        PKC_KEX:    n_kex++;
        PKC_SIGN:   begin n_sign++; signed_hashes = hashes; end
        default: ;
      endcase
      pkc_session_key <= KS;
      pkc_done <= 1;
      @(posedge clk);
      pkc_done <= 0;
    end
  end
  always @(posedge clk) if (trng_ready && trng_valid) void'(trng_words.pop_front());
  always @(negedge clk) begin
    trng_valid = trng_words.size() > 0;
    trng_data  = trng_valid ? trng_words[0] : '0;
  end

  // ------------------------------------------------------------- host ---
  int n_status = 0;
  task automatic issue(input instr_t in, input status_e exp_st, input string what);
    instr <= in; instr_valid <= 1;
    @(posedge clk); while (!instr_ready) @(posedge clk);
    instr_valid <= 0;
    while (!status_valid) @(posedge clk);
    chk(128'(status), 128'(exp_st), {what, ": status"});
    n_status++;
    @(posedge clk);
  endtask

  function automatic instr_t mk(input opcode_e op, input addr_t src = 0, input addr_t dst = 0,
                                input int count = 0, input logic [63:0] arg = 0,
                                input int slot = 0, input logic integ = 0);
    instr_t i;
    i = '0; i.op = op; i.src = src; i.dst = dst; i.count = 32'(count); i.arg = arg;
    i.slot = 4'(slot); i.integrity = integ;
    return i;
  endfunction

  // ------------------------------------------------------- user side ---
  blk_t k_enc, k_mac;

  task automatic user_put(input addr_t ubuf, input blk_t d [], input vn_t nonce);
    for (int i = 0; i < d.size(); i++) u_dram.mem[ubuf + 64'(i)] = d[i] ^ aes128(KS, {nonce, 64'(i)});
  endtask

  task automatic user_get(input addr_t ubuf, input vn_t nonce, output blk_t d [32]);
    for (int i = 0; i < 32; i++) d[i] = u_dram.rd(ubuf + 64'(i)) ^ aes128(KS, {nonce, 64'(i)});
  endtask

  function automatic blk_t layer(input blk_t a, input blk_t b);
    blk_t o;
    for (int j = 0; j < 4; j++) o[32*j +: 32] = a[32*j +: 32] + b[32*j +: 32];
    return o;
  endfunction

  // Count the blocks of a protected chunk that differ from the expected ciphertext.
  function automatic int ct_mismatch(input addr_t a, input blk_t p [], input int off, input vn_t v);
    int bad = 0;
    for (int i = 0; i < 32; i++)
      if (u_dram.rd(a + 64'(i)) !== (p[off+i] ^ aes128(k_enc, {v, a + 64'(i)}))) bad++;
    return bad;
  endfunction

  // ----------------------------------------------- reference SHA-256 ---
  function automatic logic [31:0] ror(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction
  function automatic logic [255:0] sha_compress(input logic [255:0] hv, input logic [511:0] m);
    logic [31:0] k [64] = '{
      32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
      32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
      32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
      32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
      32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
      32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
      32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
      32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
    logic [31:0] ww [64];
    logic [31:0] r [8];
    logic [31:0] t1, t2;
    for (int t = 0; t < 16; t++) ww[t] = m[511-32*t -: 32];
    for (int t = 16; t < 64; t++)
      ww[t] = (ror(ww[t-2],17) ^ ror(ww[t-2],19) ^ (ww[t-2] >> 10)) + ww[t-7]
            + (ror(ww[t-15],7) ^ ror(ww[t-15],18) ^ (ww[t-15] >> 3)) + ww[t-16];
    for (int j = 0; j < 8; j++) r[j] = hv[255-32*j -: 32];
    for (int t = 0; t < 64; t++) begin
      t1 = r[7] + (ror(r[4],6) ^ ror(r[4],11) ^ ror(r[4],25)) + ((r[4] & r[5]) ^ (~r[4] & r[6])) + k[t] + ww[t];
      t2 = (ror(r[0],2) ^ ror(r[0],13) ^ ror(r[0],22)) + ((r[0] & r[1]) ^ (r[0] & r[2]) ^ (r[1] & r[2]));
      r[7] = r[6]; r[6] = r[5]; r[5] = r[4]; r[4] = r[3] + t1;
      r[3] = r[2]; r[2] = r[1]; r[1] = r[0]; r[0] = t1 + t2;
    end
    for (int j = 0; j < 8; j++) hv[255-32*j -: 32] = hv[255-32*j -: 32] + r[j];
    return hv;
  endfunction
  localparam logic [255:0] H0 = 256'h6a09e667bb67ae853c6ef372a54ff53a510e527f9b05688c1f83d9ab5be0cd19;
  logic [255:0] ref_h [4];
  task automatic ref_instr(input instr_t i);
    ref_h[HS_INSTR] = sha_compress(ref_h[HS_INSTR], 512'(i));
  endtask
  task automatic ref_chunk(input hash_sel_e s, input blk_t d [], input int off);
    for (int b = 0; b < 8; b++)
      ref_h[s] = sha_compress(ref_h[s], {d[off+4*b], d[off+4*b+1], d[off+4*b+2], d[off+4*b+3]});
  endtask

  // ------------------------------------------------------- scenario ---
  // Protected layout (block addresses): weights of layer l at PW + 32l,
  // feature chunk l (0 = input) at PF + 32l, gradient chunk l at PG + 32l.
  localparam addr_t PW = 64'h20000, PF = 64'h30000, PG = 64'h40000;
  localparam addr_t UW = 64'h50000, UX = 64'h60000, UY = 64'h70000;
  blk_t Wt [NL*32], Fm [(NL+1)*32], Gr [(NL+1)*32], got [32], old_w [33];
  int   fw_of [NL+1];       // CTR_F,W each feature chunk was written with
  int   gw_of [NL+1];       // CTR_F,W each gradient chunk was written with
  int   fw, cur_in, n_layers = 0, n_outputs_ok = 0, n_grad_ok = 0, n_wupd = 0, n_replay = 0;
  instr_t i;

  function automatic logic [63:0] fwd(input addr_t f, input addr_t w, input addr_t o);
    return {16'h0, 16'(f >> 5), 16'(w >> 5), 16'(o >> 5)};
  endfunction

  function automatic int ct_bad(input addr_t a, input blk_t p [], input int off, input vn_t v);
    int bad = 0;
    for (int k = 0; k < 32; k++)
      if (u_dram.rd(a + 64'(k)) !== (p[off+k] ^ aes128(k_enc, {v, a + 64'(k)}))) bad++;
    return bad;
  endfunction

  task automatic run(input instr_t in, input status_e st, input string what);
    issue(in, st, what);
    ref_instr(in);
  endtask

  // Host: point the read table at a chunk, then run one accelerator step.
  task automatic layer_step(input addr_t fin, input int fin_ctr, input addr_t w,
                            input addr_t fout, input int slot);
    run(mk(OP_SET_READ_CTR, fin, fin + 64'd31, 0, 64'(fin_ctr), slot), ST_OK, "SetReadCTR");
    run(mk(OP_FORWARD, 0, 0, 0, fwd(fin, w, fout)), ST_OK, "Forward");
    fw++;
    n_layers++;
  endtask

  task automatic import_weights(input vn_t nonce);
    for (int k = 0; k < NL*32; k++) Wt[k] = rand128();
    user_put(UW, Wt, nonce);
    run(mk(OP_SET_WEIGHT, UW, PW, NL, nonce), ST_OK, "SetWeight");
    for (int c = 0; c < NL; c++) ref_chunk(HS_WEIGHT, Wt, 32*c);
  endtask

  task automatic forward_pass();
    blk_t x [32];
    for (int k = 0; k < 32; k++) begin x[k] = rand128(); Fm[k] = x[k]; end
    user_put(UX, x, 64'h100 + 64'(cur_in));
    run(mk(OP_SET_INPUT, UX, PF, 1, 64'h100 + 64'(cur_in)), ST_OK, "SetInput");
    ref_chunk(HS_INPUT, x, 0);
    cur_in++;
    fw_of[0] = 0;
    fw = 1;
    chk(128'({ctr_in, ctr_fw}), {31'(cur_in), 32'd1}, "counters after SetInput");
    for (int l = 0; l < NL; l++) begin
      fw_of[l+1] = fw;
      layer_step(PF + 64'(32*l), fw_of[l], PW + 64'(32*l), PF + 64'(32*(l+1)), l % NUM_SLOTS);
      for (int k = 0; k < 32; k++) Fm[32*(l+1)+k] = layer(Fm[32*l+k], Wt[32*l+k]);
      chk(128'(ct_bad(PF + 64'(32*(l+1)), Fm, 32*(l+1), {1'b0, 31'(cur_in), 32'(fw_of[l+1])})), 0,
          "layer output ciphertext under {0, CTR_IN, CTR_F,W}");
    end
    chk(64'(ctr_fw), 64'(NL + 1), "CTR_F,W after the pass");
  endtask

  task automatic export_chunk(input addr_t a, input int ctr, input blk_t ref_d [], input int off,
                              output int bad);
    blk_t ex [32];
    logic [62:0] e;
    e = exp_ctr;
    run(mk(OP_SET_READ_CTR, a, a + 64'd31, 0, 64'(ctr), 7), ST_OK, "SetReadCTR export");
    run(mk(OP_EXPORT_OUTPUT, a, UY, 1), ST_OK, "ExportOutput");
    user_get(UY, {1'b1, e}, got);
    for (int k = 0; k < 32; k++) ex[k] = u_dram.rd(UY + 64'(k));
    ref_chunk(HS_OUTPUT, ex, 0);
    bad = 0;
    for (int k = 0; k < 32; k++) if (got[k] !== ref_d[off+k]) bad++;
  endtask

  initial begin
    int bad;
    instr_valid = 0; instr = '0; pkc_done = 0; pkc_session_key = 0; cur_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    KS = rand128(); k_enc = rand128(); k_mac = rand128();
    trng_words.push_back(k_enc); trng_words.push_back(k_mac);
    issue(mk(OP_GET_PK), ST_OK, "GetPK");
    issue(mk(OP_INIT_SESSION, .integ(1'b1)), ST_OK, "InitSession");
    for (int s = 0; s < 4; s++) ref_h[s] = H0;

    // ---- inference over N_IN inputs
    import_weights(64'h55);
    chk(64'(ctr_w), 1, "CTR_W after SetWeight");
    for (int n = 0; n < N_IN; n++) begin
      forward_pass();
      export_chunk(PF + 64'(32*NL), fw_of[NL], Fm, 32*NL, bad);
      chk(128'(bad), 0, "user decrypts the network output");
      if (bad == 0) n_outputs_ok++;
    end
    issue(mk(OP_SIGN_OUTPUT), ST_OK, "SignOutput");
    for (int s = 0; s < 4; s++) chk(signed_hashes[s][255:128], ref_h[s][255:128], "signed hash (high)");
    for (int s = 0; s < 4; s++) chk(signed_hashes[s][127:0], ref_h[s][127:0], "signed hash (low)");
    chk(128'(integrity_fail), 0, "no integrity failure in a clean run");

    // ---- one training step
    forward_pass();
    // Loss gradient from the output, then back through the layers:
    // gradient chunk l = gradient chunk l+1 + weights of layer l.
    gw_of[NL] = fw;
    layer_step(PF + 64'(32*NL), fw_of[NL], PW + 64'(32*(NL-1)), PG + 64'(32*NL), 0);
    for (int k = 0; k < 32; k++) Gr[32*NL+k] = layer(Fm[32*NL+k], Wt[32*(NL-1)+k]);
    for (int l = NL - 1; l >= 0; l--) begin
      gw_of[l] = fw;
      layer_step(PG + 64'(32*(l+1)), gw_of[l+1], PW + 64'(32*l), PG + 64'(32*l), (l + 1) % NUM_SLOTS);
      for (int k = 0; k < 32; k++) Gr[32*l+k] = layer(Gr[32*(l+1)+k], Wt[32*l+k]);
    end
    bad = 0;
    for (int l = 0; l <= NL; l++)
      bad += ct_bad(PG + 64'(32*l), Gr, 32*l, {1'b0, 31'(cur_in), 32'(gw_of[l])});
    chk(128'(bad), 0, "gradient ciphertexts under feature VNs");
    if (bad == 0) n_grad_ok++;
    export_chunk(PG, gw_of[0], Gr, 0, bad);
    chk(128'(bad), 0, "user decrypts the exported gradient");
    // The user updates the weights and imports them again.
    for (int k = 0; k < 32; k++) old_w[k] = u_dram.rd(PW + 64'(k));
    old_w[32] = u_dram.rd(MAC_BASE + (PW >> 5));
    import_weights(64'h56);
    chk(64'(ctr_w), 2, "CTR_W after the weight update");
    bad = ct_bad(PW, Wt, 0, {1'b1, 63'd2});
    chk(128'(bad), 0, "updated weights under VN {1, 2}");
    if (bad == 0) n_wupd++;
    // A forward pass with the new weights still works.
    forward_pass();
    chk(128'(integrity_fail), 0, "no integrity failure after the update");
    // Replay the layer-0 weights and their MAC from before the update.
    for (int k = 0; k < 32; k++) u_dram.mem[PW + 64'(k)] = old_w[k];
    u_dram.mem[MAC_BASE + (PW >> 5)] = old_w[32];
    layer_step(PF, 0, PW, PF + 64'd32, 0);
    chk(128'(integrity_fail), 1, "replayed weights caught");
    if (integrity_fail) n_replay++;
    issue(mk(OP_SIGN_OUTPUT), ST_INTEGRITY, "SignOutput after replay");

    chk(128'(n_layers >= (N_IN + 2) * NL), 1, "layers run");
    chk(128'(n_outputs_ok == N_IN), 1, "every inference output checked");
    chk(128'(n_grad_ok > 0 && n_wupd > 0 && n_replay > 0), 1, "training step mechanisms");
    chk(128'(n_sign == 1 && u_dram.stalls > 0), 1, "signing and DRAM back-pressure");
    $display("workload: layers=%0d inputs=%0d outputs_ok=%0d grads_ok=%0d weight_updates=%0d replay_caught=%0d stalls=%0d acc_chunks=%0d instrs=%0d",
             n_layers, cur_in, n_outputs_ok, n_grad_ok, n_wupd, n_replay, u_dram.stalls,
             u_acc.chunks_moved, n_status);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

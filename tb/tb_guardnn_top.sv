// tb_guardnn_top: end-to-end run of the secure accelerator at its default
// parameters, with a behavioural DRAM (random back-pressure), base
// accelerator, public-key unit and TRNG around it, and the testbench as
// both the untrusted host and the remote user.
//
// Session 1 (confidentiality only): an instruction before any session is
// refused; GetPK; InitSession; the user's weights (1 chunk) and input
// (2 chunks) are imported from session-encrypted buffers; the host sets the
// read counters; two Forwards run "layers" (the second reads the first's
// output); the output is exported and the user decrypts and checks it.
// DRAM is checked to hold exactly the expected AES-CTR ciphertext, under
// the VN the counters give. A wrong read counter garbles the export; an
// accelerator attempt to write raw plaintext ends up encrypted, and one to
// write weights ends up under a feature VN, not the weight VN; SignOutput
// is refused without integrity mode.
// Session 2 (confidentiality and integrity): fresh keys, the same flow,
// the MACs land in DRAM, SignOutput succeeds and the four hashes match a
// reference SHA-256 chain; then a tampered chunk is caught on export and
// signing is refused.
// Each mechanism is counted and must happen at least once.
module tb_guardnn_top;
  import guardnn_pkg::*;
  import aes_ref_pkg::*;

  localparam int L = N_LANES;
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
    $display("[%0t] %s done status %0d", $time, what, status);
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
  blk_t W [32], X [64], Y [32], Z [32], got [32];
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
  // Protected layout (block addresses): weights PW, input PX (2 chunks),
  // layer outputs PY and PZ. User buffers UW, UX, UY.
  localparam addr_t PW = 64'h2000, PX = 64'h4000, PY = 64'h6000, PZ = 64'h6020, PR = 64'h6040;
  localparam addr_t UW = 64'h10000, UX = 64'h11000, UY = 64'h12000, UY2 = 64'h12100;
  localparam vn_t NW = 64'h77, NX = 64'h78;
  int n_wrong_ctr = 0, n_raw_refused = 0, n_wgt_refused = 0, n_integrity = 0, n_refused = 0, n_ci_sign = 0;

  // Forward argument for the accelerator model (chunk numbers).
  function automatic logic [63:0] fwd(input addr_t f, input addr_t w, input addr_t o,
                                      input bit raw = 0, input bit wgt = 0);
    return {raw, wgt, 14'h0, 16'(f >> 5), 16'(w >> 5), 16'(o >> 5)};
  endfunction

  task automatic session(input bit integ);
    instr_t i;
    blk_t ct_before;
    KS = rand128();
    k_enc = rand128(); k_mac = rand128();
    trng_words.push_back(k_enc); trng_words.push_back(k_mac);
    issue(mk(OP_INIT_SESSION, .integ(integ)), ST_OK, "InitSession");
    chk(128'({session_on, ci_mode}), {1'b1, integ}, "session mode");
    chk(128'({ctr_in, ctr_fw, ctr_w}), 0, "counters cleared");
    for (int s = 0; s < 4; s++) ref_h[s] = H0;
    for (int s = 0; s < 4; s++) chk(hashes[s][127:0], H0[127:0], "hashes cleared");

    for (int k = 0; k < 32; k++) W[k] = rand128();
    for (int k = 0; k < 64; k++) X[k] = rand128();
    user_put(UW, W, NW);
    user_put(UX, X, NX);

    i = mk(OP_SET_WEIGHT, UW, PW, 1, NW);
    issue(i, ST_OK, "SetWeight");
    if (integ) begin ref_instr(i); ref_chunk(HS_WEIGHT, W, 0); end
    chk(64'(ctr_w), 1, "CTR_W after SetWeight");
    chk(128'(ct_mismatch(PW, W, 0, {1'b1, 63'd1})), 0, "weights stored under K_MEnc, VN {1,CTR_W}");

    i = mk(OP_SET_INPUT, UX, PX, 2, NX);
    issue(i, ST_OK, "SetInput");
    if (integ) begin ref_instr(i); ref_chunk(HS_INPUT, X, 0); ref_chunk(HS_INPUT, X, 32); end
    chk(128'({ctr_in, ctr_fw}), {31'd1, 32'd1}, "CTR_IN, CTR_F,W after SetInput");
    chk(128'(ct_mismatch(PX, X, 0, {1'b0, 31'd1, 32'd0})), 0, "input chunk 0 ciphertext");
    chk(128'(ct_mismatch(PX + 64'd32, X, 32, {1'b0, 31'd1, 32'd0})), 0, "input chunk 1 ciphertext");

    // Host reconstructs the read counters: input written at CTR_F,W = 0.
    i = mk(OP_SET_READ_CTR, PX, PX + 64'd63, 0, 0, 0);
    issue(i, ST_OK, "SetReadCTR input");
    if (integ) ref_instr(i);
    // Layer 1: Y = X[chunk 1] + W, written with CTR_F,W = 1.
    i = mk(OP_FORWARD, 0, 0, 0, fwd(PX + 64'd32, PW, PY));
    issue(i, ST_OK, "Forward 1");
    if (integ) ref_instr(i);
    for (int k = 0; k < 32; k++) Y[k] = layer(X[32+k], W[k]);
    chk(128'(ct_mismatch(PY, Y, 0, {1'b0, 31'd1, 32'd1})), 0, "layer-1 output ciphertext");
    chk(64'(ctr_fw), 2, "CTR_F,W after Forward");
    // Layer 2 reads layer 1's output: Z = Y + W, written with CTR_F,W = 2.
    i = mk(OP_SET_READ_CTR, PY, PY + 64'd31, 0, 1, 1);
    issue(i, ST_OK, "SetReadCTR layer 1");
    if (integ) ref_instr(i);
    i = mk(OP_FORWARD, 0, 0, 0, fwd(PY, PW, PZ));
    issue(i, ST_OK, "Forward 2");
    if (integ) ref_instr(i);
    for (int k = 0; k < 32; k++) Z[k] = layer(Y[k], W[k]);
    chk(128'(ct_mismatch(PZ, Z, 0, {1'b0, 31'd1, 32'd2})), 0, "layer-2 output ciphertext");

    // Export Z to the user.
    i = mk(OP_SET_READ_CTR, PZ, PZ + 64'd31, 0, 2, 2);
    issue(i, ST_OK, "SetReadCTR layer 2");
    if (integ) ref_instr(i);
    i = mk(OP_EXPORT_OUTPUT, PZ, UY, 1);
    issue(i, ST_OK, "ExportOutput");
    if (integ) ref_instr(i);
    user_get(UY, {1'b1, 63'd0}, got);
    begin
      int bad = 0;
      for (int k = 0; k < 32; k++) if (got[k] !== Z[k]) bad++;
      chk(128'(bad), 0, "user decrypts the exported output");
    end
    if (integ) begin
      // The output hash covers what was exported (session ciphertext).
      blk_t ex [32];
      for (int k = 0; k < 32; k++) ex[k] = u_dram.rd(UY + 64'(k));
      ref_chunk(HS_OUTPUT, ex, 0);
    end
    chk(64'(exp_ctr), 1, "export counter");

    if (!integ) begin
      // Wrong read counter: the export decrypts with the wrong VN.
      issue(mk(OP_SET_READ_CTR, PZ, PZ + 64'd31, 0, 5, 2), ST_OK, "SetReadCTR wrong");
      issue(mk(OP_EXPORT_OUTPUT, PZ, UY2, 1), ST_OK, "ExportOutput wrong ctr");
      user_get(UY2, {1'b1, 63'd1}, got);
      begin
        int bad = 0;
        for (int k = 0; k < 32; k++) if (got[k] !== Z[k]) bad++;
        chk(128'(bad), 32, "wrong CTR_F,R garbles every block");
        if (bad == 32) n_wrong_ctr++;
      end
      // Accelerator tries to write plaintext with a raw access.
      issue(mk(OP_FORWARD, 0, 0, 0, fwd(PY, PW, PR, 1)), ST_OK, "Forward raw attempt");
      begin
        int plain = 0;
        for (int k = 0; k < 32; k++) if (u_dram.rd(PR + 64'(k)) === Z[k]) plain++;
        chk(128'(plain), 0, "no plaintext in DRAM after raw attempt");
        chk(128'(ct_mismatch(PR, Z, 0, {1'b0, 31'd1, 32'd3})), 0, "raw attempt encrypted as features");
        if (plain == 0) n_raw_refused++;
      end
      // Accelerator tries to write weights, which would reuse {1, CTR_W}.
      issue(mk(OP_FORWARD, 0, 0, 0, fwd(PY, PW, PR + 64'd32, 0, 1)), ST_OK, "Forward weight-write attempt");
      chk(128'(ct_mismatch(PR + 64'd32, Z, 0, {1'b0, 31'd1, 32'd4})), 0, "weight attempt encrypted as features");
      chk(128'(ct_mismatch(PR + 64'd32, Z, 0, {1'b1, 63'd1})), 32, "weight VN not reused");
      if (ct_mismatch(PR + 64'd32, Z, 0, {1'b0, 31'd1, 32'd4}) == 0) n_wgt_refused++;
      issue(mk(OP_SIGN_OUTPUT), ST_BAD_OP, "SignOutput without integrity");
      n_refused++;
    end else begin
      chk(u_dram.rd(MAC_BASE + (PZ >> 5)) != 0, 1, "MAC stored for layer-2 output");
      issue(mk(OP_SIGN_OUTPUT), ST_OK, "SignOutput");
      n_ci_sign++;
      for (int s = 0; s < 4; s++) begin
        checks++;
        if (signed_hashes[s] !== ref_h[s]) begin
          failures++; $display("FAIL hash %0d: got %h exp %h", s, signed_hashes[s], ref_h[s]);
        end
      end
      // Tamper with the layer-2 output in DRAM; the export must flag it.
      u_dram.mem[PZ + 64'd5] = u_dram.mem[PZ + 64'd5] ^ 128'h100;
      issue(mk(OP_EXPORT_OUTPUT, PZ, UY2, 1), ST_INTEGRITY, "ExportOutput of tampered chunk");
      chk(128'(integrity_fail), 1, "integrity failure flagged");
      if (integrity_fail) n_integrity++;
      issue(mk(OP_SIGN_OUTPUT), ST_INTEGRITY, "SignOutput after failure");
    end
  endtask

  initial begin
    instr_valid = 0; instr = '0; pkc_done = 0; pkc_session_key = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    issue(mk(OP_SET_INPUT, UX, PX, 1, NX), ST_NO_SESSION, "SetInput before session");
    n_refused++;
    issue(mk(OP_GET_PK), ST_OK, "GetPK");
    issue(mk(opcode_e'(4'd12)), ST_BAD_OP, "unknown opcode");
    session(0);
    session(1);

    // every mechanism must have happened
    chk(128'(n_getpk > 0 && n_kex == 2 && n_sign == 1), 1, "public-key unit requests");
    chk(128'(u_dram.stalls > 0), 1, "DRAM back-pressure seen");
    chk(128'(n_wrong_ctr > 0), 1, "wrong read counter exercised");
    chk(128'(n_raw_refused > 0), 1, "raw write refusal exercised");
    chk(128'(n_wgt_refused > 0), 1, "accelerator weight-write refusal exercised");
    chk(128'(n_integrity > 0), 1, "integrity failure exercised");
    chk(128'(n_refused > 0), 1, "instruction refusal exercised");
    chk(128'(n_ci_sign > 0), 1, "signing exercised");
    chk(128'(u_acc.chunks_moved >= 9), 1, "accelerator moved its chunks");
    $display("mechanisms: getpk=%0d kex=%0d sign=%0d stalls=%0d wrong_ctr=%0d raw_refused=%0d wgt_refused=%0d integrity=%0d refused=%0d acc_chunks=%0d instrs=%0d",
             n_getpk, n_kex, n_sign, u_dram.stalls, n_wrong_ctr, n_raw_refused, n_wgt_refused, n_integrity,
             n_refused, u_acc.chunks_moved, n_status);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

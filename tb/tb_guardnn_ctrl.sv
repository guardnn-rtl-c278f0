// tb_guardnn_ctrl: the instruction controller on its own. Its memory port
// is served by a plain store (no encryption) that records the kind and
// address of every request, and the VN generator, hash unit, public-key
// unit, TRNG and accelerator are small models, so the test sees exactly
// what the controller asks for. Checks: refusal before a session; the key
// exchange and TRNG loading the three keys; SetWeight/SetInput decrypting
// the user's session ciphertext, with raw reads of the user buffer and
// weight/feature writes of the plaintext; the counter pulses of each
// instruction; Forward handing over the port and the base instruction;
// SetReadCTR operands; ExportOutput writing K_Session ciphertext raw under
// the export counter; hashing of instructions (4 words) and chunks (32
// words) only in integrity mode; counter exhaustion and integrity failure
// refusing instructions; signing only in integrity mode.
module tb_guardnn_ctrl;
  import guardnn_pkg::*;
  import aes_ref_pkg::*;

  localparam int L = 3, BEATS = 11;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic instr_valid, instr_ready, status_valid, session_on, ci_mode, integrity_fail;
  instr_t instr; status_e status; logic [62:0] exp_ctr;
  logic pkc_req, pkc_done; pkc_op_e pkc_op; blk_t pkc_session_key;
  logic trng_ready, trng_valid; blk_t trng_data;
  logic vn_clear, vn_set_input, vn_set_weight, vn_fw_inc, vn_rd_set, vn_exhausted;
  logic [2:0] vn_rd_slot; addr_t vn_rd_first, vn_rd_last; logic [31:0] vn_rd_ctr;
  logic prot_en, iv_en, acc_owner; blk_t k_enc, k_mac;
  logic c_req_valid, c_req_ready, c_req_write, c_wr_valid, c_wr_ready, c_rd_valid, mpu_done, mpu_done_err;
  kind_e c_req_kind; addr_t c_req_addr;
  blk_t [L-1:0] c_wr_data, c_rd_data; logic [7:0] c_rd_beat;
  logic acc_start, acc_done; logic [63:0] acc_instr;
  logic hash_clear, hash_valid, hash_ready, hash_busy; hash_sel_e hash_sel; blk_t hash_block;

  guardnn_ctrl #(.LANES(L), .NUM_RANGES(8), .FR_W(32)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input logic [127:0] got, input logic [127:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  // pulse counters
  int n_clear, n_in, n_w, n_fw, n_rd, n_hclear, n_acc;
  int n_hash [4];
  logic [63:0] seen_acc_instr;
  always @(posedge clk) if (rst_n) begin
    n_clear  += vn_clear;  n_in += vn_set_input; n_w += vn_set_weight;
    n_fw     += vn_fw_inc; n_rd += vn_rd_set;    n_hclear += hash_clear;
    if (hash_valid && hash_ready) n_hash[hash_sel]++;
    if (acc_start) begin n_acc++; seen_acc_instr = acc_instr; end
  end
  assign hash_ready = 1'b1;
  assign hash_busy  = 1'b0;

  // public-key unit and TRNG
  blk_t KS;
  int n_pkc [3];
  always @(posedge clk) begin
    pkc_done <= 0;
    if (pkc_req && !pkc_done) begin
      repeat (3) @(posedge clk);
      n_pkc[pkc_op]++;
      pkc_session_key <= KS;
      pkc_done <= 1;
      @(posedge clk);
      pkc_done <= 0;
    end
  end
  blk_t tw [$];
  always @(posedge clk) if (trng_ready && trng_valid) void'(tw.pop_front());
  always @(negedge clk) begin trng_valid = tw.size() > 0; trng_data = trng_valid ? tw[0] : '0; end

  // accelerator: finishes 20 cycles after start; checks it owns the port
  int owner_ok = 0;
  always @(posedge clk) if (acc_start) begin
    repeat (20) begin @(posedge clk); if (acc_owner) owner_ok++; end
    acc_done <= 1; @(posedge clk); acc_done <= 0;
  end

  // memory port: a plain block store
  blk_t mem [addr_t];
  kind_e log_kind [$]; logic log_wr [$]; addr_t log_addr [$];
  bit inject_err = 0;
  function automatic blk_t rd(input addr_t a); return mem.exists(a) ? mem[a] : '0; endfunction
  initial begin
    c_req_ready = 0; c_wr_ready = 0; c_rd_valid = 0; c_rd_data = '0; c_rd_beat = 0;
    mpu_done = 0; mpu_done_err = 0;
    forever begin
      @(posedge clk);
      if (c_req_valid) begin
        kind_e k; logic w; addr_t a;
        k = c_req_kind; w = c_req_write; a = c_req_addr;
        c_req_ready <= 1; @(posedge clk); c_req_ready <= 0;
        log_kind.push_back(k); log_wr.push_back(w); log_addr.push_back(a);
        if (w) begin
          for (int b = 0; b < BEATS; b++) begin
            c_wr_ready <= ($urandom % 3 != 0);
            @(posedge clk);
            while (!(c_wr_valid && c_wr_ready)) begin c_wr_ready <= 1; @(posedge clk); end
            for (int i = 0; i < L; i++) if (b*L+i < 32) mem[a + 64'(b*L+i)] = c_wr_data[i];
          end
          c_wr_ready <= 0;
        end else begin
          repeat (4) @(posedge clk);
          for (int b = 0; b < BEATS; b++) begin
            c_rd_valid <= 1; c_rd_beat <= 8'(b);
            for (int i = 0; i < L; i++) c_rd_data[i] <= rd(a + 64'(b*L+i));
            @(posedge clk);
          end
          c_rd_valid <= 0;
        end
        mpu_done <= 1; mpu_done_err <= inject_err && !w; @(posedge clk);
        mpu_done <= 0; mpu_done_err <= 0;
      end
    end
  end

  task automatic issue(input instr_t in, input status_e exp_st, input string what);
    instr <= in; instr_valid <= 1;
    @(posedge clk); while (!instr_ready) @(posedge clk);
    instr_valid <= 0;
    while (!status_valid) @(posedge clk);
    chk(128'(status), 128'(exp_st), {what, ": status"});
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

  task automatic init(input bit integ, input blk_t ke, input blk_t km);
    KS = rand128(); tw.push_back(ke); tw.push_back(km);
    issue(mk(OP_INIT_SESSION, .integ(integ)), ST_OK, "InitSession");
    chk(k_enc, ke, "K_MEnc from TRNG");
    chk(k_mac, km, "MAC key from TRNG");
    chk(128'({prot_en, iv_en, ci_mode, session_on}), {1'b1, integ, integ, 1'b1}, "mode after InitSession");
  endtask

  localparam addr_t UW = 64'h1000, PW = 64'h2000, UX = 64'h3000, PX = 64'h4000, UY = 64'h5000;

  initial begin
    blk_t W [64], X [32], ke, km;
    int bad;
    instr_valid = 0; instr = '0; vn_exhausted = 0; acc_done = 0; pkc_done = 0;
    n_clear = 0; n_in = 0; n_w = 0; n_fw = 0; n_rd = 0; n_hclear = 0; n_acc = 0;
    n_hash = '{0, 0, 0, 0}; n_pkc = '{0, 0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    issue(mk(OP_SET_WEIGHT, UW, PW, 1), ST_NO_SESSION, "SetWeight before session");
    chk(128'(log_kind.size()), 0, "no memory access when refused");
    ke = rand128(); km = rand128();
    init(1, ke, km);
    chk(128'({n_clear, n_hclear}), {32'd1, 32'd1}, "counters and hashes cleared");
    chk(128'(n_pkc[PKC_KEX]), 1, "key exchange requested");

    // SetWeight, 2 chunks, user nonce 0x99
    for (int i = 0; i < 64; i++) begin W[i] = rand128(); mem[UW + 64'(i)] = W[i] ^ aes128(KS, {64'h99, 64'(i)}); end
    issue(mk(OP_SET_WEIGHT, UW, PW, 2, 64'h99), ST_OK, "SetWeight");
    bad = 0; for (int i = 0; i < 64; i++) if (rd(PW + 64'(i)) !== W[i]) bad++;
    chk(128'(bad), 0, "weights decrypted with K_Session");
    chk(128'(log_kind.size()), 4, "two reads and two writes");
    chk(128'({log_kind[0], log_wr[0], log_addr[0]}), {KIND_RAW, 1'b0, UW}, "raw read of user chunk 0");
    chk(128'({log_kind[1], log_wr[1], log_addr[1]}), {KIND_WEIGHT, 1'b1, PW}, "weight write chunk 0");
    chk(128'({log_kind[3], log_wr[3], log_addr[3]}), {KIND_WEIGHT, 1'b1, PW + 64'd32}, "weight write chunk 1");
    chk(128'({n_w, n_in, n_fw}), {32'd1, 32'd0, 32'd0}, "SetWeight pulses CTR_W");
    chk(128'({n_hash[HS_INSTR], n_hash[HS_WEIGHT]}), {32'd4, 32'd64}, "hashed instruction and weights");

    // SetInput, 1 chunk
    for (int i = 0; i < 32; i++) begin X[i] = rand128(); mem[UX + 64'(i)] = X[i] ^ aes128(KS, {64'h5, 64'(i)}); end
    log_kind.delete(); log_wr.delete(); log_addr.delete();
    issue(mk(OP_SET_INPUT, UX, PX, 1, 64'h5), ST_OK, "SetInput");
    bad = 0; for (int i = 0; i < 32; i++) if (rd(PX + 64'(i)) !== X[i]) bad++;
    chk(128'(bad), 0, "input decrypted");
    chk(128'({log_kind[1], log_wr[1]}), {KIND_FEATURE, 1'b1}, "input written as features");
    chk(128'({n_in, n_fw}), {32'd1, 32'd1}, "SetInput pulses CTR_IN then CTR_F,W");
    chk(128'(n_hash[HS_INPUT]), 32, "hashed input");

    // Forward
    issue(mk(OP_FORWARD, 0, 0, 0, 64'hdead_beef_0123_4567), ST_OK, "Forward");
    chk(128'({n_acc, seen_acc_instr}), {32'd1, 64'hdead_beef_0123_4567}, "base instruction passed on");
    chk(128'(owner_ok), 20, "accelerator owns the port during Forward");
    chk(128'(acc_owner), 0, "port returned");
    chk(128'(n_fw), 2, "Forward pulses CTR_F,W");

    // SetReadCTR
    issue(mk(OP_SET_READ_CTR, 64'h40, 64'h7f, 0, 64'h1234, 5), ST_OK, "SetReadCTR");
    chk(128'({n_rd, 32'(vn_rd_slot), vn_rd_ctr}), {32'd1, 32'd5, 32'h1234}, "SetReadCTR slot and counter");
    chk(128'({vn_rd_first, vn_rd_last}), {64'h40, 64'h7f}, "SetReadCTR range");

    // ExportOutput of X
    log_kind.delete(); log_wr.delete(); log_addr.delete();
    issue(mk(OP_EXPORT_OUTPUT, PX, UY, 1), ST_OK, "ExportOutput");
    bad = 0; for (int i = 0; i < 32; i++) if (rd(UY + 64'(i)) !== (X[i] ^ aes128(KS, {1'b1, 63'd0, 64'(i)}))) bad++;
    chk(128'(bad), 0, "export re-encrypted with K_Session, counter {1,0,i}");
    chk(128'({log_kind[0], log_wr[0], log_kind[1], log_wr[1]}), {KIND_FEATURE, 1'b0, KIND_RAW, 1'b1}, "export access kinds");
    chk(128'(exp_ctr), 1, "export counter");
    chk(128'(n_hash[HS_OUTPUT]), 32, "hashed output");

    issue(mk(OP_SIGN_OUTPUT), ST_OK, "SignOutput");
    chk(128'(n_pkc[PKC_SIGN]), 1, "signature requested");

    // counter exhaustion
    vn_exhausted = 1;
    issue(mk(OP_FORWARD), ST_CTR_EXHAUST, "Forward with exhausted counters");
    issue(mk(OP_SET_READ_CTR, 0, 0, 0, 1, 1), ST_OK, "SetReadCTR still allowed");
    vn_exhausted = 0;

    // integrity failure on a read
    inject_err = 1;
    issue(mk(OP_EXPORT_OUTPUT, PX, UY, 1), ST_INTEGRITY, "ExportOutput with bad MAC");
    inject_err = 0;
    chk(128'(integrity_fail), 1, "integrity flag set");
    issue(mk(OP_SIGN_OUTPUT), ST_INTEGRITY, "SignOutput refused");

    // confidentiality-only session: no hashing, no signing
    init(0, rand128(), rand128());
    chk(128'(integrity_fail), 0, "flag cleared by InitSession");
    begin
      int h0;
      h0 = n_hash[HS_INSTR] + n_hash[HS_INPUT];
      issue(mk(OP_SET_INPUT, UX, PX, 1, 64'h5), ST_OK, "SetInput, no integrity");
      chk(128'(n_hash[HS_INSTR] + n_hash[HS_INPUT]), 128'(h0), "no hashing without integrity");
    end
    issue(mk(OP_SIGN_OUTPUT), ST_BAD_OP, "SignOutput without integrity");
    issue(mk(OP_GET_PK), ST_OK, "GetPK");
    chk(128'(n_pkc[PKC_GET_PK]), 1, "GetPK requested");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

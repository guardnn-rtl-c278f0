// tb_mem_protect_unit: the memory protection unit against a behavioural
// DRAM with random back-pressure and the behavioural AES reference.
// Checks, chunk by chunk: what lands in DRAM is the plaintext XOR
// AES(k_enc, {VN, address}) with the VN chosen by kind (feature write,
// weight, feature read through the lookup port); the block after the chunk
// is untouched; a read returns the plaintext in 11 beats, the first 12
// cycles after the first DRAM beat; raw accesses pass plaintext only while
// trusted is set and are encrypted as features otherwise; a weight write
// from an untrusted client is encrypted as features; protection off
// passes plaintext. In integrity mode the MAC block holds the reference
// MAC, a clean read passes the check, and a flipped ciphertext bit, a
// replayed (older) chunk and a wrong read VN all fail it.
module tb_mem_protect_unit;
  import guardnn_pkg::*;
  import aes_ref_pkg::*;

  localparam int L = 3, BEATS = 11;
  localparam addr_t MAC_BASE = 64'h10_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prot_en, iv_en, trusted;
  blk_t k_enc, k_mac;
  vn_t vn_feat_wr, vn_weight, lookup_vn;
  addr_t lookup_addr;
  logic req_valid, req_ready, req_write, wr_valid, wr_ready, rd_valid, done, done_err;
  kind_e req_kind;
  addr_t req_addr;
  blk_t [L-1:0] wr_data, rd_data;
  logic [7:0] rd_beat;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_wvalid, mem_wready, mem_rvalid;
  addr_t mem_req_addr;
  logic [7:0] mem_req_beats;
  blk_t [L-1:0] mem_wdata, mem_rdata;
  logic [L-1:0] mem_wmask;

  mem_protect_unit #(.LANES(L)) dut (.mac_base(MAC_BASE), .*);
  dram_model #(.LANES(L)) u_dram (.*);

  int checks = 0, failures = 0, cycle = 0;
  task automatic chk(input logic [127:0] got, input logic [127:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  blk_t pt [32];
  blk_t rb [32];
  int   nbeats, last_err;

  // The VN the unit reads for a feature read: a tiny table keyed by address.
  vn_t rd_vn_of [addr_t];
  assign lookup_vn = rd_vn_of.exists(lookup_addr) ? rd_vn_of[lookup_addr] : 64'h0;

  task automatic do_write(input kind_e k, input addr_t a);
    req_valid <= 1; req_write <= 1; req_kind <= k; req_addr <= a;
    @(posedge clk); while (!req_ready) @(posedge clk);
    req_valid <= 0;
    for (int b = 0; b < BEATS; b++) begin
      wr_valid <= 1;
      for (int i = 0; i < L; i++) wr_data[i] <= (b*L+i < 32) ? pt[b*L+i] : rand128();
      @(posedge clk); while (!wr_ready) @(posedge clk);
    end
    wr_valid <= 0;
    while (!done) @(posedge clk);
    @(posedge clk);
  endtask

  // One monitor timestamps the first DRAM read beat and the first beat
  // handed to the client on the same edges.
  int mem_first, rd_first;
  always @(posedge clk) begin
    cycle++;
    if (mem_rvalid && mem_first < 0) mem_first = cycle;
    if (rd_valid && rd_first < 0) rd_first = cycle;
  end

  task automatic do_read(input kind_e k, input addr_t a);
    nbeats = 0; rd_first = -1; mem_first = -1;
    req_valid <= 1; req_write <= 0; req_kind <= k; req_addr <= a;
    @(posedge clk); while (!req_ready) @(posedge clk);
    req_valid <= 0;
    forever begin
      @(posedge clk);
      if (rd_valid) begin
        for (int i = 0; i < L; i++) if (rd_beat*L+i < 32) rb[rd_beat*L+i] = rd_data[i];
        nbeats++;
      end
      if (done) begin last_err = done_err; break; end
    end
    @(posedge clk);
  endtask

  task automatic expect_dram(input addr_t a, input vn_t v, input logic plain, input string what);
    int bad = 0;
    for (int i = 0; i < 32; i++)
      if (u_dram.rd(a + 64'(i)) !== (plain ? pt[i] : pt[i] ^ aes128(k_enc, {v, a + 64'(i)}))) bad++;
    chk(128'(bad), 0, what);
    chk(u_dram.rd(a + 64'd32), 0, {what, ": block after chunk untouched"});
  endtask

  task automatic expect_read(input string what);
    int bad = 0;
    for (int i = 0; i < 32; i++) if (rb[i] !== pt[i]) bad++;
    chk(128'(bad), 0, what);
    chk(128'(nbeats), BEATS, {what, ": beats"});
  endtask

  function automatic mac_t ref_mac(input addr_t a, input vn_t v);
    blk_t x = 0;
    for (int i = 0; i < 32; i++) x ^= aes128(k_mac, u_dram.rd(a + 64'(i)) ^ {v, a + 64'(i)});
    return x[127:64];
  endfunction

  initial begin
    addr_t A;
    blk_t saved [32];
    prot_en = 1; iv_en = 0; trusted = 0;
    k_enc = rand128(); k_mac = rand128();
    vn_feat_wr = {1'b0, 31'd1, 32'd1}; vn_weight = {1'b1, 63'd4};
    req_valid = 0; req_write = 0; req_kind = KIND_FEATURE; req_addr = 0; wr_valid = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // 1. feature write and read back
    A = 64'h400;
    for (int i = 0; i < 32; i++) pt[i] = rand128();
    do_write(KIND_FEATURE, A);
    expect_dram(A, vn_feat_wr, 0, "feature write ciphertext");
    rd_vn_of[A] = vn_feat_wr;
    do_read(KIND_FEATURE, A);
    expect_read("feature read");
    chk(128'(rd_first - mem_first), 12, "read latency through AES");
    chk(128'(last_err), 0, "no error without integrity");

    // 2. weights
    A = 64'h800;
    for (int i = 0; i < 32; i++) pt[i] = rand128();
    trusted = 1;
    do_write(KIND_WEIGHT, A);
    trusted = 0;
    expect_dram(A, vn_weight, 0, "weight ciphertext");
    do_read(KIND_WEIGHT, A);
    expect_read("weight read");
    A = 64'h840;
    do_write(KIND_WEIGHT, A);
    expect_dram(A, vn_feat_wr, 0, "untrusted weight write -> feature VN");

    // 3. raw: plaintext only with trusted
    A = 64'hc00;
    trusted = 1;
    do_write(KIND_RAW, A);
    expect_dram(A, 0, 1, "raw write allowed");
    trusted = 0;
    A = 64'hc40;
    do_write(KIND_RAW, A);
    expect_dram(A, vn_feat_wr, 0, "raw write refused -> encrypted");

    // 4. protection off
    prot_en = 0;
    A = 64'hc80;
    do_write(KIND_FEATURE, A);
    expect_dram(A, 0, 1, "protection off");
    prot_en = 1;

    // 5. integrity mode
    iv_en = 1;
    A = 64'h1000;
    vn_feat_wr = {1'b0, 31'd1, 32'd2};
    for (int i = 0; i < 32; i++) pt[i] = rand128();
    do_write(KIND_FEATURE, A);
    expect_dram(A, vn_feat_wr, 0, "integrity-mode ciphertext");
    chk(u_dram.rd(MAC_BASE + (A >> 5)), {64'h0, ref_mac(A, vn_feat_wr)}, "stored MAC");
    rd_vn_of[A] = vn_feat_wr;
    do_read(KIND_FEATURE, A);
    expect_read("integrity-mode read");
    chk(128'(last_err), 0, "clean chunk passes");
    // flip one bit
    u_dram.mem[A + 64'd9] = u_dram.mem[A + 64'd9] ^ 128'h1;
    do_read(KIND_FEATURE, A);
    chk(128'(last_err), 1, "tampered chunk detected");
    u_dram.mem[A + 64'd9] = u_dram.mem[A + 64'd9] ^ 128'h1;
    // replay: keep the old chunk and MAC, write a new version, put the old back
    for (int i = 0; i < 32; i++) saved[i] = u_dram.rd(A + 64'(i));
    begin
      blk_t old_mac;
      old_mac = u_dram.rd(MAC_BASE + (A >> 5));
      vn_feat_wr = {1'b0, 31'd1, 32'd3};
      do_write(KIND_FEATURE, A);
      for (int i = 0; i < 32; i++) u_dram.mem[A + 64'(i)] = saved[i];
      u_dram.mem[MAC_BASE + (A >> 5)] = old_mac;
    end
    rd_vn_of[A] = vn_feat_wr;
    do_read(KIND_FEATURE, A);
    chk(128'(last_err), 1, "replayed chunk detected");
    // wrong read VN on an intact chunk
    do_write(KIND_FEATURE, A);
    rd_vn_of[A] = {1'b0, 31'd1, 32'd7};
    do_read(KIND_FEATURE, A);
    chk(128'(last_err), 1, "wrong read VN fails check");

    checks++;
    if (u_dram.stalls == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("DRAM stalls %0d", u_dram.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

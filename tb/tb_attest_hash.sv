// tb_attest_hash: a chain fed the padded block(s) of a message must end at
// the message's SHA-256 digest. Checks the FIPS 180-2 examples "abc" (one
// block) and the 448-bit two-block message, each on a different chain, that
// untouched chains keep the initial value, that a compression keeps busy
// high for 64 cycles, and that clear restores all chains.
module tb_attest_hash;
  import guardnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid, in_ready, busy;
  hash_sel_e sel;
  blk_t in_word;
  logic [3:0][255:0] digest;

  attest_hash dut (.*);

  localparam logic [255:0] H0 = 256'h6a09e667bb67ae853c6ef372a54ff53a510e527f9b05688c1f83d9ab5be0cd19;
  int checks = 0, failures = 0;
  task automatic chk(input logic [255:0] got, input logic [255:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  int busy_cycles;
  always @(posedge clk) if (rst_n && busy) busy_cycles++;

  task automatic feed(input hash_sel_e s, input logic [511:0] blk);
    for (int i = 0; i < 4; i++) begin
      in_valid <= 1; sel <= s; in_word <= blk[511-128*i -: 128];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
  endtask

  initial begin
    clear = 0; in_valid = 0; sel = HS_INSTR; in_word = 0; busy_cycles = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // "abc", padded
    feed(HS_INPUT, {32'h61626380, 416'h0, 64'h18});
    chk(digest[HS_INPUT], 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad, "abc");
    checks++;
    if (busy_cycles != 64) begin failures++; $display("FAIL busy %0d cycles", busy_cycles); end
    // "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq", two padded blocks
    feed(HS_WEIGHT, 512'h6162636462636465636465666465666765666768666768696768696a68696a6b696a6b6c6a6b6c6d6b6c6d6e6c6d6e6f6d6e6f706e6f707180000000_00000000);
    chk(digest[HS_WEIGHT], 256'h85e655d6417a17953363376a624cde5c76e09589cac5f811cc4b32c1f20e533a, "first block state");
    feed(HS_WEIGHT, {448'h0, 64'h1c0});
    chk(digest[HS_WEIGHT], 256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1, "two-block message");
    chk(digest[HS_INSTR], H0, "instr chain untouched");
    chk(digest[HS_OUTPUT], H0, "output chain untouched");
    chk(digest[HS_INPUT], 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad, "abc kept");
    clear <= 1; @(posedge clk); clear <= 0; @(posedge clk);
    for (int i = 0; i < 4; i++) chk(digest[i], H0, "cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

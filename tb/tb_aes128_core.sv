// tb_aes128_core: checks the pipelined AES-128 core against the two
// FIPS-197 example vectors and against the behavioural reference for random
// keys and blocks, with one block entering every cycle. It also checks that
// each block leaves exactly 12 cycles after it entered and that its tag
// travels with it.
module tb_aes128_core;
  import guardnn_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  blk_t key, in_block, out_block;
  logic in_valid, out_valid;
  logic [15:0] in_tag, out_tag;
  int checks = 0, failures = 0;
  int cycle = 0;

  aes128_core #(.TAG_W(16)) dut (.*);

  blk_t exp_q [$];
  int   t_q   [$];
  int   n_out = 0;

  // One monitor samples both ends on the same edge: an input taken at edge
  // c must show up at edge c+12.
  always @(posedge clk) begin
    cycle++;
    if (rst_n && in_valid) t_q.push_back(cycle);
    if (rst_n && out_valid) check_out();
  end

  task automatic check_out();
    blk_t e; int t0;
    e = exp_q.pop_front(); t0 = t_q.pop_front();
    checks++;
    if (out_block !== e) begin
      failures++; $display("FAIL block %0d: got %h exp %h", n_out, out_block, e);
    end
    checks++;
    if (cycle - t0 != 12) begin
      failures++; $display("FAIL latency %0d", cycle - t0);
    end
    checks++;
    if (out_tag != 16'(n_out)) begin failures++; $display("FAIL tag"); end
    n_out++;
  endtask

  task automatic push(input blk_t k, input blk_t p, input blk_t e, input int idx);
    key <= k; in_block <= p; in_valid <= 1; in_tag <= 16'(idx);
    exp_q.push_back(e);
    @(posedge clk);
  endtask

  initial begin
    blk_t k;
    in_valid = 0; key = 0; in_block = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // FIPS-197 Appendix C.1 and Appendix B.
    push(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
         128'h69c4e0d86a7b0430d8cdb78070b4c55a, 0);
    in_valid <= 0;
    repeat (14) @(posedge clk);
    push(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3243f6a8885a308d313198a2e0370734,
         128'h3925841d02dc09fbdc118597196a0b32, 1);
    in_valid <= 0;
    repeat (14) @(posedge clk);
    // Back-to-back random blocks under one key.
    k = rand128();
    for (int i = 2; i < 42; i++) begin
      blk_t p;
      p = rand128();
      push(k, p, aes128(k, p), i);
    end
    in_valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (n_out != 42) begin failures++; $display("FAIL count %0d", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

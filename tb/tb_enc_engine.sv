// tb_enc_engine: checks the counter-mode engine against the behavioural AES
// reference. Random beats go in back to back; each lane's output must be
// data XOR AES(key, {vn, addr + lane}), or the data itself when bypass is
// set, and must appear 12 cycles after its beat went in. Encrypting the
// output again with the same counter must give back the plaintext.
module tb_enc_engine;
  import guardnn_pkg::*;
  import aes_ref_pkg::*;

  localparam int L = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  blk_t key;
  logic in_valid, in_bypass, out_valid;
  vn_t in_vn;
  addr_t in_addr;
  blk_t [L-1:0] in_data, out_data;
  logic [7:0] in_tag, out_tag;

  enc_engine #(.LANES(L), .TAG_W(8)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  blk_t [L-1:0] exp_q [$];
  int t_q [$];
  int n_out = 0;

  always @(posedge clk) begin
    cycle++;
    if (rst_n && in_valid) t_q.push_back(cycle);
    if (rst_n && out_valid) begin
      blk_t [L-1:0] e; int t0;
      e = exp_q.pop_front(); t0 = t_q.pop_front();
      for (int i = 0; i < L; i++) begin
        checks++;
        if (out_data[i] !== e[i]) begin
          failures++; $display("FAIL beat %0d lane %0d got %h exp %h", n_out, i, out_data[i], e[i]);
        end
      end
      checks++;
      if (cycle - t0 != 12) begin failures++; $display("FAIL latency %0d", cycle - t0); end
      checks++;
      if (out_tag != 8'(n_out)) begin failures++; $display("FAIL tag"); end
      n_out++;
    end
  end

  initial begin
    blk_t [L-1:0] d, e;
    in_valid = 0; in_bypass = 0; in_vn = 0; in_addr = 0; in_data = '0; in_tag = 0;
    key = rand128();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 30; b++) begin
      vn_t v; addr_t a; logic byp;
      v = {$urandom, $urandom}; a = {$urandom, $urandom};
      byp = (b % 7 == 3);
      for (int i = 0; i < L; i++) begin
        d[i] = rand128();
        e[i] = byp ? d[i] : d[i] ^ aes128(key, {v, a + 64'(i)});
      end
      in_valid <= 1; in_bypass <= byp; in_vn <= v; in_addr <= a; in_data <= d; in_tag <= 8'(b);
      exp_q.push_back(e);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (16) @(posedge clk);
    // Round trip: decrypting with the same counter restores the plaintext.
    begin
      vn_t v; addr_t a;
      v = 64'h1; a = 64'h200;
      for (int i = 0; i < L; i++) d[i] = rand128();
      in_valid <= 1; in_bypass <= 0; in_vn <= v; in_addr <= a; in_data <= d; in_tag <= 8'd30;
      for (int i = 0; i < L; i++) e[i] = d[i] ^ aes128(key, {v, a + 64'(i)});
      exp_q.push_back(e);
      @(posedge clk);
      in_valid <= 0;
      wait (out_valid); @(negedge clk);
      in_valid <= 1; in_data <= out_data; in_tag <= 8'd31;
      exp_q.push_back(d);
      @(posedge clk);
      in_valid <= 0;
    end
    repeat (16) @(posedge clk);
    checks++;
    if (n_out != 32) begin failures++; $display("FAIL count %0d", n_out); end
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

// tb_iv_engine: feeds 512-byte chunks as 11 beats of 3 lanes (the last beat
// with one lane masked off) and compares each MAC with one computed by the
// behavioural AES reference: the upper 64 bits of the XOR over the chunk's
// 32 blocks of AES(kmac, C_i XOR {VN, addr_i}). Chunks go back to back and
// with gaps; a chunk that differs in a single bit, in its VN or in its
// address must give a different MAC. The MAC must come 13 cycles after the
// chunk's last beat.
module tb_iv_engine;
  import guardnn_pkg::*;
  import aes_ref_pkg::*;

  localparam int L = 3;
  localparam int BEATS = 11;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  blk_t key;
  logic in_valid, in_last, mac_valid;
  logic [L-1:0] in_mask;
  vn_t in_vn;
  addr_t in_addr;
  blk_t [L-1:0] in_ct;
  mac_t mac;

  iv_engine #(.LANES(L)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  mac_t exp_q [$];
  int t_q [$];
  mac_t got [$];

  always @(posedge clk) begin
    cycle++;
    if (rst_n && in_valid && in_last) t_q.push_back(cycle);
    if (rst_n && mac_valid) begin
      mac_t e; int t0;
      e = exp_q.pop_front(); t0 = t_q.pop_front();
      got.push_back(mac);
      checks++;
      if (mac !== e) begin failures++; $display("FAIL mac got %h exp %h", mac, e); end
      checks++;
      if (cycle - t0 != 13) begin failures++; $display("FAIL latency %0d", cycle - t0); end
    end
  end

  blk_t chunk [32];

  function automatic mac_t ref_mac(input vn_t v, input addr_t a);
    blk_t x;
    x = 0;
    for (int i = 0; i < 32; i++) x ^= aes128(key, chunk[i] ^ {v, a + 64'(i)});
    return x[127:64];
  endfunction

  task automatic send(input vn_t v, input addr_t a, input int gap);
    exp_q.push_back(ref_mac(v, a));
    for (int b = 0; b < BEATS; b++) begin
      in_valid <= 1; in_vn <= v; in_addr <= a + 64'(b*L); in_last <= (b == BEATS-1);
      for (int i = 0; i < L; i++) begin
        in_mask[i] <= (b*L + i < 32);
        in_ct[i]   <= (b*L + i < 32) ? chunk[b*L+i] : rand128();
      end
      @(posedge clk);
      if (gap > 0) begin in_valid <= 0; repeat (gap) @(posedge clk); end
    end
    in_valid <= 0;
  endtask

  initial begin
    in_valid = 0; in_last = 0; in_mask = 0; in_vn = 0; in_addr = 0; in_ct = '0;
    key = rand128();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 32; i++) chunk[i] = rand128();
    send(64'h5, 64'h1000, 0);                 // reference chunk
    send(64'h5, 64'h1000, 0);                 // same again, back to back
    chunk[17][3] = ~chunk[17][3];
    send(64'h5, 64'h1000, 1);                 // one bit flipped
    chunk[17][3] = ~chunk[17][3];
    send(64'h6, 64'h1000, 0);                 // other VN (replay)
    send(64'h5, 64'h1020, 2);                 // other address (relocation)
    repeat (30) @(posedge clk);
    checks++;
    if (got.size() != 5) begin failures++; $display("FAIL count %0d", got.size()); end
    else begin
      checks++; if (got[0] != got[1]) begin failures++; $display("FAIL repeat"); end
      for (int k = 2; k < 5; k++) begin
        checks++; if (got[k] == got[0]) begin failures++; $display("FAIL change %0d undetected", k); end
      end
    end
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

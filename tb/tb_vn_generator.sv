// tb_vn_generator: walks the counters through a session (SetInput,
// feature writes, SetWeight, clear) and checks each VN against values kept
// by the testbench; fills the read-counter table and checks lookups inside,
// outside and on the edges of ranges and with overlapping slots; and runs a
// small counter into its limit to see `exhausted` rise and the counter hold.
module tb_vn_generator;
  import guardnn_pkg::*;

  localparam int IN_W = 31, FW_W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, set_input, set_weight, fw_inc, rd_set, exhausted;
  logic [2:0] rd_slot;
  addr_t rd_first, rd_last, lookup_addr;
  logic [FW_W-1:0] rd_ctr;
  vn_t vn_feat_wr, vn_weight, vn_feat_rd;
  logic [IN_W-1:0] ctr_in;
  logic [FW_W-1:0] ctr_fw;
  logic [62:0] ctr_w;

  vn_generator #(.IN_W(IN_W), .NUM_RANGES(8)) dut (.*);

  // A second instance with a 3-bit CTR_IN to reach the wrap.
  logic ex_s; logic [2:0] in_s; vn_t fw_s, w_s, rd_s; logic [59:0] fwc_s; logic [62:0] wc_s;
  logic set_input_s;
  vn_generator #(.IN_W(3), .NUM_RANGES(1)) dut_s (
    .clk, .rst_n, .clear(1'b0), .set_input(set_input_s), .set_weight(1'b0), .fw_inc(1'b0),
    .rd_set(1'b0), .rd_slot(1'b0), .rd_first('0), .rd_last('0), .rd_ctr('0),
    .lookup_addr('0), .vn_feat_wr(fw_s), .vn_weight(w_s), .vn_feat_rd(rd_s),
    .ctr_in(in_s), .ctr_fw(fwc_s), .ctr_w(wc_s), .exhausted(ex_s));

  int checks = 0, failures = 0;
  task automatic chk(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  typedef enum {P_CLEAR, P_INPUT, P_WEIGHT, P_FW, P_RD, P_INPUT_S} pulse_e;
  task automatic pulse(input pulse_e p);
    case (p)
      P_CLEAR:   clear <= 1;
      P_INPUT:   set_input <= 1;
      P_WEIGHT:  set_weight <= 1;
      P_FW:      fw_inc <= 1;
      P_RD:      rd_set <= 1;
      P_INPUT_S: set_input_s <= 1;
    endcase
    @(posedge clk);
    {clear, set_input, set_weight, fw_inc, rd_set, set_input_s} <= '0;
    @(posedge clk);
  endtask

  task automatic set_range(input int slot, input addr_t f, input addr_t l, input int c);
    rd_slot <= 3'(slot); rd_first <= f; rd_last <= l; rd_ctr <= 32'(c);
    pulse(P_RD);
  endtask

  initial begin
    {clear, set_input, set_weight, fw_inc, rd_set, set_input_s} = '0;
    rd_slot = 0; rd_first = 0; rd_last = 0; rd_ctr = 0; lookup_addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    chk(vn_feat_wr, 64'h0, "reset feature VN");
    chk(vn_weight, 64'h8000_0000_0000_0000, "reset weight VN");
    pulse(P_WEIGHT);
    chk(vn_weight, 64'h8000_0000_0000_0001, "weight VN after SetWeight");
    pulse(P_INPUT);                     // CTR_IN=1, CTR_FW=0
    chk(vn_feat_wr, {1'b0, 31'd1, 32'd0}, "input write VN");
    pulse(P_FW); pulse(P_FW); pulse(P_FW);
    chk(vn_feat_wr, {1'b0, 31'd1, 32'd3}, "after three feature writes");
    pulse(P_INPUT);
    chk(vn_feat_wr, {1'b0, 31'd2, 32'd0}, "SetInput resets CTR_FW");
    pulse(P_WEIGHT);
    chk(vn_weight, 64'h8000_0000_0000_0002, "second SetWeight");
    // read-counter table
    set_range(0, 64'h100, 64'h1ff, 7);
    set_range(3, 64'h180, 64'h2ff, 9);   // overlaps slot 0: slot 0 wins
    lookup_addr <= 64'h100; @(posedge clk); #1;
    chk(vn_feat_rd, {1'b0, 31'd2, 32'd7}, "range start");
    lookup_addr <= 64'h1ff; @(posedge clk); #1;
    chk(vn_feat_rd, {1'b0, 31'd2, 32'd7}, "range end / overlap");
    lookup_addr <= 64'h200; @(posedge clk); #1;
    chk(vn_feat_rd, {1'b0, 31'd2, 32'd9}, "second range");
    lookup_addr <= 64'h300; @(posedge clk); #1;
    chk(vn_feat_rd, {1'b0, 31'd2, 32'd0}, "no range");
    lookup_addr <= 64'h0ff; @(posedge clk); #1;
    chk(vn_feat_rd, {1'b0, 31'd2, 32'd0}, "below range");
    set_range(0, 64'h100, 64'h1ff, 11);  // reload a slot
    lookup_addr <= 64'h150; @(posedge clk); #1;
    chk(vn_feat_rd, {1'b0, 31'd2, 32'd11}, "reloaded slot");
    chk(64'(exhausted), 0, "not exhausted");
    // clear (InitSession)
    pulse(P_CLEAR);
    chk(vn_feat_wr, 64'h0, "clear feature VN");
    chk(vn_weight, 64'h8000_0000_0000_0000, "clear weight VN");
    chk(vn_feat_rd, 64'h0, "clear table");
    // exhaustion on the small instance: 7 increments reach the top, the 8th wraps
    for (int i = 0; i < 7; i++) pulse(P_INPUT_S);
    chk(64'(in_s), 7, "small CTR_IN at max");
    chk(64'(ex_s), 0, "not yet exhausted");
    pulse(P_INPUT_S);
    chk(64'(in_s), 7, "CTR_IN holds at max");
    chk(64'(ex_s), 1, "exhausted raised");
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

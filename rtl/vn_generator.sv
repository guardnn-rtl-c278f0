// vn_generator: the on-chip counters that make every AES-CTR counter value
// unique, and the table of host-supplied read counters.
//
// Counters (all cleared by `clear`, which InitSession raises):
//   CTR_IN  counts inputs; +1 on set_input (SetInput).
//   CTR_FW  counts feature writes for the current input; cleared on
//           set_input, +1 on fw_inc (after SetInput has written the input
//           and after every Forward).
//   CTR_W   counts weight imports; +1 on set_weight (SetWeight).
// VNs (64 bits, the top bit separates weights from features):
//   vn_feat_wr = {0, CTR_IN, CTR_FW}   features (and gradients) written now
//   vn_weight  = {1, CTR_W}            weights
//   vn_feat_rd = {0, CTR_IN, CTR_F,R}  features read at lookup_addr
// CTR_F,R comes from a table of NUM_RANGES address ranges that the host
// fills with SetReadCTR (rd_set: slot, first and last block address,
// counter). The lowest-numbered valid slot whose range holds lookup_addr
// gives the counter; an address in no range reads with CTR_F,R = 0. A
// wrong value only garbles the decryption, so the table need not be trusted.
//
// If an increment would wrap a counter, the counter holds its value and
// `exhausted` is raised until the next clear: a wrap would reuse a counter
// value under the same key, so a new session (new key) is required.
//
// lookup is combinational; counter updates take effect on the next edge.
// From the paper: the four counters, what increments and resets them, that
// the write VN holds CTR_IN and CTR_F,W and that the read VN uses the
// host's CTR_F,R per address range. The bit layout, the weight/feature bit,
// the table size, the no-match value and the exhaustion flag are this
// design's.
module vn_generator
  import guardnn_pkg::*;
#(
  parameter int unsigned IN_W       = 31,
  parameter int unsigned NUM_RANGES = 8,
  localparam int unsigned FW_W      = VN_W - 1 - IN_W,
  localparam int unsigned W_W       = VN_W - 1,
  localparam int unsigned SLOT_W    = (NUM_RANGES > 1) ? $clog2(NUM_RANGES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              set_input,
  input  logic              set_weight,
  input  logic              fw_inc,
  input  logic              rd_set,
  input  logic [SLOT_W-1:0] rd_slot,
  input  addr_t             rd_first,
  input  addr_t             rd_last,
  input  logic [FW_W-1:0]   rd_ctr,
  input  addr_t             lookup_addr,
  output vn_t               vn_feat_wr,
  output vn_t               vn_weight,
  output vn_t               vn_feat_rd,
  output logic [IN_W-1:0]   ctr_in,
  output logic [FW_W-1:0]   ctr_fw,
  output logic [W_W-1:0]    ctr_w,
  output logic              exhausted
);

  typedef struct packed {
    logic            valid;
    addr_t           first;
    addr_t           last;
    logic [FW_W-1:0] ctr;
  } range_t;

  range_t tbl [NUM_RANGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctr_in    <= '0;
      ctr_fw    <= '0;
      ctr_w     <= '0;
      exhausted <= 1'b0;
      for (int i = 0; i < NUM_RANGES; i++) tbl[i] <= '0;
    end else if (clear) begin
      ctr_in    <= '0;
      ctr_fw    <= '0;
      ctr_w     <= '0;
      exhausted <= 1'b0;
      for (int i = 0; i < NUM_RANGES; i++) tbl[i] <= '0;
    end else begin
      if (set_input) begin
        if (&ctr_in) exhausted <= 1'b1;
        else begin
          ctr_in <= ctr_in + 1'b1;
          ctr_fw <= '0;
        end
      end else if (fw_inc) begin
        if (&ctr_fw) exhausted <= 1'b1;
        else         ctr_fw <= ctr_fw + 1'b1;
      end
      if (set_weight) begin
        if (&ctr_w) exhausted <= 1'b1;
        else        ctr_w <= ctr_w + 1'b1;
      end
      if (rd_set) tbl[rd_slot] <= '{valid: 1'b1, first: rd_first, last: rd_last, ctr: rd_ctr};
    end
  end

  logic [FW_W-1:0] fr;
  always_comb begin
    fr = '0;
    for (int i = NUM_RANGES - 1; i >= 0; i--)
      if (tbl[i].valid && lookup_addr >= tbl[i].first && lookup_addr <= tbl[i].last)
        fr = tbl[i].ctr;
  end

  assign vn_feat_wr = {1'b0, ctr_in, ctr_fw};
  assign vn_weight  = {1'b1, ctr_w};
  assign vn_feat_rd = {1'b0, ctr_in, fr};

  // SetInput and a feature-write increment never coincide.
  assert property (@(posedge clk) disable iff (!rst_n) !(set_input && fw_inc));

endmodule

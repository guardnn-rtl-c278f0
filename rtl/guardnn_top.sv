// guardnn_top: the trusted part that GuardNN adds to a DNN accelerator.
//
// The secure accelerator takes instructions from an untrusted host and keeps
// every secret (inputs, weights, features, gradients, outputs) encrypted
// whenever it is outside the chip. This module joins:
//   guardnn_ctrl      instruction execution, keys, session state
//   vn_generator      on-chip counters that form the version numbers
//   mem_protect_unit  AES-CTR encryption and per-chunk MACs on the path
//                     between the accelerator's buffer and DRAM
//   attest_hash       running hashes of instructions, inputs, weights and
//                     outputs for the signed report
// Outside it, and reached through ports: the host's instruction path and the
// DRAM (both over the SoC bus), the base accelerator's processing-element
// array and on-chip buffer (acc_* and a_*: Forward hands it the memory port),
// a public-key unit that does the key exchange, certificate and signature
// (pkc_*, which reads the four hashes from `hashes`) and a true random
// number generator (trng_*).
//
// Port ownership: the accelerator's a_* requests reach the memory
// protection only while a Forward runs (acc_owner); at all other times the
// controller uses the port to import and export data. a_done/a_rd_valid are
// only raised towards the current owner. Raw (unprotected) accesses are
// allowed only for the controller.
//
// MAC_BASE is the block address of the MAC area in DRAM (integrity mode);
// it is this design's choice, as is the whole port protocol (see
// mem_protect_unit and guardnn_ctrl). ctr_in, ctr_fw and ctr_w show the
// counters, so the host can check the VN schedule it reconstructs.
module guardnn_top
  import guardnn_pkg::*;
#(
  parameter int unsigned LANES      = N_LANES,
  parameter int unsigned NUM_RANGES = 8,
  parameter addr_t       MAC_BASE   = 64'h0000_0001_0000_0000
) (
  input  logic              clk,
  input  logic              rst_n,
  // host
  input  logic              instr_valid,
  output logic              instr_ready,
  input  instr_t            instr,
  output logic              status_valid,
  output status_e           status,
  output logic [62:0]       exp_ctr,
  output logic              session_on,
  output logic              ci_mode,
  output logic              integrity_fail,
  output logic [30:0]       ctr_in,
  output logic [31:0]       ctr_fw,
  output logic [62:0]       ctr_w,
  // public-key unit
  output logic              pkc_req,
  output pkc_op_e           pkc_op,
  input  logic              pkc_done,
  input  blk_t              pkc_session_key,
  output logic [3:0][255:0] hashes,
  // true random number generator
  output logic              trng_ready,
  input  logic              trng_valid,
  input  blk_t              trng_data,
  // base accelerator control
  output logic              acc_start,
  output logic [63:0]       acc_instr,
  input  logic              acc_done,
  // base accelerator memory port (on-chip buffer side)
  input  logic              a_req_valid,
  output logic              a_req_ready,
  input  logic              a_req_write,
  input  kind_e             a_req_kind,
  input  addr_t             a_req_addr,
  input  logic              a_wr_valid,
  output logic              a_wr_ready,
  input  blk_t [LANES-1:0]  a_wr_data,
  output logic              a_rd_valid,
  output blk_t [LANES-1:0]  a_rd_data,
  output logic [7:0]        a_rd_beat,
  output logic              a_done,
  output logic              a_done_err,
  // DRAM over the SoC bus
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_write,
  output addr_t             mem_req_addr,
  output logic [7:0]        mem_req_beats,
  output logic              mem_wvalid,
  input  logic              mem_wready,
  output blk_t [LANES-1:0]  mem_wdata,
  output logic [LANES-1:0]  mem_wmask,
  input  logic              mem_rvalid,
  input  blk_t [LANES-1:0]  mem_rdata
);

  localparam int unsigned IN_W   = 31;
  localparam int unsigned FR_W   = 32;
  localparam int unsigned SLOT_W = (NUM_RANGES > 1) ? $clog2(NUM_RANGES) : 1;

  // controller <-> VN generator
  logic              vn_clear, vn_set_input, vn_set_weight, vn_fw_inc, vn_rd_set;
  logic [SLOT_W-1:0] vn_rd_slot;
  addr_t             vn_rd_first, vn_rd_last;
  logic [FR_W-1:0]   vn_rd_ctr;
  logic              vn_exhausted;
  vn_t               vn_feat_wr, vn_weight, vn_feat_rd;
  addr_t             lookup_addr;

  // controller -> memory protection
  logic prot_en, iv_en, acc_owner;
  blk_t k_enc, k_mac;

  // controller client port
  logic             c_req_valid, c_req_write, c_wr_valid;
  kind_e            c_req_kind;
  addr_t            c_req_addr;
  blk_t [LANES-1:0] c_wr_data;

  // memory protection client port (after the owner mux)
  logic             m_req_valid, m_req_ready, m_req_write, m_wr_valid, m_wr_ready;
  kind_e            m_req_kind;
  addr_t            m_req_addr;
  blk_t [LANES-1:0] m_wr_data;
  logic             m_rd_valid, m_done, m_done_err;
  blk_t [LANES-1:0] m_rd_data;
  logic [7:0]       m_rd_beat;

  // hash unit
  logic      hash_clear, hash_valid, hash_ready, hash_busy;
  hash_sel_e hash_sel;
  blk_t      hash_block;

  guardnn_ctrl #(.LANES(LANES), .NUM_RANGES(NUM_RANGES), .FR_W(FR_W)) u_ctrl (
    .clk, .rst_n,
    .instr_valid, .instr_ready, .instr, .status_valid, .status, .exp_ctr,
    .session_on, .ci_mode, .integrity_fail,
    .pkc_req, .pkc_op, .pkc_done, .pkc_session_key,
    .trng_ready, .trng_valid, .trng_data,
    .vn_clear, .vn_set_input, .vn_set_weight, .vn_fw_inc, .vn_rd_set,
    .vn_rd_slot, .vn_rd_first, .vn_rd_last, .vn_rd_ctr, .vn_exhausted,
    .prot_en, .iv_en, .k_enc, .k_mac, .acc_owner,
    .c_req_valid, .c_req_ready(m_req_ready && !acc_owner), .c_req_write, .c_req_kind,
    .c_req_addr, .c_wr_valid, .c_wr_ready(m_wr_ready && !acc_owner), .c_wr_data,
    .c_rd_valid(m_rd_valid && !acc_owner), .c_rd_data(m_rd_data), .c_rd_beat(m_rd_beat),
    .mpu_done(m_done), .mpu_done_err(m_done_err),
    .acc_start, .acc_instr, .acc_done,
    .hash_clear, .hash_valid, .hash_ready, .hash_sel, .hash_block, .hash_busy
  );

  vn_generator #(.IN_W(IN_W), .NUM_RANGES(NUM_RANGES)) u_vn (
    .clk, .rst_n,
    .clear(vn_clear), .set_input(vn_set_input), .set_weight(vn_set_weight),
    .fw_inc(vn_fw_inc), .rd_set(vn_rd_set), .rd_slot(vn_rd_slot),
    .rd_first(vn_rd_first), .rd_last(vn_rd_last), .rd_ctr(vn_rd_ctr),
    .lookup_addr, .vn_feat_wr, .vn_weight, .vn_feat_rd,
    .ctr_in, .ctr_fw, .ctr_w, .exhausted(vn_exhausted)
  );

  // Owner mux: the accelerator only during Forward, the controller otherwise.
  always_comb begin
    if (acc_owner) begin
      m_req_valid = a_req_valid;
      m_req_write = a_req_write;
      m_req_kind  = a_req_kind;
      m_req_addr  = a_req_addr;
      m_wr_valid  = a_wr_valid;
      m_wr_data   = a_wr_data;
    end else begin
      m_req_valid = c_req_valid;
      m_req_write = c_req_write;
      m_req_kind  = c_req_kind;
      m_req_addr  = c_req_addr;
      m_wr_valid  = c_wr_valid;
      m_wr_data   = c_wr_data;
    end
  end

  assign a_req_ready = m_req_ready && acc_owner;
  assign a_wr_ready  = m_wr_ready && acc_owner;
  assign a_rd_valid  = m_rd_valid && acc_owner;
  assign a_rd_data   = m_rd_data;
  assign a_rd_beat   = m_rd_beat;
  assign a_done      = m_done && acc_owner;
  assign a_done_err  = m_done_err && acc_owner;

  mem_protect_unit #(.LANES(LANES)) u_mpu (
    .clk, .rst_n,
    .prot_en, .iv_en, .k_enc, .k_mac, .mac_base(MAC_BASE), .trusted(!acc_owner),
    .vn_feat_wr, .vn_weight, .lookup_addr, .lookup_vn(vn_feat_rd),
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req_write(m_req_write),
    .req_kind(m_req_kind), .req_addr(m_req_addr),
    .wr_valid(m_wr_valid), .wr_ready(m_wr_ready), .wr_data(m_wr_data),
    .rd_valid(m_rd_valid), .rd_data(m_rd_data), .rd_beat(m_rd_beat),
    .done(m_done), .done_err(m_done_err),
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_beats,
    .mem_wvalid, .mem_wready, .mem_wdata, .mem_wmask, .mem_rvalid, .mem_rdata
  );

  attest_hash u_hash (
    .clk, .rst_n,
    .clear(hash_clear), .in_valid(hash_valid), .in_ready(hash_ready),
    .sel(hash_sel), .in_word(hash_block), .busy(hash_busy), .digest(hashes)
  );

endmodule

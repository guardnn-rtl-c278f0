// guardnn_ctrl: executes the GuardNN instructions that the untrusted host
// sends, and owns the accelerator's secrets and session state.
//
// The paper runs these instructions as firmware on a small microcontroller;
// here they are a hardwired state machine. It keeps the session key, the
// memory-encryption and MAC keys and the mode, drives the VN generator's
// counters, moves data between user buffers and protected memory, and hands
// the key exchange, certificate and signature to a public-key unit
// (pkc_*) and fresh key material requests to a true random number
// generator (trng_*), neither of which is part of this RTL.
//
// Instructions (instr_t in guardnn_pkg):
//   GET_PK        ask the public-key unit to return PK and certificate.
//   INIT_SESSION  key exchange -> K_Session; two TRNG words -> K_MEnc and
//                 the MAC key; clear counters, read-counter table, hashes
//                 and the integrity flag; enable protection; integrity mode
//                 from the instruction.
//   SET_WEIGHT    CTR_W+1, then for each chunk: read the user's buffer
//                 (raw), decrypt with K_Session in CTR mode with counter
//                 {arg, block index}, hash the plaintext (integrity mode),
//                 write it through the memory protection as weights.
//   SET_INPUT     CTR_IN+1 and CTR_F,W=0, import as above as features,
//                 then CTR_F,W+1.
//   FORWARD       hand `arg` to the base accelerator, give it the memory
//                 protection port until acc_done, then CTR_F,W+1.
//   SET_READ_CTR  load one slot of the CTR_F,R table.
//   EXPORT_OUTPUT for each chunk: read and decrypt it from protected memory,
//                 re-encrypt it with K_Session under counter
//                 {1, export count, block index}, hash it (integrity mode),
//                 write it raw to the user's buffer; then export count+1.
//   SIGN_OUTPUT   integrity mode only, and only with no integrity failure
//                 seen: ask the public-key unit to sign the four hashes.
// Every instruction ends with a status_valid pulse and a status code. No
// instruction writes a secret out unencrypted: the only raw writes are of
// K_Session ciphertext, and only the controller may make raw accesses.
//
// Timing: one instruction at a time (instr_ready only in the idle state).
// Import and export work chunk by chunk: a chunk is read into a 32-block
// buffer, then written out, so a chunk costs about two bus transfers plus
// two AES latencies (and the hashing time in integrity mode).
//
// From the paper: the instruction set and each instruction's effect on
// keys, counters and hashes. The operand layout, the status codes, the
// session-CTR counter layout, the export counter and the hashing of export
// ciphertext (rather than plaintext) are this design's.
module guardnn_ctrl
  import guardnn_pkg::*;
#(
  parameter int unsigned LANES      = N_LANES,
  parameter int unsigned NUM_RANGES = 8,
  parameter int unsigned FR_W       = 32,
  localparam int unsigned BEATS     = beats_per_chunk(LANES),
  localparam int unsigned SLOT_W    = (NUM_RANGES > 1) ? $clog2(NUM_RANGES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // host instruction port
  input  logic              instr_valid,
  output logic              instr_ready,
  input  instr_t            instr,
  output logic              status_valid,
  output status_e           status,
  output logic [62:0]       exp_ctr,
  output logic              session_on,
  output logic              ci_mode,
  output logic              integrity_fail,
  // public-key unit and TRNG
  output logic              pkc_req,
  output pkc_op_e           pkc_op,
  input  logic              pkc_done,
  input  blk_t              pkc_session_key,
  output logic              trng_ready,
  input  logic              trng_valid,
  input  blk_t              trng_data,
  // VN generator
  output logic              vn_clear,
  output logic              vn_set_input,
  output logic              vn_set_weight,
  output logic              vn_fw_inc,
  output logic              vn_rd_set,
  output logic [SLOT_W-1:0] vn_rd_slot,
  output addr_t             vn_rd_first,
  output addr_t             vn_rd_last,
  output logic [FR_W-1:0]   vn_rd_ctr,
  input  logic              vn_exhausted,
  // memory protection configuration
  output logic              prot_en,
  output logic              iv_en,
  output blk_t              k_enc,
  output blk_t              k_mac,
  output logic              acc_owner,
  // memory protection client port (used while acc_owner is low)
  output logic              c_req_valid,
  input  logic              c_req_ready,
  output logic              c_req_write,
  output kind_e             c_req_kind,
  output addr_t             c_req_addr,
  output logic              c_wr_valid,
  input  logic              c_wr_ready,
  output blk_t [LANES-1:0]  c_wr_data,
  input  logic              c_rd_valid,
  input  blk_t [LANES-1:0]  c_rd_data,
  input  logic [7:0]        c_rd_beat,
  input  logic              mpu_done,
  input  logic              mpu_done_err,
  // base accelerator
  output logic              acc_start,
  output logic [63:0]       acc_instr,
  input  logic              acc_done,
  // attestation hash unit
  output logic              hash_clear,
  output logic              hash_valid,
  input  logic              hash_ready,
  output hash_sel_e         hash_sel,
  output blk_t              hash_block,
  input  logic              hash_busy
);

  typedef enum logic [4:0] {
    S_IDLE, S_PKC, S_TRNG0, S_TRNG1, S_HASH_INSTR, S_DISPATCH,
    S_RREQ, S_RDATA, S_HASH_BUF, S_WREQ, S_WDATA,
    S_FWD, S_SIGN_WAIT, S_FINISH
  } state_e;

  state_e      state;
  instr_t      cur;
  status_e     st_q;
  blk_t        k_sess;
  logic [31:0] chunk;
  logic [5:0]  hidx;
  logic [7:0]  wb;
  logic [7:0]  sess_cnt;
  logic        mpu_fin;
  blk_t        buf_q [CHUNK_BLOCKS];

  logic exporting;
  assign exporting = (cur.op == OP_EXPORT_OUTPUT);

  addr_t chunk_off;
  assign chunk_off = addr_t'(chunk) << $clog2(CHUNK_BLOCKS);

  // ------------------------------------------------ session AES-CTR engine ---
  logic             s_out_valid;
  blk_t [LANES-1:0] s_out_data;
  logic [7:0]       s_out_beat;
  vn_t              s_nonce;

  assign s_nonce = exporting ? {1'b1, exp_ctr} : cur.arg;

  enc_engine #(.LANES(LANES), .TAG_W(8)) u_sess (
    .clk      (clk),
    .rst_n    (rst_n),
    .key      (k_sess),
    .in_valid (state == S_RDATA && c_rd_valid),
    .in_bypass(1'b0),
    .in_vn    (s_nonce),
    .in_addr  (chunk_off + ADDR_W'(c_rd_beat) * ADDR_W'(LANES)),
    .in_data  (c_rd_data),
    .in_tag   (c_rd_beat),
    .out_valid(s_out_valid),
    .out_data (s_out_data),
    .out_tag  (s_out_beat)
  );

  always_ff @(posedge clk) begin
    if (s_out_valid)
      for (int i = 0; i < LANES; i++)
        if (int'(s_out_beat) * LANES + i < CHUNK_BLOCKS)
          buf_q[int'(s_out_beat) * LANES + i] <= s_out_data[i];
  end

  // ------------------------------------------------------------ outputs ---
  assign instr_ready = (state == S_IDLE);
  assign acc_owner   = (state == S_FWD);
  assign acc_instr   = cur.arg;

  always_comb begin
    unique case (cur.op)
      OP_INIT_SESSION: pkc_op = PKC_KEX;
      OP_SIGN_OUTPUT:  pkc_op = PKC_SIGN;
      default:         pkc_op = PKC_GET_PK;
    endcase
  end
  assign pkc_req    = (state == S_PKC);
  assign trng_ready = (state == S_TRNG0 || state == S_TRNG1);

  assign vn_rd_slot  = cur.slot[SLOT_W-1:0];
  assign vn_rd_first = cur.src;
  assign vn_rd_last  = cur.dst;
  assign vn_rd_ctr   = cur.arg[FR_W-1:0];

  assign c_req_valid = (state == S_RREQ || state == S_WREQ);
  assign c_req_write = (state == S_WREQ);
  always_comb begin
    if (state == S_RREQ) begin
      c_req_kind = exporting ? KIND_FEATURE : KIND_RAW;
      c_req_addr = cur.src + chunk_off;
    end else begin
      c_req_kind = exporting ? KIND_RAW
                 : (cur.op == OP_SET_WEIGHT ? KIND_WEIGHT : KIND_FEATURE);
      c_req_addr = cur.dst + chunk_off;
    end
  end

  assign c_wr_valid = (state == S_WDATA) && (wb < 8'(BEATS));
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      if (int'(wb) * LANES + i < CHUNK_BLOCKS) c_wr_data[i] = buf_q[int'(wb) * LANES + i];
      else                                     c_wr_data[i] = '0;
    end
  end

  // Each hashed instruction is one 512-bit message block: the packed
  // instruction, zero-extended.
  logic [511:0] instr_msg;
  assign instr_msg = 512'(cur);

  assign hash_valid = (state == S_HASH_INSTR) || (state == S_HASH_BUF);
  always_comb begin
    if (state == S_HASH_INSTR) begin
      hash_sel   = HS_INSTR;
      hash_block = instr_msg[511 - 128*int'(hidx[1:0]) -: 128];
    end else begin
      hash_sel   = exporting ? HS_OUTPUT : (cur.op == OP_SET_WEIGHT ? HS_WEIGHT : HS_INPUT);
      hash_block = buf_q[hidx[4:0]];
    end
  end

  function automatic logic needs_ctr(input opcode_e op);
    return op == OP_SET_WEIGHT || op == OP_SET_INPUT || op == OP_FORWARD
        || op == OP_EXPORT_OUTPUT;
  endfunction

  function automatic logic is_known(input opcode_e op);
    return op inside {OP_GET_PK, OP_INIT_SESSION, OP_SET_WEIGHT, OP_SET_INPUT,
                      OP_FORWARD, OP_SET_READ_CTR, OP_EXPORT_OUTPUT, OP_SIGN_OUTPUT};
  endfunction

  logic rd_fin;
  assign rd_fin = (mpu_fin || mpu_done)
               && (sess_cnt + (s_out_valid ? 8'd1 : 8'd0) == 8'(BEATS));

  // -------------------------------------------------------------- state ---
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      cur            <= '0;
      st_q           <= ST_OK;
      status_valid   <= 1'b0;
      status         <= ST_OK;
      exp_ctr        <= '0;
      session_on     <= 1'b0;
      ci_mode        <= 1'b0;
      integrity_fail <= 1'b0;
      prot_en        <= 1'b0;
      iv_en          <= 1'b0;
      k_enc          <= '0;
      k_mac          <= '0;
      k_sess         <= '0;
      vn_clear       <= 1'b0;
      vn_set_input   <= 1'b0;
      vn_set_weight  <= 1'b0;
      vn_fw_inc      <= 1'b0;
      vn_rd_set      <= 1'b0;
      hash_clear     <= 1'b0;
      acc_start      <= 1'b0;
      chunk          <= '0;
      hidx           <= '0;
      wb             <= '0;
      sess_cnt       <= '0;
      mpu_fin        <= 1'b0;
    end else begin
      status_valid  <= 1'b0;
      vn_clear      <= 1'b0;
      vn_set_input  <= 1'b0;
      vn_set_weight <= 1'b0;
      vn_fw_inc     <= 1'b0;
      vn_rd_set     <= 1'b0;
      hash_clear    <= 1'b0;
      acc_start     <= 1'b0;
      if (mpu_done && mpu_done_err) integrity_fail <= 1'b1;
      if (s_out_valid) sess_cnt <= sess_cnt + 1'b1;
      if (mpu_done) mpu_fin <= 1'b1;

      unique case (state)
        S_IDLE: if (instr_valid) begin
          cur   <= instr;
          st_q  <= ST_OK;
          chunk <= '0;
          hidx  <= '0;
          if (!is_known(instr.op)) begin
            st_q <= ST_BAD_OP; state <= S_FINISH;
          end else if (instr.op == OP_GET_PK || instr.op == OP_INIT_SESSION) begin
            state <= S_PKC;
          end else if (!session_on) begin
            st_q <= ST_NO_SESSION; state <= S_FINISH;
          end else if (instr.op == OP_SIGN_OUTPUT) begin
            if (!ci_mode)           begin st_q <= ST_BAD_OP;    state <= S_FINISH; end
            else if (integrity_fail) begin st_q <= ST_INTEGRITY; state <= S_FINISH; end
            else                     state <= S_SIGN_WAIT;
          end else if (vn_exhausted && needs_ctr(instr.op)) begin
            st_q <= ST_CTR_EXHAUST; state <= S_FINISH;
          end else begin
            state <= ci_mode ? S_HASH_INSTR : S_DISPATCH;
          end
        end

        S_PKC: if (pkc_done) begin
          if (cur.op == OP_INIT_SESSION) begin
            k_sess <= pkc_session_key;
            state  <= S_TRNG0;
          end else begin
            state <= S_FINISH;
          end
        end
        S_TRNG0: if (trng_valid) begin
          k_enc <= trng_data;
          state <= S_TRNG1;
        end
        S_TRNG1: if (trng_valid) begin
          k_mac          <= trng_data;
          vn_clear       <= 1'b1;
          hash_clear     <= 1'b1;
          integrity_fail <= 1'b0;
          exp_ctr        <= '0;
          session_on     <= 1'b1;
          prot_en        <= 1'b1;
          ci_mode        <= cur.integrity;
          iv_en          <= cur.integrity;
          state          <= S_FINISH;
        end

        S_HASH_INSTR: if (hash_ready) begin
          hidx <= hidx + 1'b1;
          if (hidx == 6'd3) begin
            hidx  <= '0;
            state <= S_DISPATCH;
          end
        end

        S_DISPATCH: begin
          unique case (cur.op)
            OP_SET_WEIGHT, OP_SET_INPUT, OP_EXPORT_OUTPUT: begin
              vn_set_weight <= (cur.op == OP_SET_WEIGHT);
              vn_set_input  <= (cur.op == OP_SET_INPUT);
              state         <= (cur.count == 0) ? S_FINISH : S_RREQ;
            end
            OP_FORWARD: begin
              acc_start <= 1'b1;
              state     <= S_FWD;
            end
            OP_SET_READ_CTR: begin
              vn_rd_set <= 1'b1;
              state     <= S_FINISH;
            end
            default: state <= S_FINISH;
          endcase
        end

        S_RREQ: if (c_req_ready) begin
          sess_cnt <= '0;
          mpu_fin  <= 1'b0;
          state    <= S_RDATA;
        end
        S_RDATA: if (rd_fin) begin
          hidx  <= '0;
          state <= ci_mode ? S_HASH_BUF : S_WREQ;
        end
        S_HASH_BUF: if (hash_ready) begin
          hidx <= hidx + 1'b1;
          if (hidx == 6'(CHUNK_BLOCKS - 1)) state <= S_WREQ;
        end
        S_WREQ: if (c_req_ready) begin
          wb    <= '0;
          state <= S_WDATA;
        end
        S_WDATA: begin
          if (c_wr_valid && c_wr_ready) wb <= wb + 1'b1;
          if (mpu_done) begin
            if (chunk + 1 == cur.count) state <= S_FINISH;
            else begin
              chunk <= chunk + 1;
              state <= S_RREQ;
            end
          end
        end

        S_FWD: if (acc_done) state <= S_FINISH;

        S_SIGN_WAIT: if (!hash_busy) state <= S_PKC;

        S_FINISH: begin
          status_valid <= 1'b1;
          status       <= (st_q == ST_OK && exporting && integrity_fail) ? ST_INTEGRITY : st_q;
          if (st_q == ST_OK) begin
            if (cur.op == OP_SET_INPUT || cur.op == OP_FORWARD) vn_fw_inc <= 1'b1;
            if (exporting) exp_ctr <= exp_ctr + 1'b1;
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Plaintext never leaves through the raw path: raw writes happen only
  // while exporting, i.e. with session-encrypted data.
  assert property (@(posedge clk) disable iff (!rst_n)
                   c_req_valid && c_req_write && c_req_kind == KIND_RAW |-> exporting);
  // The accelerator and the controller never share the port.
  assert property (@(posedge clk) disable iff (!rst_n) acc_owner |-> !c_req_valid);

endmodule

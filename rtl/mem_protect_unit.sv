// mem_protect_unit: the memory protection unit between the accelerator's
// on-chip buffer and the SoC bus to DRAM. Every chunk written to DRAM is
// AES-CTR encrypted, every chunk read is decrypted, and in integrity mode
// each chunk gets a MAC that is stored in DRAM on a write and checked on a
// read.
//
// Client side: one request (req_*) moves one 512-byte chunk at block address
// req_addr, which must be chunk aligned. req_kind picks the VN: weights use
// vn_weight, feature writes use vn_feat_wr, and feature reads use
// lookup_vn, which the VN generator returns for lookup_addr (= req_addr).
// KIND_RAW skips the protection; it is honoured only while `trusted` is
// high (the controller moving session-encrypted user buffers), otherwise it
// is treated as KIND_FEATURE, so no client can write plaintext out. Weight
// writes are likewise honoured only for the trusted client (SetWeight, which
// advances CTR_W first); an untrusted weight write is encrypted as a
// feature, since reusing the current weight VN for new data would repeat
// AES-CTR counter values.
// A write then takes BEATS beats on wr_* (valid/ready); a read delivers
// BEATS beats on rd_* (no back-pressure: the client takes one per cycle).
// Lane i of beat k is the block at req_addr + k*LANES + i; lanes past the
// end of the chunk are ignored. `done` pulses when the request is finished;
// `done_err` with it says that the MAC check of a read failed.
//
// DRAM side: a request (mem_req_*) for mem_req_beats beats at block address
// mem_req_addr, then the write beats (mem_w*, with a lane mask) or the read
// beats (mem_r*, in order, no back-pressure). One request is outstanding
// at a time.
//
// Integrity mode (iv_en): after a chunk's data, one more one-beat access
// moves its MAC, kept in lane 0 of block mac_base + req_addr/CHUNK_BLOCKS.
// Reads hand out the data as it is decrypted and report the check at
// `done`; the data only ever reaches the trusted on-chip buffer before then.
//
// Timing: 12 cycles of AES latency on each path; a write streams through a
// FIFO_DEPTH-beat FIFO with credit-based input flow control so the AES
// pipeline never has to stall.
//
// From the paper: encryption of all off-chip data with AES-CTR using the
// block address and VN, VN chosen by data kind and counters, one MAC per
// 512-byte chunk checked on each read, integrity optional per session. The
// bus protocol, the MAC placement, the raw path and the late check report
// are this design's.
module mem_protect_unit
  import guardnn_pkg::*;
#(
  parameter int unsigned LANES      = N_LANES,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned BEATS     = beats_per_chunk(LANES)
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration from the controller
  input  logic             prot_en,
  input  logic             iv_en,
  input  blk_t             k_enc,
  input  blk_t             k_mac,
  input  addr_t            mac_base,
  input  logic             trusted,
  // VN generator
  input  vn_t              vn_feat_wr,
  input  vn_t              vn_weight,
  output addr_t            lookup_addr,
  input  vn_t              lookup_vn,
  // client requests
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_write,
  input  kind_e            req_kind,
  input  addr_t            req_addr,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  blk_t [LANES-1:0] wr_data,
  output logic             rd_valid,
  output blk_t [LANES-1:0] rd_data,
  output logic [7:0]       rd_beat,
  output logic             done,
  output logic             done_err,
  // DRAM side
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output logic             mem_req_write,
  output addr_t            mem_req_addr,
  output logic [7:0]       mem_req_beats,
  output logic             mem_wvalid,
  input  logic             mem_wready,
  output blk_t [LANES-1:0] mem_wdata,
  output logic [LANES-1:0] mem_wmask,
  input  logic             mem_rvalid,
  input  blk_t [LANES-1:0] mem_rdata
);

  typedef enum logic [3:0] {
    S_IDLE, S_MREQ, S_WDATA, S_WMAC_WAIT, S_WMAC_REQ, S_WMAC_DATA,
    S_RDATA, S_RMAC_REQ, S_RMAC_DATA, S_RCMP, S_DONE
  } state_e;

  state_e state;
  logic   is_write, bypass, do_mac, err_q;
  addr_t  base;
  vn_t    vn;

  function automatic logic [LANES-1:0] lane_mask(input logic [7:0] beat);
    logic [LANES-1:0] m;
    for (int i = 0; i < LANES; i++)
      m[i] = (int'(beat) * LANES + i) < CHUNK_BLOCKS;
    return m;
  endfunction

  function automatic addr_t beat_addr(input addr_t a, input logic [7:0] beat);
    return a + ADDR_W'(beat) * ADDR_W'(LANES);
  endfunction

  // ------------------------------------------------------------ request ---
  kind_e kind_eff;
  always_comb begin
    kind_eff = req_kind;
    if (req_kind == KIND_RAW && !trusted) kind_eff = KIND_FEATURE;
    if (req_kind == KIND_WEIGHT && req_write && !trusted) kind_eff = KIND_FEATURE;
  end

  assign lookup_addr = req_addr;
  assign req_ready   = (state == S_IDLE);

  // --------------------------------------------------------- AES-CTR path ---
  logic             enc_in_valid;
  blk_t [LANES-1:0] enc_in_data;
  logic [7:0]       in_beat;       // beats fed to the engine
  logic             enc_out_valid;
  blk_t [LANES-1:0] enc_out_data;
  logic [7:0]       enc_out_beat;

  // write FIFO and credits
  localparam int unsigned PW = $clog2(FIFO_DEPTH);
  blk_t [LANES-1:0] fifo_d [FIFO_DEPTH];
  logic [7:0]       fifo_b [FIFO_DEPTH];
  logic [PW-1:0]    wp, rp;
  logic [PW:0]      fcount, inflight;
  logic             wr_fire, mw_fire;

  assign wr_ready = (state == S_WDATA) && (in_beat < 8'(BEATS))
                    && (32'(fcount) + 32'(inflight) < FIFO_DEPTH);
  assign wr_fire  = wr_valid && wr_ready;

  always_comb begin
    enc_in_valid = 1'b0;
    enc_in_data  = wr_data;
    if (state == S_WDATA) enc_in_valid = wr_fire;
    else if (state == S_RDATA && mem_rvalid && in_beat < 8'(BEATS)) begin
      enc_in_valid = 1'b1;
      enc_in_data  = mem_rdata;
    end
  end

  enc_engine #(.LANES(LANES), .TAG_W(8)) u_enc (
    .clk      (clk),
    .rst_n    (rst_n),
    .key      (k_enc),
    .in_valid (enc_in_valid),
    .in_bypass(bypass),
    .in_vn    (vn),
    .in_addr  (beat_addr(base, in_beat)),
    .in_data  (enc_in_data),
    .in_tag   (in_beat),
    .out_valid(enc_out_valid),
    .out_data (enc_out_data),
    .out_tag  (enc_out_beat)
  );

  // ----------------------------------------------------------- MAC path ---
  // Writes MAC the ciphertext leaving the engine; reads MAC the ciphertext
  // arriving from DRAM.
  logic             iv_in_valid;
  blk_t [LANES-1:0] iv_in_ct;
  logic [7:0]       iv_beat;
  logic             mac_valid, mac_have;
  mac_t             mac, mac_q, mac_mem;

  always_comb begin
    if (is_write) begin
      iv_in_valid = do_mac && enc_out_valid && state == S_WDATA;
      iv_in_ct    = enc_out_data;
      iv_beat     = enc_out_beat;
    end else begin
      iv_in_valid = do_mac && enc_in_valid && state == S_RDATA;
      iv_in_ct    = mem_rdata;
      iv_beat     = in_beat;
    end
  end

  iv_engine #(.LANES(LANES)) u_iv (
    .clk      (clk),
    .rst_n    (rst_n),
    .key      (k_mac),
    .in_valid (iv_in_valid),
    .in_mask  (lane_mask(iv_beat)),
    .in_last  (iv_beat == 8'(BEATS - 1)),
    .in_vn    (vn),
    .in_addr  (beat_addr(base, iv_beat)),
    .in_ct    (iv_in_ct),
    .mac_valid(mac_valid),
    .mac      (mac)
  );

  // ------------------------------------------------------------- outputs ---
  assign rd_valid = !is_write && enc_out_valid && (state == S_RDATA);
  assign rd_data  = enc_out_data;
  assign rd_beat  = enc_out_beat;

  addr_t mac_addr;
  assign mac_addr = mac_base + (base >> $clog2(CHUNK_BLOCKS));

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_write = is_write;
    mem_req_addr  = base;
    mem_req_beats = 8'(BEATS);
    unique case (state)
      S_MREQ: mem_req_valid = 1'b1;
      S_WMAC_REQ, S_RMAC_REQ: begin
        mem_req_valid = 1'b1;
        mem_req_addr  = mac_addr;
        mem_req_beats = 8'd1;
      end
      default: ;
    endcase
  end

  always_comb begin
    mem_wvalid = 1'b0;
    mem_wdata  = fifo_d[rp];
    mem_wmask  = lane_mask(fifo_b[rp]);
    if (state == S_WDATA || state == S_WMAC_WAIT) begin
      mem_wvalid = (fcount != 0);
    end else if (state == S_WMAC_DATA) begin
      mem_wvalid   = 1'b1;
      mem_wdata    = '0;
      mem_wdata[0] = {{(BLK_W-MAC_W){1'b0}}, mac_q};
      mem_wmask    = LANES'(1);
    end
  end
  assign mw_fire = mem_wvalid && mem_wready;

  // --------------------------------------------------------------- state ---
  logic [7:0] out_beats;   // beats that left the engine (read) / DRAM (write)

  always_ff @(posedge clk) begin
    if (enc_out_valid && is_write && state == S_WDATA) begin
      fifo_d[wp] <= enc_out_data;
      fifo_b[wp] <= enc_out_beat;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      is_write  <= 1'b0;
      bypass    <= 1'b1;
      do_mac    <= 1'b0;
      base      <= '0;
      vn        <= '0;
      in_beat   <= '0;
      out_beats <= '0;
      wp        <= '0;
      rp        <= '0;
      fcount    <= '0;
      inflight  <= '0;
      mac_have  <= 1'b0;
      mac_q     <= '0;
      mac_mem   <= '0;
      err_q     <= 1'b0;
      done      <= 1'b0;
      done_err  <= 1'b0;
    end else begin
      done     <= 1'b0;
      done_err <= 1'b0;
      if (mac_valid) begin
        mac_have <= 1'b1;
        mac_q    <= mac;
      end
      // FIFO bookkeeping (write path)
      if (enc_out_valid && is_write && state == S_WDATA) wp <= wp + 1'b1;
      if (mw_fire && state != S_WMAC_DATA) rp <= rp + 1'b1;
      fcount   <= fcount + ((enc_out_valid && is_write && state == S_WDATA) ? 1 : 0)
                         - ((mw_fire && state != S_WMAC_DATA) ? 1 : 0);
      inflight <= inflight + (wr_fire ? 1 : 0)
                           - ((enc_out_valid && is_write && state == S_WDATA) ? 1 : 0);
      if (enc_in_valid) in_beat <= in_beat + 1'b1;

      unique case (state)
        S_IDLE: if (req_valid) begin
          is_write  <= req_write;
          base      <= req_addr;
          in_beat   <= '0;
          out_beats <= '0;
          mac_have  <= 1'b0;
          err_q     <= 1'b0;
          bypass    <= !prot_en || kind_eff == KIND_RAW;
          do_mac    <= prot_en && iv_en && kind_eff != KIND_RAW;
          unique case (kind_eff)
            KIND_WEIGHT: vn <= vn_weight;
            default:     vn <= req_write ? vn_feat_wr : lookup_vn;
          endcase
          state <= S_MREQ;
        end
        S_MREQ: if (mem_req_ready) state <= is_write ? S_WDATA : S_RDATA;
        S_WDATA: begin
          if (mw_fire) out_beats <= out_beats + 1'b1;
          if (mw_fire && out_beats == 8'(BEATS - 1))
            state <= do_mac ? S_WMAC_WAIT : S_DONE;
        end
        S_WMAC_WAIT: if (mac_have) state <= S_WMAC_REQ;
        S_WMAC_REQ:  if (mem_req_ready) state <= S_WMAC_DATA;
        S_WMAC_DATA: if (mem_wready) state <= S_DONE;
        S_RDATA: begin
          if (enc_out_valid) out_beats <= out_beats + 1'b1;
          if (enc_out_valid && out_beats == 8'(BEATS - 1))
            state <= do_mac ? S_RMAC_REQ : S_DONE;
        end
        S_RMAC_REQ:  if (mem_req_ready) state <= S_RMAC_DATA;
        S_RMAC_DATA: if (mem_rvalid) begin
          mac_mem <= mem_rdata[0][MAC_W-1:0];
          state   <= S_RCMP;
        end
        S_RCMP: if (mac_have) begin
          err_q <= (mac_q != mac_mem);
          state <= S_DONE;
        end
        S_DONE: begin
          done     <= 1'b1;
          done_err <= err_q;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A client keeps its request up until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   req_valid && !req_ready |=> req_valid);
  // The FIFO never overflows.
  assert property (@(posedge clk) disable iff (!rst_n) 32'(fcount) <= FIFO_DEPTH);

endmodule

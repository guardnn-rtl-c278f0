// acc_model: behavioural stand-in for the base DNN accelerator (its
// processing-element array and on-chip buffer), for simulation only.
// On acc_start it decodes acc_instr as
//   [63]     write its result as KIND_RAW (an attempt to leak plaintext)
//   [62]     write its result as KIND_WEIGHT (an attempt to reuse the
//            weight VN)
//   [47:32]  chunk number of the input feature chunk
//   [31:16]  chunk number of the weight chunk
//   [15:0]   chunk number of the output feature chunk
// (a chunk number n is block address n*32), reads the feature chunk and the
// weight chunk through the memory protection port, computes one "layer" as
// the 32-bit lane-wise sum of features and weights, writes the result chunk
// and raises acc_done. It counts the chunks it moved. acc_start is ignored
// while rst_n is low, since the controller's flops hold no value before the
// first reset edge.
module acc_model
  import guardnn_pkg::*;
#(
  parameter int unsigned LANES = N_LANES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             acc_start,
  input  logic [63:0]      acc_instr,
  output logic             acc_done,
  output logic             a_req_valid,
  input  logic             a_req_ready,
  output logic             a_req_write,
  output kind_e            a_req_kind,
  output addr_t            a_req_addr,
  output logic             a_wr_valid,
  input  logic             a_wr_ready,
  output blk_t [LANES-1:0] a_wr_data,
  input  logic             a_rd_valid,
  input  blk_t [LANES-1:0] a_rd_data,
  input  logic [7:0]       a_rd_beat,
  input  logic             a_done
);

  localparam int BEATS = beats_per_chunk(LANES);
  blk_t f [32], w [32], o [32];
  int chunks_moved = 0;

  initial begin
    acc_done = 0; a_req_valid = 0; a_req_write = 0; a_req_kind = KIND_FEATURE;
    a_req_addr = 0; a_wr_valid = 0; a_wr_data = '0;
  end

  task automatic rd_chunk(input kind_e k, input addr_t a, output blk_t d [32]);
    a_req_valid <= 1; a_req_write <= 0; a_req_kind <= k; a_req_addr <= a;
    @(posedge clk); while (!a_req_ready) @(posedge clk);
    a_req_valid <= 0;
    forever begin
      @(posedge clk);
      if (a_rd_valid)
        for (int i = 0; i < LANES; i++)
          if (int'(a_rd_beat) * LANES + i < 32) d[int'(a_rd_beat) * LANES + i] = a_rd_data[i];
      if (a_done) break;
    end
    chunks_moved++;
  endtask

  task automatic wr_chunk(input kind_e k, input addr_t a, input blk_t d [32]);
    a_req_valid <= 1; a_req_write <= 1; a_req_kind <= k; a_req_addr <= a;
    @(posedge clk); while (!a_req_ready) @(posedge clk);
    a_req_valid <= 0;
    for (int b = 0; b < BEATS; b++) begin
      a_wr_valid <= 1;
      for (int i = 0; i < LANES; i++) a_wr_data[i] <= (b*LANES+i < 32) ? d[b*LANES+i] : '0;
      @(posedge clk); while (!a_wr_ready) @(posedge clk);
    end
    a_wr_valid <= 0;
    while (!a_done) @(posedge clk);
    chunks_moved++;
  endtask

  always @(posedge clk) if (rst_n && acc_start) begin
    logic [63:0] ins;
    ins = acc_instr;
    rd_chunk(KIND_FEATURE, addr_t'(ins[47:32]) << 5, f);
    rd_chunk(KIND_WEIGHT,  addr_t'(ins[31:16]) << 5, w);
    for (int i = 0; i < 32; i++)
      for (int j = 0; j < 4; j++) o[i][32*j +: 32] = f[i][32*j +: 32] + w[i][32*j +: 32];
    wr_chunk(ins[63] ? KIND_RAW : (ins[62] ? KIND_WEIGHT : KIND_FEATURE), addr_t'(ins[15:0]) << 5, o);
    acc_done <= 1;
    @(posedge clk);
    acc_done <= 0;
  end

endmodule

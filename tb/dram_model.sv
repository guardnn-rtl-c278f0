// dram_model: behavioural DRAM behind the SoC bus, for simulation only.
// It speaks the memory side of mem_protect_unit: it takes one request at a
// time, then the write beats (each lane i of beat k, if its mask bit is set,
// goes to block addr + k*LANES + i) or returns the read beats, in order,
// RD_LAT cycles after the request. With STALL set it refuses requests and
// write beats on random cycles, to exercise back-pressure. Storage is
// sparse; unwritten blocks read as zero. `mem` is visible to testbenches,
// which inspect and tamper with it.
module dram_model
  import guardnn_pkg::*;
#(
  parameter int unsigned LANES  = N_LANES,
  parameter int unsigned RD_LAT = 8,
  parameter bit          STALL  = 1'b1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mem_req_valid,
  output logic             mem_req_ready,
  input  logic             mem_req_write,
  input  addr_t            mem_req_addr,
  input  logic [7:0]       mem_req_beats,
  input  logic             mem_wvalid,
  output logic             mem_wready,
  input  blk_t [LANES-1:0] mem_wdata,
  input  logic [LANES-1:0] mem_wmask,
  output logic             mem_rvalid,
  output blk_t [LANES-1:0] mem_rdata
);

  blk_t mem [addr_t];
  int   stalls = 0;
  int   reads = 0, writes = 0;

  function automatic blk_t rd(input addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  typedef enum {IDLE, WR, RDW, RD} st_e;
  st_e   st = IDLE;
  addr_t a;
  int    n, k, wait_c;
  logic  stall_now;

  always_ff @(posedge clk) stall_now <= STALL && ($urandom % 4 == 0);

  assign mem_req_ready = rst_n && (st == IDLE) && !stall_now;
  assign mem_wready    = (st == WR) && !stall_now;
  assign mem_rvalid    = (st == RD);
  always_comb
    for (int i = 0; i < LANES; i++) mem_rdata[i] = rd(a + addr_t'(k * LANES + i));

  always @(posedge clk) begin
    if (stall_now && (mem_req_valid && st == IDLE || mem_wvalid && st == WR)) stalls++;
    case (st)
      IDLE: if (mem_req_valid && mem_req_ready) begin
        a = mem_req_addr; n = mem_req_beats; k = 0;
        if (mem_req_write) begin st <= WR; writes++; end
        else begin st <= RDW; wait_c = RD_LAT; reads++; end
      end
      WR: if (mem_wvalid && mem_wready) begin
        for (int i = 0; i < LANES; i++)
          if (mem_wmask[i]) mem[a + addr_t'(k * LANES + i)] = mem_wdata[i];
        k++;
        if (k == n) st <= IDLE;
      end
      RDW: begin
        wait_c--;
        if (wait_c == 0) st <= RD;
      end
      RD: begin
        k++;
        if (k == n) st <= IDLE;
      end
    endcase
  end

endmodule

// manticore: the complete accelerator, a grid of statically scheduled cores
// plus the control logic that connects it to a host and to DRAM.
//
// Two clock domains with the same frequency and phase (the paper's split):
//   compute  processor_grid (cores and NoC); its clock is `clk` passed
//            through clock_gate, so the grid can be frozen as a whole.
//   control  host_controller, bootloader and cache, on `clk` itself. This
//            is where everything non-deterministic happens: DRAM, host.
// Global memory accesses and exceptions of the privileged core stop the
// compute clock until the control domain has served them; the bootloader
// streams programs into the cores through the privileged core's switch and
// reads them through the cache, which it shares with the privileged core
// (the bootloader has the cache while it is busy, the core otherwise).
//
// External interfaces: a 64-bit host register port (see host_controller)
// and a line-wide DRAM port (see cache). The DRAM, the PCIe shell and the
// host are outside this design. booted, vcycle_start and noc_drop expose
// per-core state for observation.
module manticore
  import manticore_pkg::*;
#(
  parameter int unsigned DIM_X       = 15,
  parameter int unsigned DIM_Y       = 15,
  parameter int unsigned CACHE_LINES = 4096,
  localparam int unsigned NCORES     = DIM_X * DIM_Y,
  localparam int unsigned LINE_BITS  = 256,
  localparam int unsigned LADDR_W    = GADDR_W - 4
) (
  input  logic                 clk,
  input  logic                 rst,
  // host
  input  logic                 host_we,
  input  logic [3:0]           host_addr,
  input  logic [63:0]          host_wdata,
  output logic [63:0]          host_rdata,
  // DRAM
  output logic                 dram_req_valid,
  input  logic                 dram_req_ready,
  output logic                 dram_req_write,
  output logic [LADDR_W-1:0]   dram_req_addr,
  output logic [LINE_BITS-1:0] dram_req_wdata,
  input  logic                 dram_resp_valid,
  input  logic [LINE_BITS-1:0] dram_resp_rdata,
  // observation
  output logic [NCORES-1:0]    booted,
  output logic [NCORES-1:0]    vcycle_start,
  output logic                 noc_drop,
  output logic                 compute_en
);

  logic gclk, soft_reset;

  gmem_req_t  gmem_req;
  exception_t exc;
  word_t      cache_rdata;

  logic               hc_start, hc_write, bl_start, bl_busy, boot_start;
  logic [GADDR_W-1:0] hc_addr, bl_addr, boot_base;
  word_t              hc_wdata;
  logic               c_done, c_hit, c_miss, flush_start, flush_busy;
  noc_msg_t           boot_inj;

  clock_gate u_cg (.clk, .en(compute_en), .gclk);

  processor_grid #(.DIM_X(DIM_X), .DIM_Y(DIM_Y)) u_grid (
    .clk(gclk), .soft_reset, .boot_inj,
    .gmem_req, .gmem_rdata(cache_rdata), .exc,
    .booted, .vcycle_start, .noc_drop
  );

  host_controller u_host (
    .clk, .rst,
    .host_we, .host_addr, .host_wdata, .host_rdata,
    .compute_en, .soft_reset, .gmem_req, .exc,
    .cache_start(hc_start), .cache_write(hc_write), .cache_addr(hc_addr),
    .cache_wdata(hc_wdata), .cache_done(c_done), .cache_hit(c_hit), .cache_miss(c_miss),
    .flush_start, .flush_busy,
    .boot_start, .boot_base, .boot_busy(bl_busy)
  );

  bootloader #(.DIM_X(DIM_X), .DIM_Y(DIM_Y)) u_boot (
    .clk, .rst, .start(boot_start), .base(boot_base), .busy(bl_busy),
    .mem_start(bl_start), .mem_addr(bl_addr), .mem_done(c_done), .mem_rdata(cache_rdata),
    .inj(boot_inj)
  );

  cache #(.LINES(CACHE_LINES), .LINE_BITS(LINE_BITS)) u_cache (
    .clk, .rst,
    .start(bl_busy ? bl_start : hc_start),
    .write(bl_busy ? 1'b0 : hc_write),
    .addr(bl_busy ? bl_addr : hc_addr),
    .wdata(hc_wdata),
    .done(c_done), .rdata(cache_rdata), .hit(c_hit), .miss(c_miss),
    .flush_start, .flush_busy,
    .dram_req_valid, .dram_req_ready, .dram_req_write, .dram_req_addr, .dram_req_wdata,
    .dram_resp_valid, .dram_resp_rdata
  );

endmodule

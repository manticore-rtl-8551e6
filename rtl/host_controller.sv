// host_controller: the control-domain logic that the host talks to, and the
// owner of the global stall.
//
// Host registers (64-bit; written with host_we, read combinationally):
//   0 CMD      write: bit 0 boot (soft reset, then run the bootloader),
//                     bit 1 resume after an exception, bit 2 flush cache
//   1 BASE     word address of the program binary in DRAM
//   2 STATUS   bit 0 booting, bit 1 flushing, bit 2 exception pending,
//              bit 3 stalled on a global memory access, [31:16] exception id
//   3 CYCLES   control-clock cycles since the last boot command
//   4 STALLS   of these, cycles in which the compute clock was stopped
//   5 HITS     cache hits      6 MISSES  cache misses
// The counters are the hardware performance counters the paper uses to
// measure global stalls; the register map is this design's own.
//
// Global stall: a global load/store or a failed EXPECT of the privileged
// core appears as a request registered in the compute domain. This block
// drops the compute clock enable in the same cycle (combinationally, so the
// next compute edge is already suppressed), hands a memory request to the
// cache, and waits for the cache (or, for an exception, for the host's
// resume). It then raises the enable for exactly one edge while ignoring
// the still-held request, which lets the compute domain move on. From the
// cores' point of view the access took no time at all.
//
// Boot: a boot command holds soft_reset for SOFT_RESET_CYCLES cycles with
// the compute clock running, then starts the bootloader.
module host_controller
  import manticore_pkg::*;
#(
  parameter int unsigned SOFT_RESET_CYCLES = 4
) (
  input  logic               clk,
  input  logic               rst,
  // host register port
  input  logic               host_we,
  input  logic [3:0]         host_addr,
  input  logic [63:0]        host_wdata,
  output logic [63:0]        host_rdata,
  // compute domain
  output logic               compute_en,
  output logic               soft_reset,
  input  gmem_req_t          gmem_req,
  input  exception_t         exc,
  // cache
  output logic               cache_start,
  output logic               cache_write,
  output logic [GADDR_W-1:0] cache_addr,
  output word_t              cache_wdata,
  input  logic               cache_done,
  input  logic               cache_hit,
  input  logic               cache_miss,
  output logic               flush_start,
  input  logic               flush_busy,
  // bootloader
  output logic               boot_start,
  output logic [GADDR_W-1:0] boot_base,
  input  logic               boot_busy
);

  typedef enum logic [1:0] {G_RUN, G_MEM, G_EXC, G_RELEASE} gstate_e;

  gstate_e     gstate;
  logic [2:0]  rst_cnt;
  logic        boot_pending;
  word_t       eid_q;
  logic [63:0] cycles, stalls, hits, misses;

  logic cmd_boot, cmd_resume, cmd_flush;
  assign cmd_boot   = host_we && host_addr == 4'd0 && host_wdata[0];
  assign cmd_resume = host_we && host_addr == 4'd0 && host_wdata[1];
  assign cmd_flush  = host_we && host_addr == 4'd0 && host_wdata[2];

  assign soft_reset = rst_cnt != '0;

  // Stall as soon as a request shows up; run one edge on release.
  always_comb begin
    unique case (gstate)
      G_RUN:     compute_en = soft_reset || !(gmem_req.valid || exc.valid);
      G_RELEASE: compute_en = 1'b1;
      default:   compute_en = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      gstate       <= G_RUN;
      rst_cnt      <= 3'(SOFT_RESET_CYCLES);
      boot_pending <= 1'b0;
      boot_start   <= 1'b0;
      boot_base    <= '0;
      cache_start  <= 1'b0;
      flush_start  <= 1'b0;
      eid_q        <= '0;
      cycles       <= '0;
      stalls       <= '0;
      hits         <= '0;
      misses       <= '0;
    end else begin
      boot_start  <= 1'b0;
      cache_start <= 1'b0;
      flush_start <= cmd_flush;
      if (host_we && host_addr == 4'd1) boot_base <= host_wdata[GADDR_W-1:0];

      // boot sequencing
      if (cmd_boot) begin
        rst_cnt      <= 3'(SOFT_RESET_CYCLES);
        boot_pending <= 1'b1;
        gstate       <= G_RUN;
        cycles       <= '0;
        stalls       <= '0;
      end else if (rst_cnt != '0) begin
        rst_cnt <= rst_cnt - 1'b1;
      end else if (boot_pending) begin
        boot_pending <= 1'b0;
        boot_start   <= 1'b1;
      end

      // global stall
      if (!cmd_boot) begin
        unique case (gstate)
          G_RUN: if (!soft_reset) begin
            if (gmem_req.valid) begin
              cache_start <= 1'b1;
              cache_write <= gmem_req.write;
              cache_addr  <= gmem_req.addr;
              cache_wdata <= gmem_req.wdata;
              gstate      <= G_MEM;
            end else if (exc.valid) begin
              eid_q  <= exc.eid;
              gstate <= G_EXC;
            end
          end
          G_MEM:     if (cache_done) gstate <= G_RELEASE;
          G_EXC:     if (cmd_resume) gstate <= G_RELEASE;
          G_RELEASE: gstate <= G_RUN;
        endcase
      end

      cycles <= cycles + 1'b1;
      if (!compute_en) stalls <= stalls + 1'b1;
      if (cache_hit)   hits   <= hits + 1'b1;
      if (cache_miss)  misses <= misses + 1'b1;
    end
  end

  always_comb begin
    unique case (host_addr)
      4'd1:    host_rdata = 64'(boot_base);
      4'd2:    host_rdata = {32'd0, eid_q, 12'd0, gstate == G_MEM, gstate == G_EXC,
                             flush_busy, boot_busy || boot_pending || boot_start || soft_reset};
      4'd3:    host_rdata = cycles;
      4'd4:    host_rdata = stalls;
      4'd5:    host_rdata = hits;
      4'd6:    host_rdata = misses;
      default: host_rdata = '0;
    endcase
  end

endmodule

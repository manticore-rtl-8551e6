// tb_host_controller: checks the boot command (soft reset for 4 cycles with
// the compute clock enabled, then, one cycle later, one bootloader start with the programmed
// base), the global stall for a memory request (enable drops in the cycle
// the request appears, the cache gets one start with the request's fields,
// the enable comes back for exactly one cycle after `done` while the held
// request is ignored), the exception stall (held until the host resumes,
// exception id readable in STATUS), and the cycle / stall / hit / miss
// counters.
module tb_host_controller;
  import manticore_pkg::*;
  logic clk = 0, rst, host_we, compute_en, soft_reset;
  logic [3:0] host_addr;
  logic [63:0] host_wdata, host_rdata;
  gmem_req_t gmem_req;
  exception_t exc;
  logic cache_start, cache_write, cache_done, cache_hit, cache_miss, flush_start, flush_busy;
  logic [47:0] cache_addr, boot_base;
  word_t cache_wdata;
  logic boot_start, boot_busy;
  int checks = 0, failures = 0, starts = 0, en_low = 0;

  host_controller dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic host_write(int a, logic [63:0] d);
    host_we = 1; host_addr = 4'(a); host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  always @(posedge clk) if (!rst) begin   // outputs are reset by the first edge
    if (cache_start) starts++;
    if (!compute_en) en_low++;
  end

  initial begin
    rst = 1; host_we = 0; host_addr = 0; host_wdata = 0; gmem_req = '0; exc = '0;
    cache_done = 0; cache_hit = 0; cache_miss = 0; flush_busy = 0; boot_busy = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    repeat (6) @(negedge clk);
    host_write(1, 64'h0000_1234_5678);
    host_write(0, 64'h1);
    for (int i = 0; i < 4; i++) begin
      check(soft_reset && compute_en && !boot_start, $sformatf("soft reset cycle %0d", i));
      @(negedge clk);
    end
    check(!soft_reset && !boot_start, "soft reset over");
    @(negedge clk);
    check(!soft_reset && boot_start && boot_base == 48'h0000_1234_5678, "bootloader started");
    @(negedge clk);
    check(!boot_start, "single boot start");
    host_addr = 4'd2; #1 check(host_rdata[0] == 0, "STATUS not booting");
    // ---- global memory stall ----
    repeat (3) @(negedge clk);
    gmem_req = '{valid: 1'b1, write: 1'b1, addr: 48'hab_cdef_0123, wdata: 16'h7777};
    #1 check(!compute_en, "enable drops with the request");
    @(negedge clk);
    check(cache_start && cache_write && cache_addr == 48'hab_cdef_0123 && cache_wdata == 16'h7777,
          "cache request");
    repeat (5) begin @(negedge clk); check(!compute_en && !cache_start, "stalled while cache busy"); end
    cache_done = 1; cache_hit = 1;
    @(negedge clk);
    cache_done = 0; cache_hit = 0;
    check(compute_en, "enable for one release cycle");
    @(negedge clk);
    // the compute domain has now moved on: the request is gone
    gmem_req = '0;
    #1 check(compute_en, "running again");
    check(starts == 1, "exactly one cache access");
    // ---- exception ----
    @(negedge clk);
    exc = '{valid: 1'b1, eid: 16'd42};
    #1 check(!compute_en, "exception stalls");
    repeat (10) @(negedge clk);
    host_addr = 4'd2; #1 check(host_rdata[2] && host_rdata[31:16] == 16'd42, "STATUS exception 42");
    check(!compute_en, "still stalled");
    host_write(0, 64'h2);
    check(compute_en, "resumed for one edge");
    exc = '0;
    @(negedge clk);
    check(compute_en, "running after resume");
    // ---- flush command and counters ----
    host_write(0, 64'h4);
    check(flush_start, "flush request to the cache");
    cache_miss = 1; @(negedge clk); cache_miss = 0;
    host_addr = 4'd4; #1 check(host_rdata == 64'(en_low), $sformatf("stall counter %0d vs %0d", host_rdata, en_low));
    host_addr = 4'd5; #1 check(host_rdata == 64'd1, "hit counter");
    host_addr = 4'd6; #1 check(host_rdata == 64'd1, "miss counter");
    host_addr = 4'd3; #1 check(host_rdata > 64'd25, "cycle counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

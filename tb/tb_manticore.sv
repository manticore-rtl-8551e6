// tb_manticore: end-to-end test of a 3 x 2 Manticore (six cores, one
// privileged) with the behavioural host and DRAM of manticore_host. Booting,
// lock-step Vcycles, message passing, a NoC collision, global loads and
// stores through the cache with global stalls, an exception served by the
// host, a cache flush and resuming are all exercised; see manticore_host.
module tb_manticore;
  import manticore_pkg::*;
  localparam int DX = 3, DY = 2, N = DX * DY;
  logic clk = 0, rst, host_we, dram_req_valid, dram_req_ready, dram_req_write;
  logic dram_resp_valid, noc_drop, compute_en;
  logic [3:0] host_addr;
  logic [63:0] host_wdata, host_rdata;
  logic [43:0] dram_req_addr;
  logic [255:0] dram_req_wdata, dram_resp_rdata;
  logic [N-1:0] booted, vcycle_start;

  always #5 clk = ~clk;

  manticore #(.DIM_X(DX), .DIM_Y(DY)) dut (.*);
  manticore_host #(.DIM_X(DX), .DIM_Y(DY)) host (.*);

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", host.checks, host.failures + 1);
    $finish;
  end
endmodule

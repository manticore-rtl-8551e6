// tb_manticore_full: end-to-end test of the full-size Manticore, the
// manticore top with its default parameters (15 x 15 = 225 cores, 128 KiB
// cache), driven by the behavioural host and DRAM of manticore_host. All 225
// cores are booted and run lock-step Vcycles; six spread-out cores and the
// privileged core run the message / global memory / exception program.
module tb_manticore_full;
  import manticore_pkg::*;
  localparam int DX = 15, DY = 15, N = DX * DY;
  logic clk = 0, rst, host_we, dram_req_valid, dram_req_ready, dram_req_write;
  logic dram_resp_valid, noc_drop, compute_en;
  logic [3:0] host_addr;
  logic [63:0] host_wdata, host_rdata;
  logic [43:0] dram_req_addr;
  logic [255:0] dram_req_wdata, dram_resp_rdata;
  logic [N-1:0] booted, vcycle_start;

  always #5 clk = ~clk;

  manticore dut (.*);
  manticore_host #(.DIM_X(DX), .DIM_Y(DY)) host (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", host.checks, host.failures + 1);
    $finish;
  end
endmodule

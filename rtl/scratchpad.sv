// scratchpad: the 16384 x 16 local data memory of one core.
//
// As in the paper, the memory is physically 4096 words of 64 bits (one
// UltraRAM). A 16-bit store writes one of the four 16-bit lanes of a 64-bit
// word (lane strobes); a load reads the whole 64-bit word and a multiplexer
// picks the lane ("reshape").
//
// Timing: three cycles from addr to rdata: the address is registered, the
// 64-bit word is read into a register, then the lane multiplexer output is
// registered. A store commits on the edge where we is high; read and write
// may be issued in the same cycle to different or equal addresses (a load
// then sees the old value). No reset: contents survive a soft reset.
module scratchpad
  import manticore_pkg::*;
#(
  parameter int unsigned WORDS = SPM_WORDS,
  localparam int unsigned AW   = $clog2(WORDS),
  localparam int unsigned ROWS = WORDS / 4
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [15:0]   wdata,
  output logic [15:0]   rdata
);

  logic [63:0]   mem [ROWS];
  logic [AW-1:0] raddr_q;
  logic [1:0]    lane_q;
  logic [63:0]   row_q;

  always_ff @(posedge clk) begin
    if (we) begin
      for (int l = 0; l < 4; l++)
        if (waddr[1:0] == 2'(l)) mem[waddr[AW-1:2]][16*l +: 16] <= wdata;
    end
    raddr_q <= raddr;
    row_q   <= mem[raddr_q[AW-1:2]];
    lane_q  <= raddr_q[1:0];
    rdata   <= row_q[16*lane_q +: 16];
  end

endmodule

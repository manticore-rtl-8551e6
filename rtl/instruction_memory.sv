// instruction_memory: the 4096 x 64-bit program store of one core.
//
// The program occupies the low addresses; the SET instructions made from
// messages received during a virtual cycle are appended right after it, so
// the core executes them like any other instruction. The write port is
// therefore shared (outside this block) by the boot receiver and the message
// receiver. The size and the 2-cycle read follow the paper (one UltraRAM).
//
// Timing: raddr is registered on the first edge and the word appears in the
// output register after the second, i.e. rdata belongs to the raddr of two
// edges earlier. A write takes effect on the edge where we is high.
module instruction_memory
  import manticore_pkg::*;
#(
  parameter int unsigned DEPTH = IMEM_DEPTH,
  parameter int unsigned WIDTH = INSTR_W,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    raddr_q;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    raddr_q <= raddr;
    rdata   <= mem[raddr_q];
  end

endmodule

// register_file: the 2048 x 17 register file of one core.
//
// Each entry holds a 16-bit value and, above it, the overflow bit that wide
// additions read and write. Some instructions read four registers at once, so
// the file is four identical banks that all take every write (write
// mirroring); read port i reads bank i. This follows the paper, which builds
// the file from four mirrored block RAMs.
//
// Timing: a read takes two cycles. The address is registered on the first
// clock edge, the array is read into the output register on the second, so
// rdata[i] belongs to the raddr[i] presented two edges earlier. A write is
// committed on the edge where we is high. A read sees a write made in the
// cycle its address is presented (the array itself is read one edge later);
// a write on that second edge is not seen (read-first). The compiler spaces
// dependent instructions far enough apart that this never matters.
// No reset: the contents survive a soft reset, as in the paper.
module register_file
  import manticore_pkg::*;
#(
  parameter int unsigned DEPTH      = NREGS,
  parameter int unsigned WIDTH      = REG_W,
  parameter int unsigned READ_PORTS = 4,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic [AW-1:0]         raddr [READ_PORTS],
  output logic [WIDTH-1:0]      rdata [READ_PORTS],
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [WIDTH-1:0]      wdata
);

  for (genvar p = 0; p < READ_PORTS; p++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    logic [AW-1:0]    raddr_q;

    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
      raddr_q  <= raddr[p];
      rdata[p] <= mem[raddr_q];
    end
  end

endmodule

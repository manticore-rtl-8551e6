// message_receiver: turns incoming NoC messages into SET instructions.
//
// In Manticore a core never reads a message directly. Each message carries a
// destination register (11 bits) and a value (16 bits); the receiver builds
// the instruction "SET rd, value" and writes it into the instruction memory
// right after the program, in the epilogue slots. The core executes these
// SETs at the end of its virtual cycle (Vcycle), so register updates from
// other cores become visible only between Vcycles, as static BSP requires.
// This reuse of the instruction memory's write port follows the paper; the
// slot counter below is this design's own.
//
// Timing: a message arriving in a cycle is written on that cycle's edge, in
// slot base + n, n counting the messages since the Vcycle began. vcycle_start
// marks the cycle in which the core fetches its first instruction; a message
// arriving in that same cycle already belongs to the new Vcycle.
module message_receiver
  import manticore_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               enable,        // core has booted
  input  logic               msg_valid,
  input  raddr_t             msg_rd,
  input  word_t              msg_data,
  input  pc_t                base,          // program length
  input  logic               vcycle_start,
  output logic               we,
  output pc_t                waddr,
  output logic [INSTR_W-1:0] wdata,
  output pc_t                count          // messages stored this Vcycle
);

  pc_t ptr, slot;

  assign slot  = vcycle_start ? '0 : ptr;
  assign we    = enable && msg_valid;
  assign waddr = base + slot;
  assign wdata = encode_imm(OP_SET, msg_rd, '0, '0, '0, msg_data);
  assign count = ptr;

  always_ff @(posedge clk) begin
    if (rst)        ptr <= '0;
    else if (enable) ptr <= slot + pc_t'(we);
  end

endmodule

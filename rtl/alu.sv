// alu: the 16-bit arithmetic and logic unit of a core.
//
// It executes every standard instruction: add (the carry out is written to
// the destination's overflow bit), add-with-carry (the carry in is the
// overflow bit of a third register, so wide additions chain 16 bits at a
// time), subtract, the bitwise operations, shifts, equality and ordered
// compares, a 2-way multiplexer, multiply (the FPGA core maps the ALU onto a
// DSP block), bit-field slice and immediate set.
//
// The operation set is this design's own reading of the instructions the
// paper names; the paper gives the ALU's 4-cycle latency. The result is
// computed in the first stage and carried through three more registers, so
// y belongs to the inputs of four edges earlier. Operands are {overflow,
// value}; the result's bit 16 is the new overflow bit (zero except for ADD,
// ADDC and SUB, where it is the carry / not-borrow).
module alu
  import manticore_pkg::*;
#(
  parameter int unsigned LATENCY = 4
) (
  input  logic    clk,
  input  alu_op_e op,
  input  regval_t a,
  input  regval_t b,
  input  regval_t c,
  input  word_t   imm,
  output regval_t y
);

  regval_t res;
  word_t   av, bv;
  word_t   mask;

  assign av = a[15:0];
  assign bv = b[15:0];

  always_comb begin
    mask = 16'((32'h1 << (32'(imm[7:4]) + 1)) - 1);
    res  = '0;
    unique case (op)
      ALU_ADD:   res = {1'b0, av} + {1'b0, bv};
      ALU_ADDC:  res = {1'b0, av} + {1'b0, bv} + 17'(c[16]);
      ALU_SUB:   res = {1'b0, av} + {1'b0, ~bv} + 17'd1;
      ALU_AND:   res = {1'b0, av & bv};
      ALU_OR:    res = {1'b0, av | bv};
      ALU_XOR:   res = {1'b0, av ^ bv};
      ALU_SLL:   res = {1'b0, av << bv[3:0]};
      ALU_SRL:   res = {1'b0, av >> bv[3:0]};
      ALU_SRA:   res = {1'b0, 16'($signed(av) >>> bv[3:0])};
      ALU_SEQ:   res = {16'd0, av == bv};
      ALU_SLTU:  res = {16'd0, av < bv};
      ALU_SLTS:  res = {16'd0, $signed(av) < $signed(bv)};
      ALU_MUX:   res = {1'b0, c[0] ? bv : av};
      ALU_MUL:   res = {1'b0, 16'(av * bv)};
      ALU_SETI:  res = {1'b0, imm};
      ALU_SLICE: res = {1'b0, (av >> imm[3:0]) & mask};
      default:   res = '0;
    endcase
  end

  regval_t pipe [LATENCY];

  always_ff @(posedge clk) begin
    pipe[0] <= res;
    for (int s = 1; s < LATENCY; s++) pipe[s] <= pipe[s-1];
  end

  assign y = pipe[LATENCY-1];

endmodule

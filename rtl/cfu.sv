// cfu: custom function unit, one programmable 4-input bitwise function per
// instruction.
//
// A 4-input, 1-bit boolean function is fully described by its 16-bit truth
// table. The CFU applies this idea per bit lane: for each of the 16 lanes it
// holds one 32 x 16 LUT memory, i.e. one truth table per custom function
// number. Output bit i is the truth table of lane i, function funct, indexed
// by bit i of the four operands, {op4[i], op3[i], op2[i], op1[i]} (op4 most
// significant: the paper does not fix the order). A chain of AND/OR/XOR
// operations with constants over up to four registers thus collapses into
// one instruction. 32 functions x 16 lanes x 16 bits = 32 x 256 bits, as in
// the paper.
//
// Truth tables are written one lane at a time through the cfg port (by the
// CFG instruction); a write takes effect on its clock edge. The result is
// registered four times: y belongs to the operands of four edges earlier,
// matching the ALU so both share the execute stages.
module cfu
  import manticore_pkg::*;
#(
  parameter int unsigned FUNCTIONS = NFUNCT,
  parameter int unsigned LATENCY   = 4,
  localparam int unsigned FW = $clog2(FUNCTIONS)
) (
  input  logic          clk,
  input  logic [FW-1:0] funct,
  input  word_t         op1,
  input  word_t         op2,
  input  word_t         op3,
  input  word_t         op4,
  output word_t         y,
  input  logic          cfg_we,
  input  logic [3:0]    cfg_lane,
  input  logic [FW-1:0] cfg_funct,
  input  word_t         cfg_data
);

  word_t res;
  word_t pipe [LATENCY];

  for (genvar i = 0; i < 16; i++) begin : g_lane
    logic [15:0] lut [FUNCTIONS];   // equation i of every function
    logic [15:0] table_i;

    always_ff @(posedge clk)
      if (cfg_we && cfg_lane == 4'(i)) lut[cfg_funct] <= cfg_data;

    assign table_i = lut[funct];
    assign res[i]  = table_i[{op4[i], op3[i], op2[i], op1[i]}];
  end

  always_ff @(posedge clk) begin
    pipe[0] <= res;
    for (int s = 1; s < LATENCY; s++) pipe[s] <= pipe[s-1];
  end

  assign y = pipe[LATENCY-1];

endmodule

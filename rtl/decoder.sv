// decoder: splits a 64-bit instruction word into the control struct that
// travels down the pipeline.
//
// Purely combinational. Field positions are listed in manticore_pkg. The
// decoder also says which unit produces the result (ALU or CFU), whether the
// register file is written, and flags the memory, predicate, send, expect and
// CFU-configuration instructions. When PRIVILEGED is 0 the privileged
// instructions (GLD, GST, EXPECT) decode as no-ops: in the paper only one
// core may execute them. Unknown opcodes decode as no-ops.
module decoder
  import manticore_pkg::*;
#(
  parameter bit PRIVILEGED = 1'b0
) (
  input  logic [INSTR_W-1:0] instr,
  output ctrl_t              ctrl
);

  opcode_e op;
  assign op = opcode_e'(instr[3:0]);

  always_comb begin
    ctrl        = '0;
    ctrl.opcode = op;
    ctrl.rd     = instr[14:4];
    ctrl.rs1    = instr[25:15];
    ctrl.rs2    = instr[36:26];
    ctrl.rs3    = instr[47:37];
    ctrl.rs4    = instr[58:48];
    ctrl.funct  = instr[63:59];
    ctrl.imm    = instr[63:48];
    ctrl.alu_op = alu_op_e'(instr[63:59]);
    unique case (op)
      OP_SET: begin
        ctrl.alu_op    = ALU_SETI;
        ctrl.writes_rd = 1'b1;
      end
      OP_ARITH: ctrl.writes_rd = 1'b1;
      OP_SLICE: begin
        ctrl.alu_op    = ALU_SLICE;
        ctrl.writes_rd = 1'b1;
      end
      OP_CUST: begin
        ctrl.use_cfu   = 1'b1;
        ctrl.writes_rd = 1'b1;
      end
      OP_LLD: begin
        ctrl.is_lld    = 1'b1;
        ctrl.writes_rd = 1'b1;
      end
      OP_LST:  ctrl.is_lst  = 1'b1;
      OP_PRED: ctrl.is_pred = 1'b1;
      OP_SEND: ctrl.is_send = 1'b1;
      OP_CFG:  ctrl.is_cfg  = 1'b1;
      OP_GLD: if (PRIVILEGED) begin
        ctrl.is_gld    = 1'b1;
        ctrl.writes_rd = 1'b1;
      end
      OP_GST:    if (PRIVILEGED) ctrl.is_gst    = 1'b1;
      OP_EXPECT: if (PRIVILEGED) ctrl.is_expect = 1'b1;
      default: ;
    endcase
    if (!(ctrl.writes_rd || ctrl.is_lst || ctrl.is_pred || ctrl.is_send || ctrl.is_cfg ||
          ctrl.is_gst || ctrl.is_expect))
      ctrl.opcode = OP_NOP;
  end

endmodule

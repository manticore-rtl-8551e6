// manticore_pkg: types and constants shared by every Manticore block.
//
// A Manticore core has a 16-bit datapath, a 2048-entry register file whose
// entries carry one extra overflow bit, a 4096-word instruction memory and a
// 16384 x 16 scratchpad. Cores talk only through single-word messages on a
// uni-directional torus. Those sizes follow the paper. The 64-bit instruction
// encoding below is this design's own: the paper names the instructions but
// does not publish their bit layout.
//
// Instruction word (fixed fields, unused fields are ignored):
//   [3:0]   opcode
//   [14:4]  rd     destination register (SEND: target register in the receiver)
//   [25:15] rs1
//   [36:26] rs2
//   [47:37] rs3
//   [58:48] rs4
//   [63:59] funct  ALU operation (ARITH) or custom function number (CUST, CFG)
//   [63:48] imm16  immediate of SET, LLD, LST, SEND, EXPECT, SLICE, CFG
//                  (these opcodes use neither rs4 nor funct, except CFG whose
//                  lane number sits in imm16[3:0] below its funct field)
package manticore_pkg;

  localparam int unsigned DATA_W    = 16;     // datapath width
  localparam int unsigned REG_W     = 17;     // value + overflow bit
  localparam int unsigned NREGS     = 2048;
  localparam int unsigned RADDR_W   = 11;
  localparam int unsigned IMEM_DEPTH = 4096;
  localparam int unsigned PC_W      = 12;
  localparam int unsigned INSTR_W   = 64;
  localparam int unsigned SPM_WORDS = 16384;
  localparam int unsigned SPM_AW    = 14;
  localparam int unsigned NFUNCT    = 32;     // custom functions per core
  localparam int unsigned FUNCT_W   = 5;
  localparam int unsigned GADDR_W   = 48;     // global (DRAM) word address
  localparam int unsigned COORD_W   = 8;      // x or y coordinate of a core
  localparam int unsigned PIPE_DEPTH = 14;

  typedef logic [DATA_W-1:0]  word_t;
  typedef logic [REG_W-1:0]   regval_t;   // {overflow, value}
  typedef logic [RADDR_W-1:0] raddr_t;
  typedef logic [PC_W-1:0]    pc_t;

  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,
    OP_SET    = 4'd1,   // rd = imm16
    OP_ARITH  = 4'd2,   // rd = alu(funct, rs1, rs2, rs3)
    OP_CUST   = 4'd3,   // rd = custom function funct over rs1..rs4
    OP_LLD    = 4'd4,   // rd = scratchpad[rs1 + imm16]
    OP_LST    = 4'd5,   // if (pred) scratchpad[rs1 + imm16] = rs2
    OP_GLD    = 4'd6,   // privileged: rd = global[{rs3, rs2, rs1}]
    OP_GST    = 4'd7,   // privileged: if (pred) global[{rs3, rs2, rs1}] = rs4
    OP_PRED   = 4'd8,   // pred = rs1[0]
    OP_SEND   = 4'd9,   // core imm16 = {y, x}: register rd there = rs1 here
    OP_EXPECT = 4'd10,  // privileged: exception imm16 if rs1 != rs2
    OP_SLICE  = 4'd11,  // rd = (rs1 >> imm16[3:0]) & ones(imm16[7:4] + 1)
    OP_CFG    = 4'd12   // custom function funct, bit lane imm16[3:0] = rs1
  } opcode_e;

  typedef enum logic [4:0] {
    ALU_ADD  = 5'd0,   // rd = rs1 + rs2, overflow bit = carry out
    ALU_ADDC = 5'd1,   // rd = rs1 + rs2 + overflow bit of rs3
    ALU_SUB  = 5'd2,
    ALU_AND  = 5'd3,
    ALU_OR   = 5'd4,
    ALU_XOR  = 5'd5,
    ALU_SLL  = 5'd6,
    ALU_SRL  = 5'd7,
    ALU_SRA  = 5'd8,
    ALU_SEQ  = 5'd9,
    ALU_SLTU = 5'd10,
    ALU_SLTS = 5'd11,
    ALU_MUX  = 5'd12,  // rd = rs3[0] ? rs2 : rs1
    ALU_MUL  = 5'd13,  // low 16 bits of rs1 * rs2 (the ALU is a DSP slice)
    ALU_SETI = 5'd14,  // rd = imm16 (used by SET)
    ALU_SLICE = 5'd15  // rd = (rs1 >> imm[3:0]) & ones(imm[7:4] + 1)
  } alu_op_e;

  // Decoded instruction, carried down the pipeline.
  typedef struct packed {
    opcode_e          opcode;
    alu_op_e          alu_op;
    logic [FUNCT_W-1:0] funct;
    raddr_t           rd;
    raddr_t           rs1;
    raddr_t           rs2;
    raddr_t           rs3;
    raddr_t           rs4;
    word_t            imm;
    logic             writes_rd;   // result goes to the register file
    logic             use_cfu;     // result comes from the CFU
    logic             is_lld;
    logic             is_lst;
    logic             is_gld;
    logic             is_gst;
    logic             is_pred;
    logic             is_send;
    logic             is_expect;
    logic             is_cfg;
  } ctrl_t;

  // One NoC message: target core and a (register, value) payload of 27 bits.
  // During boot the payload value carries one 16-bit word of the boot stream.
  typedef struct packed {
    logic               valid;
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    raddr_t             rd;
    word_t              data;
  } noc_msg_t;

  // Request from the privileged core to the control domain.
  typedef struct packed {
    logic               valid;
    logic               write;
    logic [GADDR_W-1:0] addr;
    word_t              wdata;
  } gmem_req_t;

  typedef struct packed {
    logic  valid;
    word_t eid;
  } exception_t;

  function automatic logic [INSTR_W-1:0] encode(opcode_e op, raddr_t rd, raddr_t rs1,
                                                raddr_t rs2, raddr_t rs3, raddr_t rs4,
                                                logic [FUNCT_W-1:0] funct);
    return {funct, rs4, rs3, rs2, rs1, rd, op};
  endfunction

  function automatic logic [INSTR_W-1:0] encode_imm(opcode_e op, raddr_t rd, raddr_t rs1,
                                                    raddr_t rs2, raddr_t rs3, word_t imm);
    return {imm, rs3, rs2, rs1, rd, op};
  endfunction

endpackage

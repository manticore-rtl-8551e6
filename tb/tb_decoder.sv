// tb_decoder: encodes random instructions of every opcode, decodes them with
// a standard and a privileged decoder and checks the register fields, the
// immediate, the unit selection and the instruction flags, including that
// GLD, GST and EXPECT are no-ops on a standard core.
module tb_decoder;
  import manticore_pkg::*;
  logic [63:0] instr;
  ctrl_t       cs, cp;
  int checks = 0, failures = 0;

  decoder #(.PRIVILEGED(1'b0)) u_std  (.instr, .ctrl(cs));
  decoder #(.PRIVILEGED(1'b1)) u_priv (.instr, .ctrl(cp));

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (instr %h)", what, instr); end
  endtask

  initial begin
    for (int t = 0; t < 3000; t++) begin
      opcode_e op;
      raddr_t rd, r1, r2, r3, r4;
      logic [4:0] f;
      logic priv_op, writes;
      op = opcode_e'(t % 13);
      rd = 11'($urandom); r1 = 11'($urandom); r2 = 11'($urandom);
      r3 = 11'($urandom); r4 = 11'($urandom); f = 5'($urandom);
      instr = encode(op, rd, r1, r2, r3, r4, f);
      #1;
      priv_op = op inside {OP_GLD, OP_GST, OP_EXPECT};
      writes  = op inside {OP_SET, OP_ARITH, OP_CUST, OP_LLD, OP_SLICE, OP_GLD};
      check(cp.rd == rd && cp.rs1 == r1 && cp.rs2 == r2 && cp.rs3 == r3, "register fields");
      check(cp.rs4 == r4 && cp.funct == f && cp.imm == {f, r4}, "rs4/funct/imm");
      check(cp.opcode == op || op == OP_NOP, "opcode kept");
      check(cp.writes_rd == writes, "writes_rd (privileged)");
      check(cp.use_cfu == (op == OP_CUST), "use_cfu");
      check(cp.is_lld == (op == OP_LLD) && cp.is_lst == (op == OP_LST), "local memory flags");
      check(cp.is_gld == (op == OP_GLD) && cp.is_gst == (op == OP_GST), "global memory flags");
      check(cp.is_expect == (op == OP_EXPECT) && cp.is_send == (op == OP_SEND), "expect/send");
      check(cp.is_pred == (op == OP_PRED) && cp.is_cfg == (op == OP_CFG), "pred/cfg");
      if (op == OP_SET)   check(cp.alu_op == ALU_SETI, "SET uses ALU_SETI");
      if (op == OP_SLICE) check(cp.alu_op == ALU_SLICE, "SLICE uses ALU_SLICE");
      if (op == OP_ARITH) check(cp.alu_op == alu_op_e'(f), "ARITH op from funct");
      // standard core
      check(!(cs.is_gld || cs.is_gst || cs.is_expect), "no privileged flags on std core");
      check(cs.writes_rd == (writes && op != OP_GLD), "writes_rd (standard)");
      if (priv_op) check(cs.opcode == OP_NOP, "privileged op is NOP on std core");
    end
    // an unused opcode is a NOP
    instr = 64'hffff_ffff_ffff_fff0 | 64'd15;
    #1 check(cp.opcode == OP_NOP && !cp.writes_rd, "opcode 15 is NOP");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

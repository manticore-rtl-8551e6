// tb_alu: every ALU operation on random operands (plus corner values),
// checked against a reference model written here, with the result expected
// exactly four edges after the operands.
module tb_alu;
  import manticore_pkg::*;
  logic    clk = 0;
  alu_op_e op;
  regval_t a, b, c, y;
  word_t   imm;
  int checks = 0, failures = 0;

  alu dut (.clk, .op, .a, .b, .c, .imm, .y);
  always #5 clk = ~clk;

  function automatic regval_t model(alu_op_e o, regval_t x1, regval_t x2, regval_t x3, word_t im);
    logic [31:0] s;
    int unsigned len;
    case (o)
      ALU_ADD:  begin s = 32'(x1[15:0]) + 32'(x2[15:0]); return {s[16], s[15:0]}; end
      ALU_ADDC: begin s = 32'(x1[15:0]) + 32'(x2[15:0]) + 32'(x3[16]); return {s[16], s[15:0]}; end
      ALU_SUB:  begin s = 32'(x1[15:0]) + 32'(16'(~x2[15:0])) + 1; return {s[16], s[15:0]}; end
      ALU_AND:  return {1'b0, x1[15:0] & x2[15:0]};
      ALU_OR:   return {1'b0, x1[15:0] | x2[15:0]};
      ALU_XOR:  return {1'b0, x1[15:0] ^ x2[15:0]};
      ALU_SLL:  return {1'b0, 16'(x1[15:0] << (x2 % 16))};
      ALU_SRL:  return {1'b0, 16'(x1[15:0] >> (x2 % 16))};
      ALU_SRA:  return {1'b0, 16'($signed(x1[15:0]) >>> (x2 % 16))};
      ALU_SEQ:  return 17'(x1[15:0] == x2[15:0]);
      ALU_SLTU: return 17'(x1[15:0] < x2[15:0]);
      ALU_SLTS: return 17'($signed(x1[15:0]) < $signed(x2[15:0]));
      ALU_MUX:  return {1'b0, x3[0] ? x2[15:0] : x1[15:0]};
      ALU_MUL:  return {1'b0, 16'(32'(x1[15:0]) * 32'(x2[15:0]))};
      ALU_SETI: return {1'b0, im};
      ALU_SLICE: begin
        len = int'(im[7:4]) + 1;
        s = 32'(x1[15:0]) >> im[3:0];
        return {1'b0, 16'(s & ((32'd1 << len) - 1))};
      end
      default:  return '0;
    endcase
  endfunction

  regval_t exp_q [$];

  initial begin
    op = ALU_ADD; a = 0; b = 0; c = 0; imm = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      op  = alu_op_e'(t % 16);
      a   = 17'($urandom); b = 17'($urandom); c = 17'($urandom); imm = 16'($urandom);
      if (t % 50 < 3) begin a = 17'h0ffff; b = 17'h0ffff; end
      exp_q.push_back(model(op, a, b, c, imm));
      if (exp_q.size() > 4) begin
        regval_t e;
        e = exp_q.pop_front();
        // y now shows the result of the operands applied four edges ago
        checks++;
        if (y !== e) begin failures++; $display("FAIL t=%0d got %h exp %h", t, y, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

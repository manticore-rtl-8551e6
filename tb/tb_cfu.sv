// tb_cfu: programs random truth tables into all 32 functions and 16 lanes,
// then checks random custom-function evaluations bit by bit against a model
// (output bit i = table[funct][i][{op4[i],op3[i],op2[i],op1[i]}]) with the
// 4-cycle latency. Also checks the paper's example function
// (a & 0xf) | b | (c & 0x3) | (d ^ 0x1) as one CFU operation.
module tb_cfu;
  import manticore_pkg::*;
  logic       clk = 0;
  logic [4:0] funct, cfg_funct;
  word_t      op1, op2, op3, op4, y, cfg_data;
  logic       cfg_we;
  logic [3:0] cfg_lane;
  logic [15:0] tbl [32][16];
  int checks = 0, failures = 0;

  cfu dut (.clk, .funct, .op1, .op2, .op3, .op4, .y, .cfg_we, .cfg_lane, .cfg_funct, .cfg_data);
  always #5 clk = ~clk;

  function automatic word_t model(logic [4:0] f, word_t a, word_t b, word_t c, word_t d);
    word_t r;
    for (int i = 0; i < 16; i++) r[i] = tbl[f][i][{d[i], c[i], b[i], a[i]}];
    return r;
  endfunction

  word_t exp_q [$];

  initial begin
    cfg_we = 0; funct = 0; op1 = 0; op2 = 0; op3 = 0; op4 = 0;
    for (int f = 0; f < 32; f++)
      for (int l = 0; l < 16; l++) begin
        @(negedge clk);
        cfg_we = 1; cfg_funct = 5'(f); cfg_lane = 4'(l); cfg_data = 16'($urandom);
        tbl[f][l] = cfg_data;
      end
    // function 7: (a & 0xf) | b | (c & 0x3) | (d ^ 0x1), lane by lane
    for (int l = 0; l < 16; l++) begin
      logic [15:0] t;
      for (int k = 0; k < 16; k++) begin
        logic ai, bi, ci, di;
        {di, ci, bi, ai} = 4'(k);
        t[k] = (ai & (l < 4)) | bi | (ci & (l < 2)) | (di ^ (l == 0));
      end
      @(negedge clk);
      cfg_we = 1; cfg_funct = 5'd7; cfg_lane = 4'(l); cfg_data = t; tbl[7][l] = t;
    end
    @(negedge clk); cfg_we = 0;
    for (int t = 0; t < 3000; t++) begin
      funct = 5'($urandom); op1 = 16'($urandom); op2 = 16'($urandom);
      op3 = 16'($urandom); op4 = 16'($urandom);
      if (t % 10 == 0) funct = 5'd7;
      exp_q.push_back(funct == 5'd7 ? ((op1 & 16'hf) | op2 | (op3 & 16'h3) | (op4 ^ 16'h1))
                                    : model(funct, op1, op2, op3, op4));
      @(negedge clk);
      // the front entry was applied four edges ago
      if (exp_q.size() >= 4) begin
        word_t e;
        e = exp_q.pop_front();
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

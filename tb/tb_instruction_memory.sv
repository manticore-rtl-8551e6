// tb_instruction_memory: writes random 64-bit words, reads them back and
// checks the 2-cycle read latency (a word read must not appear one cycle
// early).
module tb_instruction_memory;
  logic        clk = 0;
  logic [11:0] raddr, waddr;
  logic [63:0] rdata, wdata;
  logic        we;
  logic [63:0] shadow [4096];
  int checks = 0, failures = 0;

  instruction_memory dut (.clk, .raddr, .rdata, .we, .waddr, .wdata);
  always #5 clk = ~clk;

  initial begin
    logic [11:0] pb;     // address presented before a (last round's b)
    we = 0; raddr = 0;
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk); we = 1; waddr = 12'(i); wdata = {$urandom, $urandom}; shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 1000; t++) begin
      logic [11:0] a, b;
      a = 12'($urandom); b = a + 12'd1;
      raddr = a;
      @(negedge clk); raddr = b;
      // one cycle after presenting a: the word must not be there yet (the
      // output still holds the word of the address before, unless equal)
      checks++;
      if (t > 0 && shadow[a] != shadow[pb] && rdata == shadow[a]) begin
        failures++; $display("FAIL word %0d after one cycle", a);
      end
      @(negedge clk);
      checks++;
      if (rdata !== shadow[a]) begin failures++; $display("FAIL addr %0d", a); end
      @(negedge clk);
      checks++;
      if (rdata !== shadow[b]) begin failures++; $display("FAIL addr %0d", b); end
      pb = b;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

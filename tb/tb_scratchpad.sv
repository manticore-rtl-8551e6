// tb_scratchpad: 16-bit stores into the four lanes of the 64-bit rows and
// loads with the 3-cycle latency (2-cycle read, 1-cycle reshape), against a
// shadow array of 16384 words.
module tb_scratchpad;
  logic        clk = 0;
  logic [13:0] raddr, waddr;
  logic        we;
  logic [15:0] wdata, rdata;
  logic [15:0] shadow [16384];
  int checks = 0, failures = 0;

  scratchpad dut (.clk, .raddr, .we, .waddr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    we = 0; raddr = 0;
    for (int i = 0; i < 16384; i++) begin
      @(negedge clk); we = 1; waddr = 14'(i); wdata = 16'($urandom); shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      logic [13:0] a;
      a = 14'($urandom);
      raddr = a;
      // overwrite a neighbouring lane of the same row meanwhile
      we = 1; waddr = a ^ 14'd1; wdata = 16'($urandom);
      @(negedge clk); we = 0; shadow[waddr] = wdata;
      @(negedge clk);
      @(negedge clk);
      checks++;
      if (rdata !== shadow[a]) begin failures++; $display("FAIL addr %0d got %h exp %h", a, rdata, shadow[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

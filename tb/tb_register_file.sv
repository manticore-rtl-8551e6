// tb_register_file: random writes and four-port reads of the register file,
// checked against a shadow array; also checks the 2-cycle read latency and
// that a write in the cycle a read address is presented is seen by that
// read (the array is read on the second edge).
module tb_register_file;
  localparam int D = 2048;
  logic        clk = 0;
  logic [10:0] raddr [4];
  logic [16:0] rdata [4];
  logic        we;
  logic [10:0] waddr;
  logic [16:0] wdata;
  logic [16:0] shadow [D];
  int checks = 0, failures = 0;

  register_file dut (.clk, .raddr, .rdata, .we, .waddr, .wdata);

  always #5 clk = ~clk;

  task automatic check(logic [16:0] got, logic [16:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    we = 0;
    for (int p = 0; p < 4; p++) raddr[p] = '0;
    // fill every register
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = 11'(i); wdata = 17'($urandom); shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    // random 4-port reads, data due two edges later
    for (int t = 0; t < 2000; t++) begin
      logic [10:0] a [4];
      for (int p = 0; p < 4; p++) begin a[p] = 11'($urandom); raddr[p] = a[p]; end
      // a write to a random register in the same cycle
      we = 1; waddr = 11'($urandom); wdata = 17'($urandom);
      if (t % 7 == 0) waddr = a[0];
      @(negedge clk);
      we = 0;
      // the array is read on the second edge, after the write has landed
      shadow[waddr] = wdata;
      @(negedge clk);
      for (int p = 0; p < 4; p++) check(rdata[p], shadow[a[p]], $sformatf("port %0d addr %0d", p, a[p]));
    end
    // back-to-back reads, a new address every cycle: the data of the
    // address presented before edge t appears after edge t + 1
    begin
      logic [10:0] hist [$][4];
      for (int t = 0; t < 1000; t++) begin
        logic [10:0] a [4];
        for (int p = 0; p < 4; p++) begin a[p] = 11'($urandom); raddr[p] = a[p]; end
        hist.push_back(a);
        @(negedge clk);
        if (hist.size() == 2) begin
          for (int p = 0; p < 4; p++)
            check(rdata[p], shadow[hist[0][p]], $sformatf("pipelined port %0d", p));
          void'(hist.pop_front());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

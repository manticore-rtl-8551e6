// tb_boot_receiver: feeds boot streams (with idle gaps between words) and
// checks that every instruction is assembled from four little-endian words
// and written at its index, that the three lengths are captured, and that
// COUNT_DOWN produces exactly one start pulse carrying its value. A second
// stream after a soft reset must be parsed again from the start.
module tb_boot_receiver;
  import manticore_pkg::*;
  logic clk = 0, rst, enable, word_valid, imem_we, start;
  word_t word, sleep_len, countdown;
  pc_t imem_waddr, prog_len, epi_len;
  logic [63:0] imem_wdata;
  logic [63:0] prog [64];
  logic [63:0] got [64];
  int nwrites, nstarts;
  word_t start_val;
  int checks = 0, failures = 0;

  boot_receiver dut (.clk, .rst, .enable, .word_valid, .word, .imem_we, .imem_waddr, .imem_wdata,
                     .prog_len, .epi_len, .sleep_len, .start, .countdown);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (imem_we) begin got[imem_waddr] <= imem_wdata; nwrites <= nwrites + 1; end
    if (start) begin nstarts <= nstarts + 1; start_val <= countdown; end
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(word_t w);
    word_valid = 1; word = w;
    @(negedge clk);
    word_valid = 0;
    repeat ($urandom % 3) @(negedge clk);
  endtask

  initial begin
    enable = 1; word_valid = 0; word = 0;
    for (int run = 0; run < 3; run++) begin
      int L;
      rst = 1; nwrites = 0; nstarts = 0;
      @(negedge clk); rst = 0;
      L = (run == 2) ? 0 : 5 + run * 20;
      for (int i = 0; i < L; i++) prog[i] = {$urandom, $urandom};
      send(16'(L));
      for (int i = 0; i < L; i++)
        for (int p = 0; p < 4; p++) send(prog[i][16*p +: 16]);
      send(16'(3 + run));    // EPILOGUE_LENGTH
      send(16'(7 + run));    // SLEEP_LENGTH
      check(nstarts == 0, "no start before COUNT_DOWN");
      send(16'(40 + run));   // COUNT_DOWN
      send(16'hdead);        // ignored: parsing is over
      @(negedge clk);
      check(nwrites == L, $sformatf("run %0d: %0d instruction writes", run, nwrites));
      for (int i = 0; i < L; i++) check(got[i] == prog[i], $sformatf("instruction %0d", i));
      check(prog_len == pc_t'(L), "INSTRUCTION_LENGTH");
      check(epi_len == pc_t'(3 + run), "EPILOGUE_LENGTH");
      check(sleep_len == 16'(7 + run), "SLEEP_LENGTH");
      check(nstarts == 1 && start_val == 16'(40 + run), "one start pulse with COUNT_DOWN");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

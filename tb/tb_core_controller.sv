// tb_core_controller: checks the boot -> countdown -> active -> sleep
// sequence: with countdown C the first fetch comes C + 1 cycles after the
// start pulse; each Vcycle fetches pc 0 .. L+E-1 in order and then idles for
// exactly S cycles, so Vcycles are L+E+S cycles apart; a soft reset returns
// to the boot state; S = 0 and C = 0 work too.
module tb_core_controller;
  import manticore_pkg::*;
  logic clk = 0, soft_reset, start, fetch, vcycle_start, booted;
  word_t countdown, sleep_len;
  pc_t prog_len, epi_len, pc;
  int checks = 0, failures = 0;

  core_controller dut (.clk, .soft_reset, .start, .countdown, .prog_len, .epi_len, .sleep_len,
                       .pc, .fetch, .vcycle_start, .booted);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    start = 0; countdown = 0;
    for (int run = 0; run < 4; run++) begin
      int L, E, S, C;
      L = 3 + run * 5; E = run; S = (run == 1) ? 0 : 2 + run; C = (run == 2) ? 0 : 6 + run;
      prog_len = pc_t'(L); epi_len = pc_t'(E); sleep_len = 16'(S);
      soft_reset = 1; @(negedge clk); soft_reset = 0;
      repeat (3) begin @(negedge clk); check(!booted && !fetch, "boot state"); end
      start = 1; countdown = 16'(C);
      @(negedge clk);
      start = 0;
      // C cycles of countdown, then the first fetch
      for (int i = 0; i < C; i++) begin
        check(booted && !fetch, $sformatf("countdown cycle %0d", i));
        @(negedge clk);
      end
      for (int v = 0; v < 3; v++) begin
        for (int i = 0; i < L + E; i++) begin
          check(fetch && pc == pc_t'(i), $sformatf("run %0d vcycle %0d pc %0d (got %0d fetch %0d)", run, v, i, pc, fetch));
          check(vcycle_start == (i == 0), "vcycle_start");
          @(negedge clk);
        end
        for (int i = 0; i < S; i++) begin
          check(!fetch, $sformatf("sleep cycle %0d", i));
          @(negedge clk);
        end
      end
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

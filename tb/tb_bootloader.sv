// tb_bootloader: a 3 x 2 grid's binary is placed in a memory model that
// answers the bootloader's reads after a random delay. The test checks that
// every word is sent, in order, to the right core, and that the countdown
// words make all cores start together: for each core, the cycle its
// countdown was injected + the hops to it + its countdown must be the same.
module tb_bootloader;
  import manticore_pkg::*;
  localparam int DX = 3, DY = 2, N = DX * DY, PX = DX - 1, PY = 0;
  logic clk = 0, rst, start, busy, mem_start, mem_done;
  logic [47:0] base, mem_addr;
  word_t mem_rdata;
  noc_msg_t inj;
  word_t bin [$];
  word_t stream [N][$];
  int    cd_cycle [N], cd_val [N], cd_count;
  int    cycle = 0;
  int checks = 0, failures = 0;

  bootloader #(.DIM_X(DX), .DIM_Y(DY)) dut (.clk, .rst, .start, .base, .busy, .mem_start, .mem_addr,
                                            .mem_done, .mem_rdata, .inj);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // memory model
  initial begin
    mem_done = 0;
    forever begin
      @(posedge clk);
      if (!rst && mem_start) begin
        int a;
        a = int'(mem_addr - base);
        repeat (1 + $urandom % 4) @(posedge clk);
        mem_rdata <= bin[a];
        mem_done  <= 1;
        @(posedge clk);
        mem_done  <= 0;
      end
    end
  end

  int in_boot = 1;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst && inj.valid) begin
      int k;
      k = int'(inj.y) * DX + int'(inj.x);
      check(inj.x < DX && inj.y < DY, "target inside the grid");
      if (in_boot) stream[k].push_back(inj.data);
      else begin cd_cycle[k] = cycle; cd_val[k] = int'(inj.data); cd_count++; end
    end
  end

  word_t want [N][$];

  initial begin
    base = 48'h0000_0100_0000;
    for (int k = 0; k < N; k++) begin
      int L;
      L = k % 3;                  // includes an empty program
      want[k].push_back(16'(L));
      for (int i = 0; i < 4 * L; i++) want[k].push_back(16'($urandom));
      want[k].push_back(16'(k + 1));      // EPILOGUE_LENGTH
      want[k].push_back(16'(2 * k));      // SLEEP_LENGTH
      foreach (want[k][i]) bin.push_back(want[k][i]);
    end
    rst = 1; start = 0; cd_count = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    // the stream phase ends when the last core's SLEEP_LENGTH went out
    wait (stream[N-1].size() == want[N-1].size());
    @(negedge clk);
    in_boot = 0;
    wait (!busy);
    repeat (3) @(negedge clk);
    for (int k = 0; k < N; k++) begin
      check(stream[k].size() == want[k].size(), $sformatf("core %0d word count", k));
      foreach (want[k][i]) check(stream[k][i] == want[k][i], $sformatf("core %0d word %0d", k, i));
    end
    check(cd_count == N, "one countdown per core");
    for (int k = 0; k < N; k++) begin
      int x, y, hops;
      x = k % DX; y = k / DX;
      hops = ((x - PX + DX) % DX) + ((y - PY + DY) % DY);
      check(cd_cycle[k] + hops + cd_val[k] == cd_cycle[0] + ((0 - PX + DX) % DX) + cd_val[0],
            $sformatf("core %0d starts with core 0", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

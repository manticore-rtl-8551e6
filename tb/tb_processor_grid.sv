// tb_processor_grid: self-checking test of a 3 x 2 processor grid. The
// testbench plays the control domain: it injects the boot streams at the
// privileged switch (word gaps at random) followed by the countdown words,
// gates the grid clock while a global load / store or an exception is
// served (for 0 to 4 cycles at random), and models global memory.
//
// Program, every Vcycle:
//   core k (not privileged)  r20 = r10 * r10 with r10 = 100 + k (core (1,1)
//                            adds r90) and sends r20 to the privileged core
//                            register 200 + k, one SEND every 12 cycles.
//   cores (0,0), (1,0)       send 0xaaaa / 0xbbbb to core (1,1) r90 in
//                            consecutive cycles: they meet in switch (1,0),
//                            which drops (1,0)'s message.
//   privileged core          stores each r(200 + k) at global address k,
//                            loads the counter at 0x55, stores it + 1, and
//                            raises exception 0x33 (EXPECT 0 == 1).
// Checked: all cores boot and start every Vcycle in the same cycle; one
// exception per Vcycle with id 0x33; the stored products; the counter
// advanced once per Vcycle; exactly one NoC drop per Vcycle.
module tb_processor_grid;
  import manticore_pkg::*;
  localparam int DX = 3, DY = 2, N = DX * DY, PK = DX - 1, GAP = 9, SP = 12;

  logic clk = 0, run = 1, gclk, soft_reset;
  noc_msg_t boot_inj;
  gmem_req_t gmem_req;
  word_t gmem_rdata;
  exception_t exc;
  logic [N-1:0] booted, vcycle_start;
  logic noc_drop;

  always #5 clk = ~clk;
  assign gclk = clk & run;

  processor_grid #(.DIM_X(DX), .DIM_Y(DY)) dut (.clk(gclk), .*);

  int checks = 0, failures = 0;
  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- programs ----------------
  logic [63:0] prog [N][$];
  int epi [N];
  function automatic void raw(int k, logic [63:0] i); prog[k].push_back(i); endfunction
  function automatic void op(int k, logic [63:0] i);
    raw(k, i); for (int g = 0; g < GAP; g++) raw(k, 64'd0);
  endfunction
  function automatic void set(int k, int rd, int v);
    op(k, encode_imm(OP_SET, 11'(rd), '0, '0, '0, 16'(v)));
  endfunction
  function automatic logic [63:0] send_i(int rd, int rs, int tk);
    return encode_imm(OP_SEND, 11'(rd), 11'(rs), '0, '0, {8'(tk / DX), 8'(tk % DX)});
  endfunction
  function automatic void pad_to(int k, int pc);
    while (prog[k].size() < pc) raw(k, 64'd0);
  endfunction

  int vc_len;
  function automatic void build();
    int slot;
    for (int k = 0; k < N; k++) begin set(k, 0, 0); set(k, 1, 1); end
    for (int k = 0; k < N; k++) if (k != PK) begin
      set(k, 10, 100 + k);
      set(k, 11, k == 0 ? 16'haaaa : 16'hbbbb);
      op(k, encode(OP_ARITH, 11'd20, 11'd10, 11'd10, '0, '0, 5'(ALU_MUL)));
      if (k == DX + 1) op(k, encode(OP_ARITH, 11'd20, 11'd20, 11'd90, '0, '0, 5'(ALU_ADD)));
    end
    op(PK, encode_imm(OP_PRED, '0, 11'd1, '0, '0, '0));
    set(PK, 30, 16'h55);
    op(PK, encode(OP_GLD, 11'd40, 11'd30, 11'd0, 11'd0, '0, '0));
    op(PK, encode(OP_ARITH, 11'd41, 11'd40, 11'd1, '0, '0, 5'(ALU_ADD)));
    op(PK, encode(OP_GST, '0, 11'd30, 11'd0, 11'd0, 11'd41, '0));
    for (int k = 0; k < N; k++) if (k != PK) begin
      set(PK, 50 + k, k);
      op(PK, encode(OP_GST, '0, 11'(50 + k), 11'd0, 11'd0, 11'(200 + k), '0));
    end
    slot = 0;
    for (int k = 0; k < N; k++) if (prog[k].size() > slot) slot = prog[k].size();
    for (int k = 0; k < N; k++) if (k != PK) begin
      pad_to(k, slot); raw(k, send_i(200 + k, 20, PK)); slot += SP;
    end
    pad_to(0, slot); raw(0, send_i(90, 11, DX + 1));
    pad_to(1, slot + 1); raw(1, send_i(90, 11, DX + 1));
    slot += SP;
    for (int k = 0; k < N; k++) pad_to(k, slot + 10);
    op(PK, encode_imm(OP_EXPECT, '0, 11'd0, 11'd1, '0, 16'h0033));
    for (int k = 0; k < N; k++) epi[k] = (k == PK) ? N - 1 : (k == DX + 1 ? 2 : 0);
    vc_len = 0;
    for (int k = 0; k < N; k++)
      if (prog[k].size() + epi[k] + 5 > vc_len) vc_len = prog[k].size() + epi[k] + 5;
  endfunction

  // ---------------- control-domain model ----------------
  word_t gmem [int];
  int stalls = 0, excs = 0, drops = 0, vstarts = 0, cnt_writes = 0;
  word_t cnt0;

  task automatic inj(int k, word_t w);
    @(negedge clk);
    boot_inj = '{valid: 1'b1, x: 8'(k % DX), y: 8'(k / DX), rd: '0, data: w};
    @(negedge clk);
    boot_inj = '0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  function automatic int hops(int k);
    return ((k % DX + DX - (DX - 1)) % DX) + (k / DX);
  endfunction

  // served while the grid clock is held (the request is registered on the
  // grid edge; the next grid edge is the one that ends the stall)
  always @(negedge clk) begin
    if (gmem_req.valid || exc.valid) begin
      int d;
      d = $urandom_range(0, 4);
      if (gmem_req.valid && !gmem_req.write) begin
        check(gmem.exists(int'(gmem_req.addr)), "load from written address");
        gmem_rdata = gmem[int'(gmem_req.addr)];
      end
      if (gmem_req.valid && gmem_req.write) begin
        if (gmem_req.addr == 48'h55) begin
          check(gmem_req.wdata == 16'(gmem[16'h55] + 1), "counter store = load + 1");
          cnt_writes++;
        end
        gmem[int'(gmem_req.addr)] = gmem_req.wdata;
      end
      if (exc.valid) begin
        excs++;
        check(exc.eid == 16'h0033, "exception id");
      end
      if (gmem_req.valid) stalls++;
      if (d > 0) begin
        run = 0;
        repeat (d) @(negedge clk);
        run = 1;
      end
      @(posedge gclk);
    end
  end

  always @(posedge gclk) begin
    if (noc_drop) drops++;
    if (|vcycle_start) begin
      check(&vcycle_start, "all cores start the Vcycle together");
      vstarts++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int hmax;
  initial begin
    boot_inj = '0; gmem_rdata = '0; soft_reset = 1;
    build();
    cnt0 = 16'($urandom);
    gmem[16'h55] = cnt0;
    repeat (4) @(negedge clk);
    soft_reset = 0;
    check(booted == '0, "nothing booted after reset");
    for (int k = 0; k < N; k++) begin
      inj(k, 16'(prog[k].size()));
      foreach (prog[k][i]) for (int p = 0; p < 4; p++) inj(k, prog[k][i][16*p +: 16]);
      inj(k, 16'(epi[k]));
      inj(k, 16'(vc_len - prog[k].size() - epi[k]));
    end
    hmax = 0;
    for (int k = 0; k < N; k++) if (hops(k) > hmax) hmax = hops(k);
    @(negedge clk);
    for (int k = 0; k < N; k++) begin
      boot_inj = '{valid: 1'b1, x: 8'(k % DX), y: 8'(k / DX), rd: '0,
                   data: 16'((N - 1 - k) + (hmax - hops(k)))};
      @(negedge clk);
    end
    boot_inj = '0;
    repeat (10) @(negedge clk);
    check(&booted, "all cores booted");
    wait (vstarts == 8);
    repeat (vc_len / 2) @(negedge clk);
    check(excs == 8 || excs == 7, $sformatf("one exception per Vcycle (%0d)", excs));
    check(cnt_writes >= excs && cnt_writes <= excs + 1 &&
          gmem[16'h55] == 16'(cnt0 + cnt_writes), "counter advanced once per Vcycle");
    for (int k = 0; k < N; k++) if (k != PK) begin
      word_t e;
      e = 16'((100 + k) * (100 + k));
      if (k == DX + 1) e = e + 16'haaaa;
      check(gmem.exists(k) && gmem[k] == e, $sformatf("product of core %0d", k));
    end
    check(drops == vstarts || drops == vstarts - 1, $sformatf("one drop per Vcycle (%0d)", drops));
    check(stalls > 0 && excs > 0 && drops > 0, "stall, exception and drop all happened");
    $display("vcycles %0d stalls %0d exceptions %0d drops %0d", vstarts, stalls, excs, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

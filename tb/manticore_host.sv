// manticore_host: behavioural host and DRAM for end-to-end tests of the
// manticore top (not synthesizable). It compiles a small parallel program
// for a DIM_X x DIM_Y grid, writes the binary into its DRAM model, boots the
// machine through the host registers, serves the exception, flushes the
// cache, checks the results in DRAM, resumes, and reports.
//
// The program, one Vcycle:
//   privileged core  loads a counter c from DRAM, stores c + 1 back, sends
//                    c + 1 to every other taking-part core, stores the values it
//                    received from each core k last Vcycle at
//                    RES + 256 * c + k, and raises exception 0x77 once
//                    c + 1 == LIMIT (EXPECT on an equality flag).
//   core k           computes v = r60 * (k + 3) + k from the counter r60
//                    received last Vcycle and sends it to the privileged core.
//   cores (0,0) and  both send to core (1,1) in consecutive cycles so that
//   (1,0)            the messages meet in switch (1,0): (1,0)'s is dropped,
//                    and core (1,1) adds the survivor (0xaaaa) to its v.
// So after the exception DRAM holds, for every core k and j = 2 .. LIMIT-1,
// (j - 1) * (k + 3) + k (+ 0xaaaa for core (1,1)) at RES + 256 * j + k.
//
// On grids of up to 8 cores every core takes part; on larger grids six
// spread-out cores do (the privileged core must fit a message and a store
// per partner in its 4096 instructions) and the others boot a one-NOP
// program with an empty epilogue, but still run lock-step Vcycles.
// Every SEND is placed so that no other message shares its links, as the
// compiler would do; every dependent instruction is 10 or more cycles after
// its producer. All cores get the same Vcycle length L + E + S.
// Checked besides the data: all cores leave their countdown in the same
// cycle and every Vcycle starts on all cores at once; Vcycles are VC
// compute cycles apart; the exception id; that a NoC drop, global stall
// cycles, cache hits and misses and the boot happened (each counted, a
// failure if zero). Epilogue SETs and the cache flush are proven by the
// data: results reach DRAM only through both.
module manticore_host
  import manticore_pkg::*;
#(
  parameter int unsigned DIM_X = 3,
  parameter int unsigned DIM_Y = 2,
  parameter int unsigned LIMIT = 6,
  localparam int unsigned N = DIM_X * DIM_Y
) (
  input  logic           clk,
  output logic           rst,
  output logic           host_we,
  output logic [3:0]     host_addr,
  output logic [63:0]    host_wdata,
  input  logic [63:0]    host_rdata,
  input  logic           dram_req_valid,
  output logic           dram_req_ready,
  input  logic           dram_req_write,
  input  logic [43:0]    dram_req_addr,
  input  logic [255:0]   dram_req_wdata,
  output logic           dram_resp_valid,
  output logic [255:0]   dram_resp_rdata,
  input  logic [N-1:0]   booted,
  input  logic [N-1:0]   vcycle_start,
  input  logic           noc_drop,
  input  logic           compute_en
);

  localparam int PX = DIM_X - 1, PY = 0, PK = PY * DIM_X + PX;
  localparam logic [47:0] BIN = 48'h0000_0010_0000;
  localparam int CNT = 16'h0100, RES = 16'h1000;   // RES + 256 * LIMIT < 2^16
  localparam int GAP = 9;

  dram_model u_dram (.clk, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_write(dram_req_write), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .resp_valid(dram_resp_valid), .resp_rdata(dram_resp_rdata));

  int checks = 0, failures = 0;
  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- program generation ----------------
  logic [63:0] prog [N][$];
  int          epi  [N];
  logic        active [N];
  localparam int SP = DIM_X + DIM_Y + 6;   // cycles between two SENDs

  function automatic void raw(int k, logic [63:0] i);
    prog[k].push_back(i);
  endfunction
  function automatic void op(int k, logic [63:0] i);
    raw(k, i);
    for (int g = 0; g < GAP; g++) raw(k, 64'd0);
  endfunction
  function automatic void set(int k, int rd, int v);
    op(k, encode_imm(OP_SET, 11'(rd), '0, '0, '0, 16'(v)));
  endfunction
  function automatic void alu(int k, alu_op_e f, int rd, int a, int b);
    op(k, encode(OP_ARITH, 11'(rd), 11'(a), 11'(b), '0, '0, 5'(f)));
  endfunction
  function automatic logic [63:0] send_i(int rd, int rs, int tk);
    return encode_imm(OP_SEND, 11'(rd), 11'(rs), '0, '0, {8'(tk / DIM_X), 8'(tk % DIM_X)});
  endfunction
  function automatic void pad_to(int k, int pc);
    while (prog[k].size() < pc) raw(k, 64'd0);
  endfunction

  int send_slot0, vc_len;

  function automatic void build();
    int others [$];
    int slot;
    if (N <= 8) begin
      for (int k = 0; k < N; k++) if (k != PK) others.push_back(k);
    end else begin
      // a spread of cores takes part; the rest run a one-NOP program
      others = '{0, 1, DIM_X + 1, DIM_X * (DIM_Y - 1), N - 2,
                 (DIM_Y / 2) * DIM_X + DIM_X / 2};
    end
    for (int k = 0; k < N; k++) active[k] = (k == PK);
    foreach (others[i]) active[others[i]] = 1;
    // common prologue: r0 = 0, r1 = 1, r3 = 3
    for (int k = 0; k < N; k++) begin
      if (active[k]) begin set(k, 0, 0); set(k, 1, 1); set(k, 3, 3); end
      else raw(k, 64'd0);
    end
    // privileged core: counter, results
    set(PK, 40, CNT); set(PK, 41, 0); set(PK, 44, RES); set(PK, 45, LIMIT);
    op(PK, encode_imm(OP_PRED, '0, 11'd1, '0, '0, '0));
    op(PK, encode(OP_GLD, 11'd50, 11'd40, 11'd41, 11'd41, '0, '0));       // c
    alu(PK, ALU_ADD, 51, 50, 1);                                          // c + 1
    op(PK, encode(OP_GST, '0, 11'd40, 11'd41, 11'd41, 11'd51, '0));
    alu(PK, ALU_SEQ, 56, 51, 45);
    set(PK, 4, 8);
    alu(PK, ALU_SLL, 53, 50, 4);                                          // 256c
    alu(PK, ALU_ADD, 54, 53, 44);                                         // RES + 256c
    foreach (others[i]) begin
      set(PK, 70 + i, others[i]);
      alu(PK, ALU_ADD, 80 + i, 54, 70 + i);
      op(PK, encode(OP_GST, '0, 11'(80 + i), 11'd41, 11'd41, 11'(100 + others[i]), '0));
    end
    // other cores: v = r60 * (k + 3) + k (+ r90 on core (1,1))
    foreach (others[i]) begin
      int k;
      k = others[i];
      set(k, 61, k == 0 ? 16'haaaa : 16'hbbbb);
      set(k, 62, k + 3); set(k, 63, k);
      alu(k, ALU_MUL, 64, 60, 62);
      alu(k, ALU_ADD, 65, 64, 63);
      if (k == DIM_X + 1) alu(k, ALU_ADD, 65, 65, 90);
    end
    // sends, one every SP cycles (longer than any route), from a common slot on
    slot = 0;
    for (int k = 0; k < N; k++) if (prog[k].size() > slot) slot = prog[k].size();
    send_slot0 = slot;
    foreach (others[i]) begin
      pad_to(PK, slot); raw(PK, send_i(60, 51, others[i])); slot += SP;
    end
    foreach (others[i]) begin
      pad_to(others[i], slot); raw(others[i], send_i(100 + others[i], 65, PK)); slot += SP;
    end
    // the deliberate collision in switch (1,0), target core (1,1)
    if (DIM_X >= 3 && DIM_Y >= 2) begin
      pad_to(0, slot); raw(0, send_i(90, 61, DIM_X + 1));
      pad_to(1, slot + 1); raw(1, send_i(90, 61, DIM_X + 1));
      slot += SP;
    end
    // every epilogue must start after the last message has landed, so all
    // programs run past the last SEND; the exception comes last
    for (int k = 0; k < N; k++) if (active[k]) pad_to(k, slot + 20);
    op(PK, encode_imm(OP_EXPECT, '0, 11'd56, 11'd0, '0, 16'h0077));
    // epilogue lengths and a common Vcycle length
    for (int k = 0; k < N; k++) epi[k] = (k == PK) ? others.size() : (active[k] ? 1 : 0);
    if (DIM_X >= 3 && DIM_Y >= 2) epi[DIM_X + 1] = 2;
    vc_len = 0;
    for (int k = 0; k < N; k++)
      if (prog[k].size() + epi[k] + 30 > vc_len) vc_len = prog[k].size() + epi[k] + 30;
  endfunction

  function automatic void write_binary();
    logic [47:0] a;
    a = BIN;
    for (int k = 0; k < N; k++) begin
      u_dram.write_word(a, 16'(prog[k].size())); a++;
      foreach (prog[k][i]) for (int p = 0; p < 4; p++) begin
        u_dram.write_word(a, prog[k][i][16*p +: 16]); a++;
      end
      u_dram.write_word(a, 16'(epi[k])); a++;
      u_dram.write_word(a, 16'(vc_len - prog[k].size() - epi[k])); a++;
    end
    u_dram.write_word(48'(CNT), 16'd0);
  endfunction

  // ---------------- observation ----------------
  int cycle = 0, drops = 0, stall_cycles = 0, first_start = -1, vstarts = 0;
  int last_vstart = -1, vcycles = 0;
  logic all_booted_seen = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (noc_drop) drops++;
    if (!compute_en) stall_cycles++;
    if (&booted) all_booted_seen <= 1;
    if (|vcycle_start && compute_en) begin
      check(&vcycle_start, "all cores start each Vcycle together");
      if (first_start < 0) first_start = cycle;
      vcycles++;
    end
  end

  // Vcycle spacing measured in compute-clock edges
  int ccycle = 0, last_cc = -1, spacing_checks = 0;
  always @(posedge clk) if (compute_en) begin
    ccycle <= ccycle + 1;
    if (vcycle_start[0]) begin
      if (last_cc >= 0) begin
        check(ccycle - last_cc == vc_len, $sformatf("Vcycle length %0d vs %0d", ccycle - last_cc, vc_len));
        spacing_checks++;
      end
      last_cc = ccycle;
    end
  end

  task automatic wr(int a, logic [63:0] d);
    @(negedge clk);
    host_we = 1; host_addr = 4'(a); host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic rd(int a, output logic [63:0] d);
    @(negedge clk);
    host_addr = 4'(a);
    #1 d = host_rdata;
  endtask

  logic [63:0] status, v;
  int t0, boot_cycles;

  initial begin
    rst = 1; host_we = 0; host_addr = 0; host_wdata = 0;
    build();
    write_binary();
    repeat (5) @(negedge clk);
    rst = 0;
    repeat (8) @(negedge clk);
    wr(1, 64'(BIN));
    t0 = cycle;
    wr(0, 64'h1);
    // boot
    do rd(2, status); while (!status[0]);
    do rd(2, status); while (status[0]);
    boot_cycles = cycle - t0;
    $display("boot of %0d cores took %0d cycles", N, boot_cycles);
    // run until the exception
    do rd(2, status); while (!status[2]);
    check(status[31:16] == 16'h0077, "exception id 0x77");
    check(all_booted_seen, "all cores booted");
    check(!compute_en, "grid stalled during the exception");
    check(boot_cycles > 4 * N, "boot streamed the binary");
    // the host flushes the cache and reads DRAM
    wr(0, 64'h4);
    repeat (2) @(negedge clk);
    do rd(2, status); while (status[1]);
    check(u_dram.read_word(48'(CNT)) == 16'(LIMIT), "counter in DRAM");
    for (int k = 0; k < N; k++) if (k != PK && active[k])
      for (int j = 2; j < LIMIT; j++) begin
        word_t e;
        e = 16'((j - 1) * (k + 3) + k);
        if (DIM_X >= 3 && DIM_Y >= 2 && k == DIM_X + 1) e = e + 16'haaaa;
        check(u_dram.read_word(48'(RES + 256 * j + k)) == e,
              $sformatf("result core %0d vcycle %0d: %h vs %h", k, j,
                        u_dram.read_word(48'(RES + 256 * j + k)), e));
      end
    rd(4, v); check(v > 0, "global stall cycles counted");
    rd(5, v); check(v > 0, $sformatf("cache hits %0d", v));
    rd(6, v); check(v > 0, $sformatf("cache misses %0d", v));
    // resume: the machine carries on (counter LIMIT + 1 raises nothing)
    wr(0, 64'h2);
    repeat (3 * vc_len) @(negedge clk);
    rd(2, status);
    check(!status[2], "no exception after resume");
    check(vcycles >= LIMIT, $sformatf("%0d Vcycles ran", vcycles));
    check(spacing_checks > 0, "Vcycle spacing measured");
    check(stall_cycles > 0, "global stall happened");
    if (DIM_X >= 3 && DIM_Y >= 2) check(drops > 0, "NoC drop happened");
    $display("mechanisms: boot %0d cycles, vcycles %0d, stall cycles %0d, NoC drops %0d",
             boot_cycles, vcycles, stall_cycles, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

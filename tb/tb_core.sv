// tb_core: boots one privileged core over its NoC port and runs a program
// that uses every instruction class: SET, ALU operations with the overflow
// bit (ADD/ADDC), CFG + CUST (a 4-input AND programmed into the CFU), SLICE,
// MUX, predicated local stores and loads, SEND, global store and load, and
// EXPECT. Results leave the core as SEND messages on noc_out (and as global
// memory requests), which are checked against values worked out by hand.
// Each dependent instruction is fetched exactly 10 cycles after its
// producer, the closest spacing the pipeline allows. The test also checks
// that a SEND at pc p leaves the core 6 cycles after its fetch, that a
// Vcycle lasts L + E + S cycles, and that messages received during a Vcycle
// update registers at its end (epilogue SETs).
module tb_core;
  import manticore_pkg::*;
  logic clk = 0, soft_reset, booted, vcycle_start;
  noc_msg_t   noc_in, noc_out;
  gmem_req_t  gmem_req;
  exception_t exc;
  word_t      gmem_rdata;
  int checks = 0, failures = 0;

  core #(.PRIVILEGED(1'b1)) dut (.clk, .soft_reset, .noc_in, .noc_out, .gmem_req, .gmem_rdata,
                                 .exc, .booted, .vcycle_start);
  always #5 clk = ~clk;

  // global memory seen by the core: answers in the cycle of the request
  assign gmem_rdata = gmem_req.valid ? (gmem_req.addr[15:0] ^ 16'hbeef) : 16'h0;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- a tiny assembler ----------------
  logic [63:0] prog [$];
  int          send_pc [$];
  localparam int GAP = 9;   // NOPs after each instruction: producer-consumer distance 10

  function automatic void emit(logic [63:0] i);
    prog.push_back(i);
    for (int k = 0; k < GAP; k++) prog.push_back(64'd0);
  endfunction
  function automatic void set(int rd, int v);
    emit(encode_imm(OP_SET, 11'(rd), '0, '0, '0, 16'(v)));
  endfunction
  function automatic void arith(alu_op_e f, int rd, int a, int b, int c = 0);
    emit(encode(OP_ARITH, 11'(rd), 11'(a), 11'(b), 11'(c), '0, 5'(f)));
  endfunction
  function automatic void send(int rs, int target_rd);
    send_pc.push_back(prog.size());
    emit(encode_imm(OP_SEND, 11'(target_rd), 11'(rs), '0, '0, {8'd4, 8'd3}));
  endfunction

  word_t expected [$];
  int    sends_seen = 0, vcycles = 0, exc_seen = 0, gst_seen = 0, gld_seen = 0;
  logic  observe = 0;   // outputs are meaningful once the soft reset has acted
  int    vstart_cycle [$];
  int    cycle = 0;

  localparam int E = 2, S = 5;

  initial begin
    // r0 = 0, r1 = 5, r2 = 7, r5 = 0xffff, r6 = 1
    set(0, 0); set(1, 5); set(2, 7); set(5, 16'hffff); set(6, 1);
    send(30, 1);                                 // r30: set by last Vcycle's message
    arith(ALU_ADD, 3, 1, 2);                     // r3 = 12
    arith(ALU_ADD, 7, 5, 6);                     // r7 = 0, overflow 1
    arith(ALU_ADDC, 8, 1, 2, 7);                 // r8 = 5 + 7 + 1 = 13
    arith(ALU_ADDC, 18, 1, 2, 1);                // r18 = 12 (no carry in r1)
    arith(ALU_MUX, 19, 1, 2, 6);                 // r19 = r6[0] ? r2 : r1 = 7
    set(9, 16'h8000);                            // truth table of a 4-input AND
    for (int l = 0; l < 16; l++) emit(encode_imm(OP_CFG, '0, 11'd9, '0, '0, {5'd3, 7'd0, 4'(l)}));
    emit(encode(OP_CUST, 11'd10, 11'd1, 11'd2, 11'd3, 11'd8, 5'd3));  // 5&7&12&13 = 4
    emit(encode_imm(OP_SLICE, 11'd11, 11'd2, '0, '0, 16'h0011));       // (7>>1)&3 = 3
    emit(encode_imm(OP_PRED, '0, 11'd6, '0, '0, '0));                 // pred = 1
    emit(encode_imm(OP_LST, '0, 11'd0, 11'd3, '0, 16'd100));          // spm[100] = 12
    emit(encode_imm(OP_LST, '0, 11'd0, 11'd1, '0, 16'd101));          // spm[101] = 5
    emit(encode_imm(OP_PRED, '0, 11'd0, '0, '0, '0));                 // pred = 0
    emit(encode_imm(OP_LST, '0, 11'd0, 11'd2, '0, 16'd101));          // suppressed
    emit(encode_imm(OP_LLD, 11'd12, 11'd0, '0, '0, 16'd100));         // r12 = 12
    emit(encode_imm(OP_LLD, 11'd13, 11'd0, '0, '0, 16'd101));         // r13 = 5
    send(3, 2); send(8, 3); send(18, 4); send(19, 5); send(10, 6); send(11, 7);
    send(12, 8); send(13, 9);
    // global memory: store r3 at 0x0000_0000_1234 (pred 1), load from 0x5678
    emit(encode_imm(OP_PRED, '0, 11'd6, '0, '0, '0));
    set(14, 16'h1234); set(15, 0); set(16, 16'h0001); set(20, 16'h5678);
    emit(encode(OP_GST, '0, 11'd14, 11'd15, 11'd16, 11'd3, '0));
    emit(encode(OP_GLD, 11'd17, 11'd20, 11'd15, 11'd0, '0, '0));
    send(17, 10);                                // 0x5678 ^ 0xbeef
    emit(encode_imm(OP_EXPECT, '0, 11'd1, 11'd1, '0, 16'd5));         // equal: silent
    emit(encode_imm(OP_EXPECT, '0, 11'd1, 11'd2, '0, 16'd9));         // differ: eid 9
  end

  initial begin
    cycle = 0;
    forever @(posedge clk) cycle++;
  end

  // observe the core
  always @(posedge clk) begin
    if (observe && vcycle_start) vstart_cycle.push_back(cycle);
    if (observe && noc_out.valid) begin
      int idx, v;
      v   = vstart_cycle.size() - 1;
      idx = sends_seen % send_pc.size();
      check(noc_out.x == 8'd3 && noc_out.y == 8'd4, "SEND target");
      check(noc_out.rd == 11'(idx + 1), $sformatf("SEND register %0d", noc_out.rd));
      check(cycle == vstart_cycle[v] + send_pc[idx] + 6,
            $sformatf("SEND %0d leaves 6 cycles after fetch", idx));
      if (idx == 0) begin
        if (v > 0) check(noc_out.data == 16'h0055 + 16'(v - 1), "epilogue SET updated r30");
      end else
        check(noc_out.data == expected[idx - 1],
              $sformatf("SEND %0d data %h expected %h", idx, noc_out.data, expected[idx - 1]));
      sends_seen++;
    end
    if (observe && gmem_req.valid) begin
      if (gmem_req.write) begin
        check(gmem_req.addr == 48'h0001_0000_1234 && gmem_req.wdata == 16'd12,
              $sformatf("GST address/data %h %h", gmem_req.addr, gmem_req.wdata));
        gst_seen++;
      end else begin
        check(gmem_req.addr == 48'h0000_0000_5678, "GLD address");
        gld_seen++;
      end
    end
    if (observe && exc.valid) begin
      check(exc.eid == 16'd9, $sformatf("EXPECT exception id %0d", exc.eid));
      exc_seen++;
    end
  end

  task automatic boot_word(word_t w);
    noc_in = '{valid: 1'b1, x: '0, y: '0, rd: '0, data: w};
    @(negedge clk);
    noc_in = '0;
  endtask

  initial begin
    int L;
    expected = '{16'd12, 16'd13, 16'd12, 16'd7, 16'd4, 16'd3, 16'd12, 16'd5, 16'h5678 ^ 16'hbeef};
    noc_in = '0;
    soft_reset = 1;
    repeat (3) @(negedge clk);
    soft_reset = 0;
    observe = 1;
    #1;
    L = prog.size();
    boot_word(16'(L));
    foreach (prog[i]) for (int p = 0; p < 4; p++) boot_word(prog[i][16*p +: 16]);
    boot_word(16'(E));
    boot_word(16'(S));
    check(!booted, "still booting before COUNT_DOWN");
    boot_word(16'd3);
    // four Vcycles; two messages arrive mid-Vcycle each time
    for (int v = 0; v < 4; v++) begin
      wait (vcycle_start);
      @(negedge clk);
      repeat (L / 2) @(negedge clk);
      noc_in = '{valid: 1'b1, x: '0, y: '0, rd: 11'd30, data: 16'h0055 + 16'(v)};
      @(negedge clk);
      noc_in = '{valid: 1'b1, x: '0, y: '0, rd: 11'd31, data: 16'h0066};
      @(negedge clk);
      noc_in = '0;
    end
    wait (vcycle_start);
    repeat (40) @(negedge clk);
    check(sends_seen == 4 * send_pc.size(), $sformatf("%0d sends seen", sends_seen));
    check(gst_seen == 4 && gld_seen == 4 && exc_seen == 4, "global accesses and exceptions per Vcycle");
    for (int i = 1; i < vstart_cycle.size(); i++)
      check(vstart_cycle[i] - vstart_cycle[i-1] == L + E + S, "Vcycle length L + E + S");
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

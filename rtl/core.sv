// core: one Manticore processor, a 14-stage in-order pipeline with no
// interlocks, no branches and no stalls of its own.
//
// Everything that a conventional core checks at run time is left to the
// compiler: there is no forwarding and no scoreboard, so a result can be read
// by an instruction fetched 10 or more cycles after its producer (the
// compiler fills the gap with NOPs or independent work); conditional
// behaviour is expressed with predicated stores and the MUX operation. The
// core runs its program once per virtual cycle (Vcycle), then executes the
// SET instructions made from received messages, then sleeps; see
// core_controller.
//
// Stages (cycle offsets from the fetch of an instruction), following the
// paper's split into fetch 3 / decode 3 / execute 4 / memory 3 / writeback 1:
//   0      PC presented to instruction memory
//   1-2    instruction memory read (2 cycles), decoded at the end of 2
//   3-4    register file read (4 ports, 2 cycles)
//   5      operands ready: ALU/CFU start; scratchpad address = rs1 + imm;
//          PRED updates the predicate; SEND, CFG, EXPECT, GLD and GST issue
//   6-8    ALU / CFU (4 cycles in all)
//   9-11   scratchpad: store commits at 9 (if the predicate was set at 5);
//          load data is ready at 12 (2-cycle read + 1 reshape)
//   12     result selected (ALU, CFU, scratchpad or global load data)
//   13     register file write
//
// PRIVILEGED = 1 gives the privileged core: it alone executes GLD, GST and
// EXPECT. These raise a request that the control domain answers by stopping
// the compute clock (global stall), so from the program's view a global
// access has the same fixed latency as everything else. The request is
// registered at the end of stage 5 and held while the clock is stopped; the
// load data is taken from gmem_rdata on the first clock edge after the
// request (the one that ends the stall) and written back like a local load.
//
// NoC side: noc_in is the message delivered by this core's switch; before the
// core has booted it carries boot words, afterwards (register, value)
// updates. noc_out is this core's outgoing message, registered at the end of
// stage 5 of a SEND (target core in imm16 = {y, x}).
module core
  import manticore_pkg::*;
#(
  parameter bit PRIVILEGED = 1'b0
) (
  input  logic       clk,
  input  logic       soft_reset,
  input  noc_msg_t   noc_in,
  output noc_msg_t   noc_out,
  output gmem_req_t  gmem_req,
  input  word_t      gmem_rdata,
  output exception_t exc,
  output logic       booted,
  output logic       vcycle_start
);

  localparam int unsigned S_OPND = 5;   // operands available
  localparam int unsigned S_SPM  = 9;   // scratchpad address presented
  localparam int unsigned S_SEL  = 12;  // result selected
  localparam int unsigned S_WB   = 13;  // register file written

  // ---------------- control: boot, countdown, active, sleep ----------------
  pc_t   pc, prog_len, epi_len;
  word_t sleep_len, countdown;
  logic  fetch, start;

  logic               boot_we, recv_we;
  pc_t                boot_waddr, recv_waddr, recv_count;
  logic [INSTR_W-1:0] boot_wdata, recv_wdata;

  boot_receiver u_boot (
    .clk, .rst(soft_reset), .enable(!booted),
    .word_valid(noc_in.valid), .word(noc_in.data),
    .imem_we(boot_we), .imem_waddr(boot_waddr), .imem_wdata(boot_wdata),
    .prog_len, .epi_len, .sleep_len, .start, .countdown
  );

  core_controller u_ctrl (
    .clk, .soft_reset, .start, .countdown, .prog_len, .epi_len, .sleep_len,
    .pc, .fetch, .vcycle_start, .booted
  );

  message_receiver u_recv (
    .clk, .rst(soft_reset), .enable(booted),
    .msg_valid(noc_in.valid), .msg_rd(noc_in.rd), .msg_data(noc_in.data),
    .base(prog_len), .vcycle_start,
    .we(recv_we), .waddr(recv_waddr), .wdata(recv_wdata), .count(recv_count)
  );

  // ---------------- fetch ----------------
  logic [INSTR_W-1:0] instr;
  logic [2:1]         fvalid;

  instruction_memory u_imem (
    .clk, .raddr(pc), .rdata(instr),
    .we(booted ? recv_we : boot_we),
    .waddr(booted ? recv_waddr : boot_waddr),
    .wdata(booted ? recv_wdata : boot_wdata)
  );

  always_ff @(posedge clk) begin
    if (soft_reset) fvalid <= '0;
    else            fvalid <= {fvalid[1], fetch};
  end

  // ---------------- decode and the control pipeline ----------------
  ctrl_t dec;
  ctrl_t ctl [3:S_WB];

  decoder #(.PRIVILEGED(PRIVILEGED)) u_dec (.instr, .ctrl(dec));

  always_ff @(posedge clk) begin
    if (soft_reset) begin
      for (int s = 3; s <= S_WB; s++) ctl[s] <= '0;
    end else begin
      ctl[3] <= fvalid[2] ? dec : '0;
      for (int s = 4; s <= S_WB; s++) ctl[s] <= ctl[s-1];
    end
  end

  // ---------------- register file ----------------
  raddr_t  rf_raddr [4];
  regval_t rf_rdata [4];
  logic    wb_we;
  raddr_t  wb_addr;
  regval_t wb_data;

  assign rf_raddr[0] = ctl[3].rs1;
  assign rf_raddr[1] = ctl[3].rs2;
  assign rf_raddr[2] = ctl[3].rs3;
  assign rf_raddr[3] = ctl[3].rs4;

  register_file u_rf (
    .clk, .raddr(rf_raddr), .rdata(rf_rdata),
    .we(wb_we), .waddr(wb_addr), .wdata(wb_data)
  );

  // ---------------- execute ----------------
  ctrl_t   cx;
  regval_t alu_y;
  word_t   cfu_y;
  logic    pred;

  assign cx = ctl[S_OPND];

  alu u_alu (
    .clk, .op(cx.alu_op), .a(rf_rdata[0]), .b(rf_rdata[1]), .c(rf_rdata[2]),
    .imm(cx.imm), .y(alu_y)
  );

  cfu u_cfu (
    .clk, .funct(cx.funct),
    .op1(rf_rdata[0][15:0]), .op2(rf_rdata[1][15:0]),
    .op3(rf_rdata[2][15:0]), .op4(rf_rdata[3][15:0]),
    .y(cfu_y),
    .cfg_we(cx.is_cfg), .cfg_lane(cx.imm[3:0]), .cfg_funct(cx.funct),
    .cfg_data(rf_rdata[0][15:0])
  );

  // Scratchpad address, store data and predicate travel from stage 5 to 9.
  logic [SPM_AW-1:0] maddr [S_OPND+1:S_SPM];
  word_t             mdata [S_OPND+1:S_SPM];
  logic              mpred [S_OPND+1:S_SPM];

  always_ff @(posedge clk) begin
    maddr[S_OPND+1] <= SPM_AW'(rf_rdata[0][15:0] + cx.imm);
    mdata[S_OPND+1] <= rf_rdata[1][15:0];
    // A PRED immediately ahead of a store takes effect for it.
    mpred[S_OPND+1] <= pred;
    for (int s = S_OPND+2; s <= S_SPM; s++) begin
      maddr[s] <= maddr[s-1];
      mdata[s] <= mdata[s-1];
      mpred[s] <= mpred[s-1];
    end
  end

  always_ff @(posedge clk) begin
    if (soft_reset)      pred <= 1'b0;
    else if (cx.is_pred) pred <= rf_rdata[0][0];
  end

  // SEND, global memory and exceptions are registered at the end of stage 5.
  always_ff @(posedge clk) begin
    if (soft_reset) begin
      noc_out  <= '0;
      gmem_req <= '0;
      exc      <= '0;
    end else begin
      noc_out.valid <= cx.is_send;
      noc_out.x     <= cx.imm[7:0];
      noc_out.y     <= cx.imm[15:8];
      noc_out.rd    <= cx.rd;
      noc_out.data  <= rf_rdata[0][15:0];

      gmem_req.valid <= cx.is_gld || (cx.is_gst && pred);
      gmem_req.write <= cx.is_gst;
      gmem_req.addr  <= {rf_rdata[2][15:0], rf_rdata[1][15:0], rf_rdata[0][15:0]};
      gmem_req.wdata <= rf_rdata[3][15:0];

      exc.valid <= cx.is_expect && (rf_rdata[0][15:0] != rf_rdata[1][15:0]);
      exc.eid   <= cx.imm;
    end
  end

  // ---------------- memory ----------------
  word_t spm_rdata;
  ctrl_t cm;

  assign cm = ctl[S_SPM];

  scratchpad u_spm (
    .clk, .raddr(maddr[S_SPM]),
    .we(cm.is_lst && mpred[S_SPM]), .waddr(maddr[S_SPM]), .wdata(mdata[S_SPM]),
    .rdata(spm_rdata)
  );

  // Global load data is captured on the edge that ends the global stall,
  // i.e. when the requester moves from stage 6 to 7, then follows it.
  word_t   gdata [S_OPND+2:S_SEL];
  regval_t xres  [S_SPM:S_SEL];

  always_ff @(posedge clk) begin
    gdata[S_OPND+2] <= gmem_rdata;
    for (int s = S_OPND+3; s <= S_SEL; s++) gdata[s] <= gdata[s-1];
  end

  assign xres[S_SPM] = ctl[S_SPM].use_cfu ? {1'b0, cfu_y} : alu_y;
  always_ff @(posedge clk)
    for (int s = S_SPM+1; s <= S_SEL; s++) xres[s] <= xres[s-1];

  // ---------------- writeback ----------------
  ctrl_t   cw;
  regval_t sel;

  assign cw = ctl[S_SEL];

  always_comb begin
    if (cw.is_lld)      sel = {1'b0, spm_rdata};
    else if (cw.is_gld) sel = {1'b0, gdata[S_SEL]};
    else                sel = xres[S_SEL];
  end

  always_ff @(posedge clk) begin
    wb_addr <= cw.rd;
    wb_data <= sel;
  end
  assign wb_we = ctl[S_WB].writes_rd;

  // The 14-stage depth of the paper: fetch at 0, register write at 13.
  if (S_WB + 1 != PIPE_DEPTH) begin : g_depth_check
    $error("pipeline depth differs from PIPE_DEPTH");
  end

endmodule

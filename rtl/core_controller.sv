// core_controller: the state machine that sequences one core.
//
// States (the paper's figure names ACTIVE, SLEEP and COUNT DOWN; BOOT is the
// boot state of its bootloader description; the transitions are this
// design's own):
//   BOOT       after a soft reset; no instruction is fetched (the pipeline
//              runs no-ops) while the boot receiver fills instruction memory.
//   COUNTDOWN  entered on the COUNT_DOWN word; waits that many cycles. Each
//              core gets a value that makes all cores leave COUNTDOWN in the
//              same cycle, whatever order the bootloader reached them in.
//   ACTIVE     fetches pc = 0 .. prog_len + epi_len - 1: the program, then
//              the SET instructions made from received messages.
//   SLEEP      sleep_len idle cycles; then the next Vcycle starts at pc 0.
// A Vcycle therefore lasts prog_len + epi_len + sleep_len cycles on every
// core, which keeps all cores in lock step without any runtime barrier.
//
// Outputs: pc and fetch (pc is valid), vcycle_start (the cycle pc 0 is
// fetched), booted (out of BOOT).
module core_controller
  import manticore_pkg::*;
(
  input  logic  clk,
  input  logic  soft_reset,
  input  logic  start,        // COUNT_DOWN word arrived
  input  word_t countdown,
  input  pc_t   prog_len,
  input  pc_t   epi_len,
  input  word_t sleep_len,
  output pc_t   pc,
  output logic  fetch,
  output logic  vcycle_start,
  output logic  booted
);

  typedef enum logic [1:0] {S_BOOT, S_COUNTDOWN, S_ACTIVE, S_SLEEP} cstate_e;

  cstate_e state;
  word_t   timer;
  pc_t     last;

  assign last         = prog_len + epi_len - 1'b1;
  assign fetch        = state == S_ACTIVE;
  assign vcycle_start = fetch && pc == '0;
  assign booted       = state != S_BOOT;

  always_ff @(posedge clk) begin
    if (soft_reset) begin
      state <= S_BOOT;
      pc    <= '0;
      timer <= '0;
    end else begin
      unique case (state)
        S_BOOT: if (start) begin
          timer <= countdown;
          pc    <= '0;
          state <= (countdown == '0) ? S_ACTIVE : S_COUNTDOWN;
        end
        S_COUNTDOWN: begin
          timer <= timer - 1'b1;
          if (timer == 16'd1) state <= S_ACTIVE;
        end
        S_ACTIVE: begin
          if (pc == last) begin
            pc <= '0;
            if (sleep_len != '0) begin
              timer <= sleep_len;
              state <= S_SLEEP;
            end
          end else begin
            pc <= pc + 1'b1;
          end
        end
        S_SLEEP: begin
          timer <= timer - 1'b1;
          if (timer == 16'd1) state <= S_ACTIVE;
        end
      endcase
    end
  end

endmodule

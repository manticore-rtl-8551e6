// boot_receiver: parses the boot stream a core receives over the NoC.
//
// While its core is in the boot state, every message carries one 16-bit word
// of this stream (layout as in the paper):
//   INSTRUCTION_LENGTH                     number of instructions L
//   INSTRUCTION[0..L-1]                    each as four 16-bit words,
//                                          least significant word first
//   EPILOGUE_LENGTH                        messages expected per Vcycle
//   SLEEP_LENGTH                           idle cycles closing each Vcycle
//   COUNT_DOWN                             cycles to wait before starting
// Instructions are written to instruction memory addresses 0..L-1 as soon as
// their fourth word arrives. The three lengths are held in registers; the
// COUNT_DOWN word is passed on as a one-cycle start pulse to the core
// controller. rst (the soft reset) restarts parsing.
module boot_receiver
  import manticore_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               enable,         // core is in its boot state
  input  logic               word_valid,
  input  word_t              word,
  output logic               imem_we,
  output pc_t                imem_waddr,
  output logic [INSTR_W-1:0] imem_wdata,
  output pc_t                prog_len,
  output pc_t                epi_len,
  output word_t              sleep_len,
  output logic               start,          // COUNT_DOWN received
  output word_t              countdown
);

  typedef enum logic [2:0] {B_LEN, B_INSTR, B_EPI, B_SLEEP, B_COUNT, B_DONE} bstate_e;

  bstate_e      state;
  logic [1:0]   part;
  logic [47:0]  low;      // first three words of the current instruction
  pc_t          idx;
  logic         take;

  assign take       = enable && word_valid;
  assign imem_we    = take && state == B_INSTR && part == 2'd3;
  assign imem_waddr = idx;
  assign imem_wdata = {word, low};
  assign start      = take && state == B_COUNT;
  assign countdown  = word;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= B_LEN;
      part  <= '0;
      idx   <= '0;
    end else if (take) begin
      unique case (state)
        B_LEN: begin
          prog_len <= pc_t'(word);
          idx      <= '0;
          part     <= '0;
          state    <= (word == '0) ? B_EPI : B_INSTR;
        end
        B_INSTR: begin
          low[16*part +: 16] <= word;
          part <= part + 2'd1;
          if (part == 2'd3) begin
            idx <= idx + 1'b1;
            if (idx + 1'b1 == prog_len) state <= B_EPI;
          end
        end
        B_EPI: begin
          epi_len <= pc_t'(word);
          state   <= B_SLEEP;
        end
        B_SLEEP: begin
          sleep_len <= word;
          state     <= B_COUNT;
        end
        B_COUNT: state <= B_DONE;
        default: ;
      endcase
    end
  end

endmodule

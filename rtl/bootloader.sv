// bootloader: copies the program binary from DRAM into the cores over the
// NoC, then starts all cores in the same cycle.
//
// The binary (made by the compiler, placed in DRAM by the host) holds, for
// each core in index order 0 .. NCORES-1 (index = y * DIM_X + x), that core's
// boot stream without its last word: INSTRUCTION_LENGTH, the instructions as
// four 16-bit words each, EPILOGUE_LENGTH and SLEEP_LENGTH. The bootloader
// reads it word by word through the cache and sends every word as one NoC
// message to its core. This much is the paper's; the binary layout, the
// one-read-at-a-time loop and the countdown arithmetic are this design's.
//
// The time to read DRAM is not predictable, so the cores cannot simply start
// when their stream ends. Instead, once every stream has been sent, the
// bootloader sends each core its COUNT_DOWN word, one core per cycle. Core k
// receives it at cycle T + k + 1 + hops(k), where hops(k) is the distance on
// the torus from the bootloader's injection point (the privileged core's
// switch at PRIV_X, PRIV_Y) to the core. Its countdown is
//   (NCORES - 1 - k) + (HOPS_MAX - hops(k)),
// so every core leaves its countdown in the same cycle.
//
// Interface: `start` with `base` (word address of the binary) begins a boot;
// `busy` is high until the last countdown word has been sent. `inj` is the
// message injected into the network (valid for one cycle per word).
module bootloader
  import manticore_pkg::*;
#(
  parameter int unsigned DIM_X  = 15,
  parameter int unsigned DIM_Y  = 15,
  parameter int unsigned PRIV_X = DIM_X - 1,
  parameter int unsigned PRIV_Y = 0,
  localparam int unsigned NCORES   = DIM_X * DIM_Y,
  localparam int unsigned HOPS_MAX = (DIM_X - 1) + (DIM_Y - 1)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  input  logic [GADDR_W-1:0] base,
  output logic               busy,
  // cache access port
  output logic               mem_start,
  output logic [GADDR_W-1:0] mem_addr,
  input  logic               mem_done,
  input  word_t              mem_rdata,
  // NoC injection
  output noc_msg_t           inj
);

  typedef enum logic [2:0] {L_IDLE, L_READ, L_WAIT, L_SEND, L_COUNT} lstate_e;
  typedef enum logic [1:0] {F_LEN, F_BODY, F_EPI, F_SLEEP} field_e;

  lstate_e            state;
  field_e             field;
  logic [GADDR_W-1:0] ptr;
  logic [COORD_W-1:0] cx, cy;      // current core
  logic [17:0]        left;        // instruction words still to send
  word_t              word_q;

  function automatic int unsigned hops(int unsigned x, int unsigned y);
    return ((x + DIM_X - PRIV_X) % DIM_X) + ((y + DIM_Y - PRIV_Y) % DIM_Y);
  endfunction

  function automatic word_t count_of(logic [COORD_W-1:0] x, logic [COORD_W-1:0] y);
    int unsigned k;
    k = int'(y) * DIM_X + int'(x);
    return word_t'((NCORES - 1 - k) + (HOPS_MAX - hops(int'(x), int'(y))));
  endfunction

  logic last_core;
  assign last_core = (cx == COORD_W'(DIM_X - 1)) && (cy == COORD_W'(DIM_Y - 1));
  assign busy      = state != L_IDLE;
  assign mem_addr  = ptr;

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= L_IDLE;
      mem_start <= 1'b0;
      inj       <= '0;
    end else begin
      mem_start <= 1'b0;
      inj       <= '0;
      unique case (state)
        L_IDLE: if (start) begin
          ptr   <= base;
          cx    <= '0;
          cy    <= '0;
          field <= F_LEN;
          state <= L_READ;
        end
        L_READ: begin
          mem_start <= 1'b1;
          state     <= L_WAIT;
        end
        L_WAIT: if (mem_done) begin
          word_q <= mem_rdata;
          ptr    <= ptr + 1'b1;
          state  <= L_SEND;
        end
        L_SEND: begin
          inj <= '{valid: 1'b1, x: cx, y: cy, rd: '0, data: word_q};
          state <= L_READ;
          unique case (field)
            F_LEN: begin
              left  <= {word_q, 2'b00};
              field <= (word_q == '0) ? F_EPI : F_BODY;
            end
            F_BODY: begin
              left <= left - 1'b1;
              if (left == 18'd1) field <= F_EPI;
            end
            F_EPI:   field <= F_SLEEP;
            F_SLEEP: begin
              field <= F_LEN;
              if (last_core) begin
                cx    <= '0;
                cy    <= '0;
                state <= L_COUNT;
              end else if (cx == COORD_W'(DIM_X - 1)) begin
                cx <= '0;
                cy <= cy + 1'b1;
              end else begin
                cx <= cx + 1'b1;
              end
            end
          endcase
        end
        L_COUNT: begin
          inj <= '{valid: 1'b1, x: cx, y: cy, rd: '0, data: count_of(cx, cy)};
          if (last_core) state <= L_IDLE;
          else if (cx == COORD_W'(DIM_X - 1)) begin
            cx <= '0;
            cy <= cy + 1'b1;
          end else begin
            cx <= cx + 1'b1;
          end
        end
        default: state <= L_IDLE;
      endcase
    end
  end

endmodule

// cache: the 128 KiB direct-mapped, write-allocate, write-back cache that
// stands between global memory users (the privileged core, the bootloader)
// and one DRAM bank.
//
// Organisation (size, mapping and write policy from the paper; the line
// size is this design's choice): LINES lines of LINE_BITS bits, i.e. 4096
// lines of 16 sixteen-bit words, which is four 4096 x 64 memories side by
// side, as the paper's four UltraRAMs. A global address is a 48-bit word
// address: bits [3:0] pick the word in the line, [15:4] the line, the rest
// is the tag. The tag, valid and dirty bits are kept next to the data.
//
// Protocol: a one-cycle `start` with write/addr/wdata launches an access;
// `done` pulses one cycle when it has finished, and a load's data is then in
// `rdata`, which holds until the next access. Accesses are not pipelined. A
// hit takes 3 cycles from start to done; a miss first writes the victim
// line back if it is dirty, then fetches the line from DRAM. `flush_start`
// writes back every dirty line (the host does this before it reads DRAM
// after an exception); `flush_busy` is high meanwhile.
//
// DRAM side: a request is taken when dram_req_valid and dram_req_ready are
// both high; a read is answered later by one dram_resp_valid cycle carrying
// the whole line. Addresses on this side are line addresses.
module cache
  import manticore_pkg::*;
#(
  parameter int unsigned LINES     = 4096,
  parameter int unsigned LINE_BITS = 256,
  localparam int unsigned WPL      = LINE_BITS / 16,       // words per line
  localparam int unsigned OFF_W    = $clog2(WPL),
  localparam int unsigned IDX_W    = $clog2(LINES),
  localparam int unsigned TAG_W    = GADDR_W - OFF_W - IDX_W,
  localparam int unsigned LADDR_W  = GADDR_W - OFF_W
) (
  input  logic                 clk,
  input  logic                 rst,
  // access port
  input  logic                 start,
  input  logic                 write,
  input  logic [GADDR_W-1:0]   addr,
  input  word_t                wdata,
  output logic                 done,
  output word_t                rdata,
  output logic                 hit,          // pulses with done on a hit
  output logic                 miss,         // pulses with done on a miss
  input  logic                 flush_start,
  output logic                 flush_busy,
  // DRAM port
  output logic                 dram_req_valid,
  input  logic                 dram_req_ready,
  output logic                 dram_req_write,
  output logic [LADDR_W-1:0]   dram_req_addr,
  output logic [LINE_BITS-1:0] dram_req_wdata,
  input  logic                 dram_resp_valid,
  input  logic [LINE_BITS-1:0] dram_resp_rdata
);

  typedef enum logic [2:0] {
    C_IDLE, C_LOOKUP, C_CHECK, C_WB, C_FILL, C_WAIT, C_FLUSH_RD, C_FLUSH_CHK
  } cstate_e;

  logic [LINE_BITS-1:0] data  [LINES];
  logic [TAG_W-1:0]     tags  [LINES];
  logic [LINES-1:0]     valid;
  logic [LINES-1:0]     dirty;

  cstate_e              state;
  logic                 wr_q;
  logic [GADDR_W-1:0]   addr_q;
  word_t                wdata_q;
  logic [LINE_BITS-1:0] line_q;
  logic [TAG_W-1:0]     tag_q;
  logic [IDX_W-1:0]     fidx;      // flush position

  logic [OFF_W-1:0] off;
  logic [IDX_W-1:0] idx;
  logic [TAG_W-1:0] tag;

  assign off = addr_q[OFF_W-1:0];
  assign idx = addr_q[OFF_W +: IDX_W];
  assign tag = addr_q[GADDR_W-1 -: TAG_W];

  assign flush_busy = state == C_FLUSH_RD || state == C_FLUSH_CHK;

  always_ff @(posedge clk) begin
    if (rst) begin
      state          <= C_IDLE;
      valid          <= '0;
      dirty          <= '0;
      done           <= 1'b0;
      hit            <= 1'b0;
      miss           <= 1'b0;
      dram_req_valid <= 1'b0;
    end else begin
      done <= 1'b0;
      hit  <= 1'b0;
      miss <= 1'b0;
      unique case (state)
        C_IDLE: begin
          if (start) begin
            wr_q    <= write;
            addr_q  <= addr;
            wdata_q <= wdata;
            state   <= C_LOOKUP;
          end else if (flush_start) begin
            fidx  <= '0;
            state <= C_FLUSH_RD;
          end
        end
        C_LOOKUP: begin
          line_q <= data[idx];
          tag_q  <= tags[idx];
          state  <= C_CHECK;
        end
        C_CHECK: begin
          if (valid[idx] && tag_q == tag) begin
            if (wr_q) begin
              data[idx][16*off +: 16] <= wdata_q;
              dirty[idx] <= 1'b1;
            end else begin
              rdata <= line_q[16*off +: 16];
            end
            done  <= 1'b1;
            hit   <= 1'b1;
            state <= C_IDLE;
          end else if (valid[idx] && dirty[idx]) begin
            dram_req_valid <= 1'b1;
            dram_req_write <= 1'b1;
            dram_req_addr  <= {tag_q, idx};
            dram_req_wdata <= line_q;
            state          <= C_WB;
          end else begin
            dram_req_valid <= 1'b1;
            dram_req_write <= 1'b0;
            dram_req_addr  <= {tag, idx};
            state          <= C_FILL;
          end
        end
        C_WB: if (dram_req_ready) begin
          dram_req_write <= 1'b0;
          dram_req_addr  <= {tag, idx};
          state          <= C_FILL;
        end
        C_FILL: if (dram_req_ready) begin
          dram_req_valid <= 1'b0;
          state          <= C_WAIT;
        end
        C_WAIT: if (dram_resp_valid) begin
          logic [LINE_BITS-1:0] l;
          l = dram_resp_rdata;
          if (wr_q) l[16*off +: 16] = wdata_q;
          else      rdata <= dram_resp_rdata[16*off +: 16];
          data[idx]  <= l;
          tags[idx]  <= tag;
          valid[idx] <= 1'b1;
          dirty[idx] <= wr_q;
          done  <= 1'b1;
          miss  <= 1'b1;
          state <= C_IDLE;
        end
        C_FLUSH_RD: begin
          // dram_req_valid is low here: the previous write-back was taken.
          line_q <= data[fidx];
          tag_q  <= tags[fidx];
          state  <= C_FLUSH_CHK;
        end
        C_FLUSH_CHK: begin
          if (dram_req_valid) begin
            if (dram_req_ready) begin
              dram_req_valid <= 1'b0;
              fidx  <= fidx + 1'b1;
              state <= (fidx == IDX_W'(LINES - 1)) ? C_IDLE : C_FLUSH_RD;
            end
          end else if (valid[fidx] && dirty[fidx]) begin
            dram_req_valid <= 1'b1;
            dram_req_write <= 1'b1;
            dram_req_addr  <= {tag_q, fidx};
            dram_req_wdata <= line_q;
            dirty[fidx]    <= 1'b0;
          end else begin
            fidx  <= fidx + 1'b1;
            state <= (fidx == IDX_W'(LINES - 1)) ? C_IDLE : C_FLUSH_RD;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule

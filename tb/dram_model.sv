// dram_model: behavioural model of one DRAM bank behind a line-wide port
// (not synthesizable; DRAM is outside the design). Lines are kept in an
// associative array, so any address can be used; an unwritten line reads
// as a function of its address. Requests are accepted when `ready`, which
// is low one cycle in four; a read is answered LATENCY cycles after it was
// accepted. Testbenches use write_word / read_word to load and inspect
// memory directly.
module dram_model #(
  parameter int unsigned LINE_BITS = 256,
  parameter int unsigned ADDR_W    = 44,
  parameter int unsigned LATENCY   = 12
) (
  input  logic                 clk,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_write,
  input  logic [ADDR_W-1:0]    req_addr,
  input  logic [LINE_BITS-1:0] req_wdata,
  output logic                 resp_valid,
  output logic [LINE_BITS-1:0] resp_rdata
);
  localparam int unsigned WPL = LINE_BITS / 16;

  logic [LINE_BITS-1:0] mem [logic [ADDR_W-1:0]];
  logic [LINE_BITS-1:0] pend_data [$];
  int                   pend_due  [$];
  int                   cycle = 0;
  int                   reads = 0, writes = 0;

  function automatic logic [LINE_BITS-1:0] line(logic [ADDR_W-1:0] a);
    logic [LINE_BITS-1:0] l;
    if (mem.exists(a)) return mem[a];
    for (int w = 0; w < WPL; w++) l[16*w +: 16] = 16'(a * 7 + 64'(w) * 3 + 1);
    return l;
  endfunction

  function automatic void write_word(logic [ADDR_W+3:0] waddr, logic [15:0] d);
    logic [LINE_BITS-1:0] l;
    l = line(waddr[ADDR_W+3:4]);
    l[16*waddr[3:0] +: 16] = d;
    mem[waddr[ADDR_W+3:4]] = l;
  endfunction

  function automatic logic [15:0] read_word(logic [ADDR_W+3:0] waddr);
    logic [LINE_BITS-1:0] l;
    l = line(waddr[ADDR_W+3:4]);
    return l[16*waddr[3:0] +: 16];
  endfunction

  assign req_ready = (cycle % 4) != 3;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    resp_valid <= 1'b0;
    // the controller's outputs are undefined until its reset has acted on
    // the first edge, so that edge carries no request
    if (cycle > 0 && req_valid && req_ready) begin
      if (req_write) begin
        mem[req_addr] = req_wdata;
        writes++;
      end else begin
        pend_data.push_back(line(req_addr));
        pend_due.push_back(cycle + LATENCY);
        reads++;
      end
    end
    if (pend_due.size() > 0 && pend_due[0] <= cycle) begin
      void'(pend_due.pop_front());
      resp_rdata <= pend_data.pop_front();
      resp_valid <= 1'b1;
    end
  end
endmodule

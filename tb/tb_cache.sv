// tb_cache: random 16-bit loads and stores through a small (16-line) cache
// in front of the DRAM model, so that hits, clean misses and dirty
// evictions all happen often. Every load is compared with a shadow copy of
// memory; hit/miss reporting is compared with a model of the tags; a hit
// must complete 3 cycles after start. At the end a flush must leave DRAM
// equal to the shadow copy.
module tb_cache;
  import manticore_pkg::*;
  localparam int LINES = 16;
  logic clk = 0, rst;
  logic start, write, done, hit, miss, flush_start, flush_busy;
  logic [47:0] addr;
  word_t wdata, rdata;
  logic dreq_valid, dreq_ready, dreq_write, dresp_valid;
  logic [43:0] dreq_addr;
  logic [255:0] dreq_wdata, dresp_rdata;
  int checks = 0, failures = 0, hits = 0, misses = 0, evictions = 0;

  cache #(.LINES(LINES)) dut (.clk, .rst, .start, .write, .addr, .wdata, .done, .rdata, .hit, .miss,
    .flush_start, .flush_busy, .dram_req_valid(dreq_valid), .dram_req_ready(dreq_ready),
    .dram_req_write(dreq_write), .dram_req_addr(dreq_addr), .dram_req_wdata(dreq_wdata),
    .dram_resp_valid(dresp_valid), .dram_resp_rdata(dresp_rdata));

  dram_model u_dram (.clk, .req_valid(dreq_valid), .req_ready(dreq_ready), .req_write(dreq_write),
    .req_addr(dreq_addr), .req_wdata(dreq_wdata), .resp_valid(dresp_valid), .resp_rdata(dresp_rdata));

  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  word_t       shadow [logic [47:0]];
  logic [43:0] tagm   [LINES];
  logic        validm [LINES];

  function automatic word_t mem_word(logic [47:0] a);
    if (!shadow.exists(a)) shadow[a] = u_dram.read_word(a);
    return shadow[a];
  endfunction

  initial begin
    rst = 1; start = 0; flush_start = 0; write = 0; addr = 0; wdata = 0;
    for (int i = 0; i < LINES; i++) validm[i] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 3000; t++) begin
      logic [47:0] a;
      logic        w, exp_hit;
      int          lat;
      word_t       d;
      // 64 lines' worth of addresses, a few far away (large tags)
      a = 48'($urandom % 1024);
      if (t % 17 == 0) a = a | 48'h0123_0000_0000;
      w = $urandom % 2;
      d = 16'($urandom);
      exp_hit = validm[a[7:4]] && tagm[a[7:4]] == a[47:4];
      if (!exp_hit && validm[a[7:4]]) evictions++;
      validm[a[7:4]] = 1; tagm[a[7:4]] = a[47:4];
      start = 1; write = w; addr = a; wdata = d;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      check(hit == exp_hit && miss == !exp_hit, $sformatf("hit/miss at %h", a));
      if (exp_hit) begin check(lat == 3, $sformatf("hit latency %0d", lat)); hits++; end
      else misses++;
      if (w) begin void'(mem_word(a)); shadow[a] = d; end
      else   check(rdata == mem_word(a), $sformatf("load %h got %h exp %h", a, rdata, mem_word(a)));
      @(negedge clk);
    end
    // write everything back and compare DRAM with the shadow copy
    flush_start = 1;
    @(negedge clk);
    flush_start = 0;
    @(negedge clk);
    while (flush_busy) @(negedge clk);
    foreach (shadow[a]) check(u_dram.read_word(a) == shadow[a], $sformatf("DRAM after flush at %h", a));
    check(hits > 100 && misses > 100 && evictions > 100, "hits, misses and evictions all happened");
    $display("hits %0d misses %0d", hits, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

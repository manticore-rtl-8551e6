// tb_noc_switch: drives random traffic into the three inputs of switch
// (2, 1) and compares its three outputs, cycle by cycle, with a reference
// model of dimension-ordered routing and the fixed priorities (Y input over
// X input over the core). Checks the one-cycle hop latency, that routing
// never sends a message the wrong way, and that collisions drop messages
// (and raise `dropped`) rather than delay them.
module tb_noc_switch;
  import manticore_pkg::*;
  localparam int X = 2, Y = 1;
  logic clk = 0, rst, dropped;
  noc_msg_t x_in, y_in, inj, x_out, y_out, deliver;
  noc_msg_t ex, ey, el;
  logic     ed;
  int checks = 0, failures = 0, drops = 0;

  noc_switch #(.X(X), .Y(Y)) dut (.clk, .rst, .x_in, .y_in, .inj, .x_out, .y_out, .deliver, .dropped);
  always #5 clk = ~clk;

  function automatic noc_msg_t rnd(bit in_column);
    noc_msg_t m;
    m.valid = ($urandom % 2) == 0;
    m.x     = (($urandom % 3) == 0) ? 8'(X) : 8'($urandom % 4);
    m.y     = (($urandom % 3) == 0) ? 8'(Y) : 8'($urandom % 4);
    if (in_column) m.x = 8'(X);          // Y-link traffic is in its column
    m.rd   = 11'($urandom);
    m.data = 16'($urandom);
    return m;
  endfunction

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    rst = 1; x_in = '0; y_in = '0; inj = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 5000; t++) begin
      x_in = rnd(0); y_in = rnd(1); inj = rnd(0);
      // reference model
      ex = '0; ey = '0; el = '0; ed = 0;
      if (y_in.valid) begin if (y_in.y != 8'(Y)) ey = y_in; else el = y_in; end
      if (x_in.valid) begin
        if (x_in.x != 8'(X)) ex = x_in;
        else if (x_in.y != 8'(Y)) begin if (ey.valid) ed = 1; else ey = x_in; end
        else begin if (el.valid) ed = 1; else el = x_in; end
      end
      if (inj.valid) begin
        if (inj.x != 8'(X)) begin if (ex.valid) ed = 1; else ex = inj; end
        else if (inj.y != 8'(Y)) begin if (ey.valid) ed = 1; else ey = inj; end
        else begin if (el.valid) ed = 1; else el = inj; end
      end
      @(negedge clk);
      check(x_out == ex, "X output");
      check(y_out == ey, "Y output");
      check(deliver == el, "local output");
      check(dropped == ed, "dropped flag");
      check(!x_out.valid || x_out.x != 8'(X), "X output leaves the column only if x differs");
      check(!deliver.valid || (deliver.x == 8'(X) && deliver.y == 8'(Y)), "delivered here");
      if (ed) drops++;
    end
    check(drops > 0, "collisions happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

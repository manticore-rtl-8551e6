// tb_message_receiver: sends bursts of messages in several Vcycles and checks
// that each becomes "SET rd, value" written to instruction memory at
// base + n, n restarting at every Vcycle, with a message in the
// vcycle_start cycle landing in slot 0.
module tb_message_receiver;
  import manticore_pkg::*;
  logic clk = 0, rst, enable, msg_valid, vcycle_start, we;
  raddr_t msg_rd;
  word_t  msg_data;
  pc_t    base, waddr, count;
  logic [63:0] wdata;
  int checks = 0, failures = 0;

  message_receiver dut (.clk, .rst, .enable, .msg_valid, .msg_rd, .msg_data, .base,
                        .vcycle_start, .we, .waddr, .wdata, .count);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    rst = 1; enable = 0; msg_valid = 0; vcycle_start = 0; base = 12'd100;
    repeat (2) @(negedge clk);
    rst = 0; enable = 1;
    for (int v = 0; v < 20; v++) begin
      int n, gap;
      n = 1 + int'($urandom % 8);
      base = 12'(50 + v);
      // first cycle of the Vcycle, sometimes with a message in it
      vcycle_start = 1;
      for (int m = 0; m < n; m++) begin
        msg_valid = ($urandom % 3) != 0 || m == 0;
        msg_rd = 11'($urandom); msg_data = 16'($urandom);
        #1;
        if (msg_valid) begin
          check(we, "we");
          check(waddr == base + pc_t'(m), $sformatf("slot v%0d m%0d: %0d", v, m, waddr));
          check(wdata == encode_imm(OP_SET, msg_rd, '0, '0, '0, msg_data), "SET encoding");
          check(wdata[3:0] == 4'(OP_SET) && wdata[14:4] == msg_rd && wdata[63:48] == msg_data,
                "SET fields");
        end else begin
          check(!we, "no write without a message");
          m--;
        end
        @(negedge clk);
        vcycle_start = 0;
      end
      gap = int'($urandom % 4);
      msg_valid = 0;
      repeat (gap + 1) @(negedge clk);
      check(count == pc_t'(n), "message count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

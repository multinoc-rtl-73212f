// tb_multinoc_fig9 -- the debugging session of the prototype, end to end.
//
// Processor 1 runs a program that reads six values with scanf (a count of
// 5, then 1, 2, 3, 4 and 5), adds the last five, prints the sum with printf
// and stores it at local address 0020h. The host answers each scanf request
// over RS-232, must see the printf of 000Fh, and then reads the result with
// the command bytes 00 01 01 00 20 (read, processor 1, one word, address
// 0020h), for which it must receive the two bytes 00 0F. The core is the
// bus-functional model r8_bfm; its program is a list of bus steps, not R8
// machine code.
module tb_multinoc_fig9;
  import multinoc_pkg::*;

  localparam int BIT = 8;

  logic clock = 0, reset = 1;
  always #5 clock = ~clock;

  logic       tx, rx;
  logic [1:0] r8_ce, r8_rw, r8_wait, r8_halt, r8_reset;
  word_t      r8_addr [2], r8_dout [2], r8_din [2];

  multinoc dut (.*);

  for (genvar i = 0; i < 2; i++) begin : g_core
    r8_bfm core (.clk(clock), .ce(r8_ce[i]), .rw(r8_rw[i]), .addr(r8_addr[i]), .dout(r8_dout[i]),
                 .din(r8_din[i]), .waitR8(r8_wait[i]), .haltR8(r8_halt[i]), .resetR8(r8_reset[i]));
  end
  host_uart #(.BIT(BIT)) host (.clk(clock), .txd(tx), .rxd(rx));

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic expect_bytes(input logic [7:0] exp[$], input string what);
    host.wait_bytes(exp.size(), 100000);
    chk(host.got.size() >= exp.size(), $sformatf("%s: %0d bytes", what, host.got.size()));
    foreach (exp[i]) if (host.got.size() > 0) begin
      logic [7:0] b = host.got.pop_front();
      chk(b == exp[i], $sformatf("%s byte %0d = %h expected %h", what, i, b, exp[i]));
    end
  endtask

  word_t prog [$] = '{
    1, 16'hFFFF, 0,        // acc = scanf (the count, 5)
    1, 16'hFFFF, 0,        // acc = scanf
    3, 16'h0100, 0,        // [100h] = acc
    1, 16'hFFFF, 0,  5, 16'h0100, 0,  3, 16'h0100, 0,
    1, 16'hFFFF, 0,  5, 16'h0100, 0,  3, 16'h0100, 0,
    1, 16'hFFFF, 0,  5, 16'h0100, 0,  3, 16'h0100, 0,
    1, 16'hFFFF, 0,  5, 16'h0100, 0,  3, 16'h0100, 0,
    3, 16'hFFFF, 0,        // printf acc
    3, 16'h0020, 0,        // [020h] = acc
    0, 0, 0
  };
  word_t values [6] = '{5, 1, 2, 3, 4, 5};

  initial begin
    logic [7:0] b[$];
    repeat (5) @(posedge clock);
    #1 reset = 0;
    repeat (5) @(posedge clock);
    host.sync();
    b = {CMD_WRITE, ADDR_P1, 8'(prog.size()), 8'h00, 8'h00};
    foreach (prog[i]) begin b.push_back(prog[i][15:8]); b.push_back(prog[i][7:0]); end
    host.send(b);
    host.send({CMD_ACTIVATE, ADDR_P1});
    foreach (values[i]) begin
      expect_bytes({8'h05, 8'h01}, $sformatf("scanf %0d", i));
      host.send({CMD_SCANF_RETURN, ADDR_P1, values[i][15:8], values[i][7:0]});
    end
    expect_bytes({8'h04, 8'h01, 8'h00, 8'h0F}, "printf of the sum");
    repeat (500) @(posedge clock);
    chk(g_core[0].core.halts == 1, "processor 1 did not halt");
    host.send({8'h00, 8'h01, 8'h01, 8'h00, 8'h20});
    expect_bytes({8'h00, 8'h0F}, "read 00 01 01 00 20");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clock);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

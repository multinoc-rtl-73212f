// tb_serial_ip -- self-checking test of the Serial IP.
//
// A host model synchronises with 55h and checks the learned bit period; then
// it sends read, write, activate and scanf-return commands, and the packets
// that leave on the NoC side are compared with the expected packets. In the
// other direction a NoC model sends read return, printf and scanf packets and
// the bytes the host receives are compared with the expected bytes. A
// stalled host-bound UART must back-pressure the NoC.
module tb_serial_ip;
  import multinoc_pkg::*;

  localparam int BIT = 16;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic  rxd, txd, tx, ack_tx, rx, ack_rx;
  flit_t data_out, data_in;

  serial_ip dut (.clk, .rst, .rxd, .txd, .tx, .data_out, .ack_tx, .rx, .data_in, .ack_rx);
  host_uart #(.BIT(BIT)) host (.clk, .txd(rxd), .rxd(txd));
  noc_bfm bfm (.clk, .rst, .tx(rx), .data_out(data_in), .ack_tx(ack_rx),
               .rx(tx), .data_in(data_out), .ack_rx(ack_tx));

  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic expect_flits(input flit_t exp[$], input string what);
    bfm.wait_flits(exp.size(), 20000);
    chk(bfm.got.size() == exp.size(), $sformatf("%s: %0d flits, expected %0d", what, bfm.got.size(), exp.size()));
    foreach (exp[i]) if (i < bfm.got.size())
      chk(bfm.got[i] == exp[i], $sformatf("%s flit %0d = %h expected %h", what, i, bfm.got[i], exp[i]));
    bfm.got = {};
  endtask

  task automatic expect_bytes(input logic [7:0] exp[$], input string what);
    host.wait_bytes(exp.size(), 20000);
    repeat (20*BIT) @(posedge clk);
    chk(host.got.size() == exp.size(), $sformatf("%s: %0d bytes, expected %0d", what, host.got.size(), exp.size()));
    foreach (exp[i]) if (i < host.got.size())
      chk(host.got[i] == exp[i], $sformatf("%s byte %0d = %h expected %h", what, i, host.got[i], exp[i]));
    host.got = {};
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (5) @(posedge clk);

    host.sync();
    chk(dut.synced == 1'b1, "not synchronised after 55h");
    chk(dut.div >= 17'(BIT - 1) && dut.div <= 17'(BIT + 1), $sformatf("bit period %0d, expected %0d", dut.div, BIT));

    // read: the paper's example "00 01 01 00 20"
    host.send({8'h00, 8'h01, 8'h01, 8'h00, 8'h20});
    expect_flits({8'h01, 8'd5, 8'h00, 8'h00, 8'h01, 8'h00, 8'h20}, "read packet");

    // write two words 1234h, ABCDh at 0105h of the remote memory
    host.send({8'h02, 8'h11, 8'h02, 8'h01, 8'h05, 8'h12, 8'h34, 8'hAB, 8'hCD});
    expect_flits({8'h11, 8'd9, 8'h00, 8'h02, 8'h02, 8'h01, 8'h05, 8'h12, 8'h34, 8'hAB, 8'hCD}, "write packet");

    // activate processor 10
    host.send({8'h03, 8'h10});
    expect_flits({8'h10, 8'd2, 8'h00, 8'h03}, "activate packet");

    // scanf return 0005h to processor 01
    host.send({8'h06, 8'h01, 8'h00, 8'h05});
    expect_flits({8'h01, 8'd4, 8'h00, 8'h06, 8'h00, 8'h05}, "scanf return packet");

    // an unknown command byte is ignored
    host.send({8'h7E});
    repeat (20*BIT) @(posedge clk);
    chk(bfm.got.size() == 0, "unknown command produced a packet");

    // NoC -> host: read return of one word 000Fh (host sees "00 0F")
    bfm.send({8'h00, 8'd4, 8'h01, CMD_READ_RETURN, 8'h00, 8'h0F});
    expect_bytes({8'h00, 8'h0F}, "read return bytes");

    // a longest packet (255 payload flits) of a service the IP does not
    // forward gives no bytes and must not upset the packet after it
    begin
      flit_t p[$];
      p = {8'h00, 8'd255, 8'h01, CMD_NOTIFY};
      for (int i = 0; i < 253; i++) p.push_back(flit_t'(i));
      bfm.send(p);
    end
    bfm.send({8'h00, 8'd4, 8'h10, CMD_PRINTF, 8'h00, 8'h0F});
    expect_bytes({8'h04, 8'h10, 8'h00, 8'h0F}, "printf bytes");

    bfm.send({8'h00, 8'd2, 8'h01, CMD_SCANF});
    expect_bytes({8'h05, 8'h01}, "scanf bytes");

    // back-pressure: a 20-word read return cannot all sit in the byte FIFO
    begin
      flit_t p[$];
      logic [7:0] e[$];
      p = {8'h00, 8'd42, 8'h11, CMD_READ_RETURN};
      for (int i = 0; i < 40; i++) begin p.push_back(flit_t'(i * 3)); e.push_back(8'(i * 3)); end
      bfm.send(p);
      expect_bytes(e, "long read return");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

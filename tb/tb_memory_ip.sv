// tb_memory_ip -- self-checking test of the Memory IP.
//
// A NoC model writes words with a "write in memory" packet and reads them
// back with "read from memory"; the read return packet is compared flit by
// flit with the expected packet. The processor interface writes and reads
// words directly; its priority over NoC traffic is checked by keeping ceR8
// busy during a NoC read (the read return must wait), and busyNoCR8 must
// hold back the memory's transmitter. A packet of another service must be
// consumed without effect.
module tb_memory_ip;
  import multinoc_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic  tx, ack_tx, rx, ack_rx;
  flit_t data_out, data_in;
  logic  ceR8 = 0, rwR8 = 1, busyNoCR8 = 0, busyNoCMem;
  word_t addrR8 = 0, dinR8 = 0, doutR8;

  memory_ip dut (
    .clk, .rst, .addressCore(ADDR_MEM),
    .tx, .data_out, .ack_tx, .rx, .data_in, .ack_rx,
    .ceR8, .rwR8, .addrR8, .dinR8, .doutR8, .busyNoCR8, .busyNoCMem
  );
  // the BFM's tx feeds the IP's rx and vice versa
  noc_bfm bfm (.clk, .rst, .tx(rx), .data_out(data_in), .ack_tx(ack_rx),
               .rx(tx), .data_in(data_out), .ack_rx(ack_tx));

  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic word_t pattern(input int i);
    return word_t'(16'hA5C3 ^ (i * 16'h0101) + i);
  endfunction

  task automatic cpu_write(input word_t a, input word_t d);
    @(negedge clk); ceR8 = 1; rwR8 = 0; addrR8 = a; dinR8 = d;
    @(negedge clk); ceR8 = 0; rwR8 = 1;
  endtask

  task automatic cpu_read(input word_t a, output word_t d);
    @(negedge clk); ceR8 = 1; rwR8 = 1; addrR8 = a;
    @(negedge clk); ceR8 = 0; d = doutR8;
  endtask

  task automatic expect_rr(input flit_t dst, input int base, input int n, input string what);
    flit_t exp[$];
    exp = {dst, flit_t'(2 + 2*n), ADDR_MEM, CMD_READ_RETURN};
    for (int i = 0; i < n; i++) begin
      word_t w = pattern(base + i);
      exp.push_back(w[15:8]); exp.push_back(w[7:0]);
    end
    bfm.wait_flits(exp.size(), 2000);
    chk(bfm.got.size() == exp.size(), $sformatf("%s: %0d flits, expected %0d", what, bfm.got.size(), exp.size()));
    foreach (exp[i]) begin
      if (bfm.got.size() == 0) break;
      begin
        flit_t f = bfm.got.pop_front();
        chk(f == exp[i], $sformatf("%s flit %0d = %h expected %h", what, i, f, exp[i]));
      end
    end
    bfm.got = {};
  endtask

  initial begin
    flit_t p[$];
    word_t d;
    int t0, wait_cycles;
    repeat (3) @(posedge clk);
    #1 rst = 0;

    // NoC write of 8 words at 0x20, from the serial IP (00)
    p = {ADDR_MEM, 8'd21, ADDR_SERIAL, CMD_WRITE, 8'd8, 8'h00, 8'h20};
    for (int i = 0; i < 8; i++) begin d = pattern(i); p.push_back(d[15:8]); p.push_back(d[7:0]); end
    bfm.send(p);
    repeat (5) @(posedge clk);
    // processor reads them back
    for (int i = 0; i < 8; i++) begin
      cpu_read(word_t'(16'h20 + i), d);
      chk(d == pattern(i), $sformatf("cpu read %0d = %h expected %h", i, d, pattern(i)));
    end

    // processor writes 4 words at 0x3F0, NoC reads them
    for (int i = 0; i < 4; i++) cpu_write(word_t'(16'h3F0 + i), pattern(100 + i));
    bfm.send({ADDR_MEM, 8'd5, ADDR_P2, CMD_READ, 8'd4, 8'h03, 8'hF0});
    expect_rr(ADDR_P2, 100, 4, "read return");

    // a packet of another service is consumed and ignored
    bfm.send({ADDR_MEM, 8'd4, ADDR_P1, CMD_PRINTF, 8'h12, 8'h34});
    repeat (20) @(posedge clk);
    chk(bfm.got.size() == 0, "ignored packet produced output");

    // processor priority: ceR8 busy while a NoC read is served
    fork
      bfm.send({ADDR_MEM, 8'd5, ADDR_P1, CMD_READ, 8'd2, 8'h00, 8'h20});
      begin
        @(negedge clk); ceR8 = 1; rwR8 = 1; addrR8 = 16'h0021;
        repeat (60) @(negedge clk);
        // data flits must not have started while the processor held the banks
        wait_cycles = bfm.got.size();
        ceR8 = 0;
      end
    join
    chk(wait_cycles == 4, $sformatf("with ceR8 held, %0d flits sent (header only expected: 4)", wait_cycles));
    expect_rr(ADDR_P1, 0, 2, "read return after processor priority");

    // busyNoCR8 holds the transmitter back
    busyNoCR8 = 1;
    bfm.send({ADDR_MEM, 8'd5, ADDR_P1, CMD_READ, 8'd1, 8'h00, 8'h23});
    repeat (40) @(posedge clk);
    chk(bfm.got.size() == 0 && !busyNoCMem, "transmitter started while busyNoCR8");
    busyNoCR8 = 0;
    expect_rr(ADDR_P1, 3, 1, "read return after busyNoCR8");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

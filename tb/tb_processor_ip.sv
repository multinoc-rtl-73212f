// tb_processor_ip -- self-checking test of a Processor IP (address 01).
//
// A NoC model loads a test program into the local memory with a write
// packet and activates the IP; the core model (r8_bfm) then runs it. Every
// packet the IP sends is compared with the expected packet: scanf request,
// remote-memory write, read of the other processor, printf, notify. The NoC
// model answers with scanf return and read return packets, holds the core in
// its wait state until it sends a notify, and finally reads the local
// memory back over the NoC.
module tb_processor_ip;
  import multinoc_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic  ce, rw, waitR8, haltR8, resetR8;
  word_t addr, dout, din;
  logic  tx, ack_tx, rx, ack_rx;
  flit_t data_out, data_in;

  processor_ip #(.ADDRESS(ADDR_P1), .OTHER_PROC(ADDR_P2)) dut (
    .clk, .rst, .ce, .rw, .addr, .dout, .din, .waitR8, .haltR8, .resetR8,
    .tx, .data_out, .ack_tx, .rx, .data_in, .ack_rx
  );
  r8_bfm core (.clk, .ce, .rw, .addr, .dout, .din, .waitR8, .haltR8, .resetR8);
  noc_bfm bfm (.clk, .rst, .tx(rx), .data_out(data_in), .ack_tx(ack_rx),
               .rx(tx), .data_in(data_out), .ack_rx(ack_tx));

  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic expect_pkt(input flit_t exp[$], input string what);
    bfm.wait_flits(exp.size(), 5000);
    chk(bfm.got.size() >= exp.size(), $sformatf("%s: %0d flits, expected %0d", what, bfm.got.size(), exp.size()));
    foreach (exp[i]) if (bfm.got.size() > 0) begin
      flit_t f = bfm.got.pop_front();
      chk(f == exp[i], $sformatf("%s flit %0d = %h expected %h", what, i, f, exp[i]));
    end
  endtask

  word_t prog [$] = '{
    16'd1, 16'hFFFF, 16'd0,     // scanf
    16'd4, 16'd0,    16'd3,     // acc += 3
    16'd3, 16'h0810, 16'd0,     // remote memory [10h] = acc
    16'd1, 16'h0420, 16'd0,     // acc = other processor [20h]
    16'd3, 16'hFFFF, 16'd0,     // printf acc
    16'd2, 16'hFFFD, 16'd2,     // notify processor 2
    16'd2, 16'hFFFE, 16'd2,     // wait for processor 2
    16'd3, 16'h0050, 16'd0,     // local [50h] = acc
    16'd0, 16'd0,    16'd0      // halt
  };

  initial begin
    flit_t p[$];
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (3) @(posedge clk);
    chk(resetR8 == 1'b1, "core not held in reset before activation");

    // load the program
    p = {ADDR_P1, flit_t'(5 + 2*prog.size()), ADDR_SERIAL, CMD_WRITE, flit_t'(prog.size()), 8'h00, 8'h00};
    foreach (prog[i]) begin p.push_back(prog[i][15:8]); p.push_back(prog[i][7:0]); end
    bfm.send(p);
    repeat (10) @(posedge clk);
    chk(core.accesses == 0, "core ran before activation");

    bfm.send({ADDR_P1, 8'd2, ADDR_SERIAL, CMD_ACTIVATE});
    expect_pkt({ADDR_SERIAL, 8'd2, ADDR_P1, CMD_SCANF}, "scanf");
    bfm.send({ADDR_P1, 8'd4, ADDR_SERIAL, CMD_SCANF_RETURN, 8'h00, 8'h07});
    expect_pkt({ADDR_MEM, 8'd7, ADDR_P1, CMD_WRITE, 8'd1, 8'h00, 8'h10, 8'h00, 8'h0A}, "remote write");
    expect_pkt({ADDR_P2, 8'd5, ADDR_P1, CMD_READ, 8'd1, 8'h00, 8'h20}, "read of other processor");
    repeat (30) @(posedge clk);
    chk(waitR8 == 1'b1, "core not waiting for the read return");
    bfm.send({ADDR_P1, 8'd4, ADDR_P2, CMD_READ_RETURN, 8'h12, 8'h34});
    expect_pkt({ADDR_SERIAL, 8'd4, ADDR_P1, CMD_PRINTF, 8'h12, 8'h34}, "printf");
    expect_pkt({ADDR_P2, 8'd2, ADDR_P1, CMD_NOTIFY}, "notify");
    repeat (100) @(posedge clk);
    chk(waitR8 == 1'b1 && core.halts == 0, "wait did not block the core");
    // a notify from the wrong processor (the memory) must not release it
    bfm.send({ADDR_P1, 8'd2, ADDR_MEM, CMD_NOTIFY});
    repeat (50) @(posedge clk);
    chk(waitR8 == 1'b1 && core.halts == 0, "wait released by the wrong notifier");
    bfm.send({ADDR_P1, 8'd2, ADDR_P2, CMD_NOTIFY});
    repeat (100) @(posedge clk);
    chk(core.halts == 1, "core did not reach halt after notify");
    chk(resetR8 == 1'b1, "halted core not held");

    // read the stored result back over the NoC
    bfm.send({ADDR_P1, 8'd5, ADDR_P2, CMD_READ, 8'd1, 8'h00, 8'h50});
    expect_pkt({ADDR_P2, 8'd4, ADDR_P1, CMD_READ_RETURN, 8'h12, 8'h34}, "read back");
    chk(bfm.got.size() == 0, "unexpected extra flits");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_proc_ctrl -- self-checking test of the Processor IP control logic.
//
// proc_ctrl of processor 2 (router 10) is tested alone: a behavioural memory
// with one-clock reads stands in for the local Memory IP, a core model runs
// a test program from it, and a NoC model exchanges packets with it. Every
// area of the address map is touched at its edges (3FFh, 400h, 7FFh, 800h,
// BFFh, FFFFh, FFFEh, FFFDh) and the packets sent are compared with the
// expected ones, including the translated addresses. A notify that arrives
// before the wait must not be lost, busyNoCMem must keep the control logic
// off the NoC, and nothing may run before the activate packet.
module tb_proc_ctrl;
  import multinoc_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic  ce, rw, waitR8, haltR8, resetR8;
  word_t addr, dout, din;
  logic  ceR8, rwR8, busyNoCR8, busyNoCMem = 0;
  word_t addrR8, dinR8, doutR8;
  logic  tx, ack_tx, nrx, nack;
  flit_t data_out, data_in;

  proc_ctrl #(.OTHER_PROC(ADDR_P1)) dut (
    .clk, .rst, .addressCore(ADDR_P2),
    .ce, .rw, .addr, .dout, .din, .waitR8, .haltR8, .resetR8,
    .ceR8, .rwR8, .addrR8, .dinR8, .doutR8, .busyNoCR8, .busyNoCMem,
    .tx, .data_out, .ack_tx, .data_in, .ack_rx(nack)
  );
  r8_bfm core (.clk, .ce, .rw, .addr, .dout, .din, .waitR8, .haltR8, .resetR8);
  noc_bfm bfm (.clk, .rst, .tx(nrx), .data_out(data_in), .ack_tx(nack),
               .rx(tx), .data_in(data_out), .ack_rx(ack_tx));

  // local memory model and the acknowledge the Memory IP would give
  word_t mem [1024];
  always_ff @(posedge clk) begin
    if (ceR8) begin
      if (!rwR8) mem[addrR8[9:0]] <= dinR8;
      doutR8 <= rwR8 ? mem[addrR8[9:0]] : dinR8;
    end
    nack <= rst ? 1'b0 : (nrx && !nack);
  end

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic expect_pkt(input flit_t exp[$], input string what);
    bfm.wait_flits(exp.size(), 3000);
    chk(bfm.got.size() >= exp.size(), $sformatf("%s: %0d flits", what, bfm.got.size()));
    foreach (exp[i]) if (bfm.got.size() > 0) begin
      flit_t f = bfm.got.pop_front();
      chk(f == exp[i], $sformatf("%s flit %0d = %h expected %h", what, i, f, exp[i]));
    end
  endtask

  word_t prog [$] = '{
    2, 16'h03FF, 16'h1111,     // local store at the top of local memory
    1, 16'h03FF, 0,            // local load
    3, 16'h0400, 0,            // other processor [000h] = acc
    1, 16'h07FF, 0,            // acc = other processor [3FFh]
    3, 16'h0800, 0,            // remote memory [000h] = acc
    1, 16'h0BFF, 0,            // acc = remote memory [3FFh]
    3, 16'hFFFF, 0,            // printf acc
    1, 16'hFFFF, 0,            // acc = scanf
    2, 16'hFFFD, 1,            // notify processor 1
    2, 16'hFFFE, 1,            // wait for processor 1
    3, 16'h0010, 0,            // local [010h] = acc
    0, 0, 0
  };

  initial begin
    foreach (mem[i]) mem[i] = '0;
    foreach (prog[i]) mem[i] = prog[i];
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (20) @(posedge clk);
    chk(core.accesses == 0 && resetR8, "core ran before activate");

    // a longest write packet (255 payload flits, 125 words) is the memory's
    // business; the activate behind it must still be recognised
    begin
      flit_t p[$];
      p = {ADDR_P2, 8'd255, ADDR_SERIAL, CMD_WRITE, 8'd125, 8'h02, 8'h00};
      for (int i = 0; i < 250; i++) p.push_back(flit_t'(i));
      bfm.send(p);
      repeat (20) @(posedge clk);
      chk(core.accesses == 0 && resetR8, "core ran after a write packet");
    end
    bfm.send({ADDR_P2, 8'd2, ADDR_SERIAL, CMD_ACTIVATE});
    expect_pkt({ADDR_P1, 8'd7, ADDR_P2, CMD_WRITE, 8'd1, 8'h00, 8'h00, 8'h11, 8'h11}, "write other processor");
    chk(mem[10'h3FF] == 16'h1111, "local store");
    expect_pkt({ADDR_P1, 8'd5, ADDR_P2, CMD_READ, 8'd1, 8'h03, 8'hFF}, "read other processor");
    // hold the memory's claim on the port while answering
    busyNoCMem = 1;
    bfm.send({ADDR_P2, 8'd4, ADDR_P1, CMD_READ_RETURN, 8'h22, 8'h22});
    repeat (50) @(posedge clk);
    chk(bfm.got.size() == 0 && !tx, "sent while busyNoCMem");
    chk(busyNoCR8, "no busyNoCR8 while a packet waits");
    busyNoCMem = 0;
    expect_pkt({ADDR_MEM, 8'd7, ADDR_P2, CMD_WRITE, 8'd1, 8'h00, 8'h00, 8'h22, 8'h22}, "write remote memory");
    expect_pkt({ADDR_MEM, 8'd5, ADDR_P2, CMD_READ, 8'd1, 8'h03, 8'hFF}, "read remote memory");
    bfm.send({ADDR_P2, 8'd4, ADDR_MEM, CMD_READ_RETURN, 8'h33, 8'h33});
    expect_pkt({ADDR_SERIAL, 8'd4, ADDR_P2, CMD_PRINTF, 8'h33, 8'h33}, "printf");
    expect_pkt({ADDR_SERIAL, 8'd2, ADDR_P2, CMD_SCANF}, "scanf");
    // the notify from processor 1 arrives before the core waits for it
    bfm.send({ADDR_P2, 8'd2, ADDR_P1, CMD_NOTIFY});
    bfm.send({ADDR_P2, 8'd4, ADDR_SERIAL, CMD_SCANF_RETURN, 8'h44, 8'h44});
    expect_pkt({ADDR_P1, 8'd2, ADDR_P2, CMD_NOTIFY}, "notify");
    repeat (100) @(posedge clk);
    chk(core.halts == 1, "early notify lost: core did not finish");
    chk(mem[10'h010] == 16'h4444, $sformatf("scanf value stored: %h", mem[10'h010]));
    chk(bfm.got.size() == 0, "extra packets");

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

// tb_multinoc -- end-to-end test of the complete MultiNoC at its default size.
//
// A host model talks to the chip over RS-232 only, as the prototype's host
// software does: it synchronises with 55h, loads a test program into each
// processor's local memory with write commands, reads memory back, activates
// the processors, answers a scanf and collects printf output. The two core
// models (r8_bfm) run the programs below, which use every load/store service
// of the Processor IP:
//   P1: 100 x (acc+=0); write P2[70h]=BEEFh; acc=scanf; acc+=10; remote[5]=acc; P2[30h]=acc;
//       notify P2; wait P2; acc=P2[40h]; printf acc; halt
//   P2: printf 77h; wait P1; acc=remote[5]; acc+=1; P2[40h]=acc; P1[60h]=acc;
//       acc=P2[30h]; printf acc; notify P1; halt
// With scanf = 5 the host must see printf 000Fh from P2 and 0010h from P1,
// and the memories must hold the values written. While P1's memory streams a
// read return to the host, P2's printf and P1's own requests must wait:
// counters check that output-port contention in a router, blocked flits,
// processor priority at the memory banks, the busyNoCR8/busyNoCMem exclusion,
// the wait state and all eight packet services that are sent each happened.
module tb_multinoc;
  import multinoc_pkg::*;

  localparam int BIT  = 8;
  localparam int NPAD = 100;
  localparam int NRB  = 100;   // words of P1 read back while it runs

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

  // ------------------------------------------------------------ mechanism counters
  int n_route_blocked = 0, n_buffer_full = 0, n_bank_priority = 0;
  int n_port_exclusion = 0, n_wait_state = 0;
  int n_service [9];
  int fidx [4];
  flit_t fcmd;

  always @(posedge clock) if (!reset) begin
    for (int r = 0; r < 4; r++) begin
      if (dut.u_noc.l_ack_tx[r]) begin
        if (fidx[r] == 3 && dut.u_noc.l_dout[r] < 9) n_service[dut.u_noc.l_dout[r]]++;
        if (fidx[r] == 1) fidx[r] <= (dut.u_noc.l_dout[r] == 0) ? 0 : 2;
        else fidx[r] <= fidx[r] + 1;
      end
    end
    if (dut.u_noc.g_r[0].u_router.u_ctrl.state == 3'd3 &&
        dut.u_noc.g_r[0].u_router.u_ctrl.out_busy[dut.u_noc.g_r[0].u_router.u_ctrl.dir]) n_route_blocked++;
    if (dut.u_noc.g_r[2].u_router.g_buf[0].u_buf.count == 2 ||
        dut.u_noc.g_r[1].u_router.g_buf[1].u_buf.count == 2) n_buffer_full++;
    if (dut.u_proc1.u_mem.ceR8 && (dut.u_proc1.u_mem.wr_pending || dut.u_proc1.u_mem.noc_rd_req) ||
        dut.u_proc2.u_mem.ceR8 && (dut.u_proc2.u_mem.wr_pending || dut.u_proc2.u_mem.noc_rd_req)) n_bank_priority++;
    if (dut.u_proc1.busyNoCR8 && dut.u_proc1.busyNoCMem || dut.u_proc2.busyNoCR8 && dut.u_proc2.busyNoCMem) n_port_exclusion++;
    if (r8_wait != 2'b00) n_wait_state++;
  end

  // tracking of packet position: count flits of each packet (length in flit 1)
  int plen [4];
  always @(posedge clock) if (!reset) begin
    for (int r = 0; r < 4; r++) if (dut.u_noc.l_ack_tx[r]) begin
      if (fidx[r] == 1) plen[r] <= dut.u_noc.l_dout[r];
      else if (fidx[r] >= 2) begin
        plen[r] <= plen[r] - 1;
        if (plen[r] == 1) fidx[r] <= 0;
      end
    end
  end

  // ------------------------------------------------------------ programs
  word_t p1 [$] = '{
    2, 16'h0470, 16'hBEEF,
    1, 16'hFFFF, 0,
    4, 0, 10,
    3, 16'h0805, 0,
    3, 16'h0430, 0,
    2, 16'hFFFD, 2,
    2, 16'hFFFE, 2,
    1, 16'h0440, 0,
    3, 16'hFFFF, 0,
    0, 0, 0
  };
  word_t p2 [$] = '{
    2, 16'hFFFF, 16'h0077,
    2, 16'hFFFE, 1,
    1, 16'h0805, 0,
    4, 0, 1,
    3, 16'h0040, 0,
    3, 16'h0460, 0,
    1, 16'h0030, 0,
    3, 16'hFFFF, 0,
    2, 16'hFFFD, 1,
    0, 0, 0
  };

  // writes in chunks of at most 100 words (one packet carries 125 at most)
  task automatic host_write(input flit_t tgt, input word_t a, input word_t w[$]);
    for (int base = 0; base < w.size(); base += 100) begin
      int n;
      logic [7:0] b[$];
      word_t ad;
      n  = (w.size() - base > 100) ? 100 : w.size() - base;
      ad = a + word_t'(base);
      b  = {CMD_WRITE, tgt, 8'(n), ad[15:8], ad[7:0]};
      for (int i = base; i < base + n; i++) begin b.push_back(w[i][15:8]); b.push_back(w[i][7:0]); end
      host.send(b);
    end
  endtask

  task automatic host_read(input flit_t tgt, input word_t a, input int n);
    host.send({CMD_READ, tgt, 8'(n), a[15:8], a[7:0]});
  endtask

  task automatic expect_bytes(input logic [7:0] exp[$], input string what);
    host.wait_bytes(exp.size(), 400000);
    chk(host.got.size() >= exp.size(), $sformatf("%s: %0d bytes, expected %0d", what, host.got.size(), exp.size()));
    foreach (exp[i]) if (host.got.size() > 0) begin
      logic [7:0] b = host.got.pop_front();
      chk(b == exp[i], $sformatf("%s byte %0d = %h expected %h", what, i, b, exp[i]));
    end
  endtask

  initial begin
    logic [7:0] e[$], m[$];
    // P1 first runs NPAD steps of local work (acc += 0), so that it fetches
    // from its memory while that memory streams a read return to the host
    for (int i = 0; i < NPAD; i++) p1 = {16'd4, 16'd0, 16'd0, p1};
    foreach (fidx[i]) begin fidx[i] = 0; plen[i] = 0; end
    foreach (n_service[i]) n_service[i] = 0;
    repeat (5) @(posedge clock);
    #1 reset = 0;
    repeat (5) @(posedge clock);

    host.sync();
    chk(dut.u_serial.synced, "serial IP not synchronised");
    host_write(ADDR_P1, 0, p1);
    host_write(ADDR_P2, 0, p2);
    repeat (200) @(posedge clock);
    chk(r8_reset == 2'b11, "processors not held before activation");

    // read P1's program back while activating both processors
    host_read(ADDR_P1, 0, NRB);
    host.send({CMD_ACTIVATE, ADDR_P2});
    host.send({CMD_ACTIVATE, ADDR_P1});
    e = {};
    for (int i = 0; i < NRB; i++) begin e.push_back(p1[i][15:8]); e.push_back(p1[i][7:0]); end
    expect_bytes(e, "program read back");

    // next: P2's printf 77h and P1's scanf request, in either order
    host.wait_bytes(6, 400000);
    m = host.got;
    begin
      logic [47:0] v;
      v = '0;
      foreach (m[i]) if (i < 6) v[8*(5-i) +: 8] = m[i];
      chk(m.size() == 6 && (v == 48'h04_10_00_77_05_01 || v == 48'h05_01_04_10_00_77),
          $sformatf("printf/scanf bytes %h", v));
    end
    host.got = {};
    host.send({CMD_SCANF_RETURN, ADDR_P1, 8'h00, 8'h05});
    expect_bytes({8'h04, 8'h10, 8'h00, 8'h0F}, "P2 printf");
    expect_bytes({8'h04, 8'h01, 8'h00, 8'h10}, "P1 printf");
    repeat (2000) @(posedge clock);
    chk(g_core[0].core.halts == 1 && g_core[1].core.halts == 1, "processors did not halt");

    host_read(ADDR_P1, 16'h0060, 1);  expect_bytes({8'h00, 8'h10}, "P1[60h]");
    host_read(ADDR_MEM, 16'h0005, 1); expect_bytes({8'h00, 8'h0F}, "remote[5]");
    host_read(ADDR_P2, 16'h0070, 1);  expect_bytes({8'hBE, 8'hEF}, "P2[70h]");
    host_read(ADDR_P2, 16'h0030, 1);  expect_bytes({8'h00, 8'h0F}, "P2[30h]");
    host_read(ADDR_P2, 16'h0040, 1);  expect_bytes({8'h00, 8'h10}, "P2[40h]");

    $display("mechanisms: route_blocked=%0d buffer_full=%0d bank_priority=%0d port_exclusion=%0d wait_state=%0d",
             n_route_blocked, n_buffer_full, n_bank_priority, n_port_exclusion, n_wait_state);
    for (int c = 0; c < 9; c++) $display("service %s: %0d packets", cmd_e'(c), n_service[c]);
    chk(n_route_blocked  > 0, "no output-port contention seen");
    chk(n_buffer_full    > 0, "no flit blocked in a full input buffer");
    chk(n_bank_priority  > 0, "processor priority at the banks never exercised");
    chk(n_port_exclusion > 0, "busyNoCR8/busyNoCMem exclusion never exercised");
    chk(n_wait_state     > 0, "wait state never used");
    for (int c = 0; c < 8; c++) chk(n_service[c] > 0, $sformatf("service %s never used", cmd_e'(c)));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clock);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_hermes_router -- self-checking test of one five-port router (address 11).
//
// Link models on all five ports send and receive packets with the two-cycle
// handshake. Checks: each packet leaves on the port chosen by XY routing with
// all its flits in order; five packets crossing at once all arrive (five
// simultaneous connections); two packets for one output are serialised
// without mixing flits; the header is offered at the output 8 clocks after
// it was offered at the input (7 clocks of routing plus the clock of its own
// handshake, the R_i = 7 of the paper's latency formula) and later flits
// follow every 2 clocks.
module tb_hermes_router;
  import multinoc_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [NPORT-1:0] rx = '0, ack_rx, tx, ack_tx;
  flit_t data_in [NPORT];
  flit_t data_out [NPORT];
  flit_t got [NPORT][$];
  int    got_t [NPORT][$];
  int checks = 0, failures = 0, cyc = 0;

  hermes_router #(.ADDRESS(8'h11)) dut (.*);

  always @(posedge clk) cyc++;
  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORT; p++) begin
      if (rst) ack_tx[p] <= 0;
      else begin
        ack_tx[p] <= tx[p] && !ack_tx[p];
        if (tx[p] && !ack_tx[p]) begin got[p].push_back(data_out[p]); got_t[p].push_back(cyc); end
      end
    end
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic send(input int p, input flit_t pk[$], output int t0);
    t0 = -1;
    foreach (pk[i]) begin
      data_in[p] = pk[i]; rx[p] = 1;
      if (t0 < 0) t0 = cyc;
      @(posedge clk);
      while (!ack_rx[p]) @(posedge clk);
      #1 rx[p] = 0;
    end
  endtask

  function automatic void mk(output flit_t pk[$], input flit_t t, input int n, input int s);
    pk = {t, flit_t'(n)};
    for (int i = 0; i < n; i++) pk.push_back(flit_t'(s + i));
  endfunction

  task automatic expect_out(input int o, input flit_t pk[$], input string what);
    chk(got[o].size() >= pk.size(), $sformatf("%s: %0d flits on port %0d", what, got[o].size(), o));
    foreach (pk[i]) if (got[o].size() > 0) begin
      flit_t f = got[o].pop_front();
      void'(got_t[o].pop_front());
      chk(f == pk[i], $sformatf("%s: flit %0d = %h expected %h", what, i, f, pk[i]));
    end
  endtask

  initial begin
    flit_t pk[$], pk2[$];
    flit_t pks [5][$];
    int t0, t1;
    // output port for each input: E->W(01), W->E(21), N->S(10), S->N(12), L->L(11)
    flit_t tgt [5] = '{8'h01, 8'h21, 8'h10, 8'h12, 8'h11};
    int    outp[5] = '{WEST, EAST, SOUTH, NORTH, LOCAL};
    foreach (data_in[i]) data_in[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;

    // timing of a lone packet from LOCAL to EAST
    mk(pk, 8'h21, 5, 8'h40);
    send(LOCAL, pk, t0);
    repeat (20) @(posedge clk);
    chk(got_t[EAST].size() == 7, "lone packet size");
    if (got_t[EAST].size() == 7) begin
      chk(got_t[EAST][0] - t0 == 8, $sformatf("header crossed in %0d clocks", got_t[EAST][0] - t0));
      chk(got_t[EAST][6] - got_t[EAST][0] == 12, "payload not at one flit per two clocks");
    end
    expect_out(EAST, pk, "lone");

    // five packets at once, each to a different output
    for (int p = 0; p < 5; p++) mk(pks[p], tgt[p], 12, 16 * p);
    fork
      send(0, pks[0], t0);
      send(1, pks[1], t0);
      send(2, pks[2], t0);
      send(3, pks[3], t0);
      send(4, pks[4], t0);
    join
    repeat (40) @(posedge clk);
    for (int p = 0; p < 5; p++) begin
      mk(pk, tgt[p], 12, 16 * p);
      expect_out(outp[p], pk, $sformatf("parallel from %0d", p));
    end

    // two packets for the same output (LOCAL) from WEST and NORTH
    mk(pk, 8'h11, 15, 8'hA0);
    mk(pk2, 8'h11, 15, 8'hC0);
    fork
      send(WEST, pk, t0);
      send(NORTH, pk2, t1);
    join
    repeat (60) @(posedge clk);
    chk(got[LOCAL].size() == 34, "contention: flit count");
    if (got[LOCAL].size() == 34) begin
      if (got[LOCAL][2] == pk[2]) begin expect_out(LOCAL, pk, "first"); expect_out(LOCAL, pk2, "second"); end
      else begin expect_out(LOCAL, pk2, "first"); expect_out(LOCAL, pk, "second"); end
    end

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

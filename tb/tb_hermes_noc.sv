// tb_hermes_noc -- self-checking test of the 2x2 Hermes mesh.
//
// Local IP models on all four routers send packets to each other with the
// two-cycle flit handshake. The test checks that every packet arrives intact
// at the addressed router only, that a single packet alone in the network
// meets the minimal-latency formula latency = sum(R_i) + 2*P with R_i = 7
// cycles per router, and that contention (two packets for one output port)
// is resolved with both packets delivered whole (wormhole blocking seen).
module tb_hermes_noc;
  import multinoc_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [3:0] l_rx, l_ack_rx, l_tx, l_ack_tx;
  flit_t      l_din [4];
  flit_t      l_dout[4];

  hermes_noc dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // received flit log per local port
  flit_t rxlog [4][$];
  int    last_ack_cyc [4];
  int    blocked_cycles = 0;

  // receivers: ack one cycle after a flit is seen (same protocol as a buffer)
  always_ff @(posedge clk) begin
    for (int r = 0; r < 4; r++) begin
      l_ack_tx[r] <= l_tx[r] && !l_ack_tx[r];
      if (l_tx[r] && !l_ack_tx[r]) begin
        rxlog[r].push_back(l_dout[r]);
        last_ack_cyc[r] <= cyc + 1;
      end
    end
    if (rst) l_ack_tx <= '0;
  end

  // sender tasks, one per port so they can run in parallel
  task automatic send(input int r, input flit_t pkt[$], output int t0);
    t0 = -1;
    foreach (pkt[i]) begin
      l_din[r] = pkt[i];
      l_rx[r]  = 1'b1;
      if (t0 < 0) t0 = cyc;
      @(posedge clk);
      while (!l_ack_rx[r]) begin
        blocked_cycles++;
        @(posedge clk);
      end
      #1;
      l_rx[r] = 1'b0;
    end
  endtask

  function automatic void mkpkt(output flit_t p[$], input flit_t tgt, input int n, input int seed);
    p = {};
    p.push_back(tgt);
    p.push_back(flit_t'(n));
    for (int i = 0; i < n; i++) p.push_back(flit_t'(seed + 7*i));
  endfunction

  task automatic check_rx(input int r, input flit_t exp[$], input string what);
    checks++;
    if (rxlog[r].size() < exp.size()) begin
      failures++;
      $display("FAIL %s: port %0d got %0d flits, expected %0d", what, r, rxlog[r].size(), exp.size());
      return;
    end
    for (int i = 0; i < exp.size(); i++) begin
      flit_t f = rxlog[r].pop_front();
      if (f !== exp[i]) begin
        failures++;
        $display("FAIL %s: port %0d flit %0d = %h expected %h", what, r, i, f, exp[i]);
        return;
      end
    end
  endtask

  initial begin
    flit_t p[$], q[$], p2[$];
    int t0, t1, lat, nrouters;
    flit_t addrs [4] = '{8'h00, 8'h10, 8'h01, 8'h11};
    l_rx = '0;
    foreach (l_din[i]) l_din[i] = '0;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    repeat (2) @(posedge clk);
    #1;

    // 1. latency of a lone packet, every source/target pair
    for (int s = 0; s < 4; s++) begin
      for (int d = 0; d < 4; d++) begin
        if (s == d) continue;
        mkpkt(p, addrs[d], 6, s*16 + d);
        send(s, p, t0);
        repeat (40) @(posedge clk);
        #1;
        check_rx(d, p, "lone packet");
        nrouters = 1 + ((s % 2) != (d % 2)) + ((s / 2) != (d / 2)) ;
        lat = last_ack_cyc[d] - t0 + 1;  // cycles counted inclusively
        checks++;
        if (lat != 7*nrouters + 2*p.size()) begin
          failures++;
          $display("FAIL latency %0d->%0d: %0d cycles, formula %0d", s, d, lat, 7*nrouters + 2*p.size());
        end
      end
    end
    // nothing else received
    for (int r = 0; r < 4; r++) begin
      checks++;
      if (rxlog[r].size() != 0) begin failures++; $display("FAIL stray flits at %0d", r); end
    end

    // 2. contention: routers 00 and 10 both send a long packet to 11
    blocked_cycles = 0;
    mkpkt(p, 8'h11, 40, 8'h30);
    mkpkt(q, 8'h11, 40, 8'h90);
    fork
      send(0, p, t0);
      send(1, q, t1);
    join
    repeat (100) @(posedge clk);
    #1;
    // the packets must arrive one after the other, each whole
    checks++;
    if (rxlog[3].size() != p.size() + q.size()) begin
      failures++; $display("FAIL contention: %0d flits", rxlog[3].size());
    end else if (rxlog[3][2] == p[2]) begin
      check_rx(3, p, "contention first");  check_rx(3, q, "contention second");
    end else begin
      check_rx(3, q, "contention first");  check_rx(3, p, "contention second");
    end
    checks++;
    if (blocked_cycles == 0) begin failures++; $display("FAIL no blocking observed"); end
    $display("contention: blocked sender cycles = %0d", blocked_cycles);

    // 3. four simultaneous packets crossing the mesh
    fork
      begin mkpkt(p2, 8'h11, 10, 1);  send(0, p2, t0); end
      begin mkpkt(q, 8'h01, 10, 2);   send(1, q, t1); end
    join
    repeat (100) @(posedge clk);
    #1;
    mkpkt(p2, 8'h11, 10, 1); check_rx(3, p2, "cross 0->3");
    mkpkt(q, 8'h01, 10, 2);  check_rx(2, q, "cross 1->2");

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

// tb_hermes_control -- self-checking test of the router control logic.
//
// The control of router 11 (X=1, Y=1) is driven directly: header requests
// with chosen target addresses, and the `sender` flags that hold or close
// connections. Checks: XY routing to each of the five outputs (X first),
// the grant in the fifth clock after a request is raised, round-robin order when
// all five ports ask at once, a request for a busy output waiting until the
// connection that holds it closes, and the connection tables.
module tb_hermes_control;
  import multinoc_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [NPORT-1:0] h = '0, sender = '0, ack_h, out_busy, in_conn;
  flit_t            header [NPORT];
  logic [2:0]       out_sel [NPORT];
  logic [2:0]       in_sel  [NPORT];
  int checks = 0, failures = 0;

  hermes_control #(.ADDRESS(8'h11)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // request from port p to target t; returns the clocks until the grant
  task automatic request(input int p, input flit_t t, output int lat);
    @(negedge clk);
    header[p] = t; h[p] = 1;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!ack_h[p]);
    @(negedge clk);
    h[p] = 0; sender[p] = 1;
  endtask

  task automatic close(input int p);
    @(negedge clk) sender[p] = 0;
    @(negedge clk);
  endtask

  initial begin
    int lat;
    int order [$];
    flit_t tgt [5] = '{8'h21, 8'h01, 8'h12, 8'h10, 8'h11};  // E, W, N, S, L
    foreach (header[i]) header[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;

    // XY routing, one request at a time from the local port
    for (int d = 0; d < 5; d++) begin
      request(LOCAL, tgt[d], lat);
      chk(in_conn[LOCAL] && in_sel[LOCAL] == 3'(d), $sformatf("target %h routed to %0d", tgt[d], in_sel[LOCAL]));
      chk(out_busy[d] && out_sel[d] == 3'(LOCAL), "output table");
      chk(lat == 5, $sformatf("grant after %0d clocks", lat));
      close(LOCAL);
      chk(!out_busy[d] && !in_conn[LOCAL], "connection not closed");
    end
    // X before Y: 22 from 11 goes east
    request(WEST, 8'h22, lat);
    chk(in_sel[WEST] == 3'(EAST), "X not routed first");
    close(WEST);

    // round-robin: all five ports ask for different outputs at once
    @(negedge clk);
    for (int p = 0; p < 5; p++) begin header[p] = tgt[4 - p]; h[p] = 1; end
    while (order.size() < 5) begin
      @(posedge clk);
      for (int p = 0; p < 5; p++) if (ack_h[p]) order.push_back(p);
      @(negedge clk);
      for (int p = 0; p < 5; p++) if (ack_h[p]) begin h[p] = 0; sender[p] = 1; end
    end
    chk(in_conn == 5'b11111, "five simultaneous connections");
    for (int i = 1; i < 5; i++) chk(order[i] == (order[i-1] + 1) % 5, $sformatf("grant order %p", order));
    for (int p = 0; p < 5; p++) close(p);

    // busy output: port E holds LOCAL; port N asks for LOCAL and must wait
    request(EAST, 8'h11, lat);
    @(negedge clk);
    header[NORTH] = 8'h11; h[NORTH] = 1;
    lat = 0;
    fork
      begin
        while (!ack_h[NORTH]) begin @(posedge clk); lat++; end
        @(negedge clk) begin h[NORTH] = 0; sender[NORTH] = 1; end
      end
      begin
        repeat (40) @(posedge clk);
        chk(!in_conn[NORTH] && !ack_h[NORTH], "granted a busy output");
        close(EAST);
      end
    join
    @(negedge clk);
    chk(lat > 40 && lat < 52, $sformatf("waiting request served %0d clocks after it was raised", lat));
    chk(in_conn[NORTH] && out_sel[LOCAL] == 3'(NORTH), "waiting request not served after release");

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

// tb_hermes_buffer -- self-checking test of a router input buffer.
//
// Packets are offered on the input side with the two-cycle handshake while
// the output side is acknowledged by a receiver model that can be stalled.
// Checks: the header request appears only with a header at the head, nothing
// leaves before ack_h, all flits leave in order, sender drops after the last
// payload flit (packet length taken from the second flit, zero-length
// packets included), at most two flits are held, and a free-flowing flit
// takes two clocks.
module tb_hermes_buffer;
  import multinoc_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic  rx = 0, ack_rx, h, ack_h = 0, sender, data_av, data_ack;
  flit_t data_in = '0, data;
  logic  stall = 1;
  flit_t out [$];
  int    out_t [$];   // clock of each output transfer
  int checks = 0, failures = 0, accepted = 0;

  hermes_buffer dut (.*);

  // receiver model on the output side
  always_ff @(posedge clk) begin
    if (rst) data_ack <= 0;
    else begin
      data_ack <= data_av && !data_ack && !stall;
      if (data_av && !data_ack && !stall) begin out.push_back(data); out_t.push_back($time / 10); end
    end
  end
  always @(posedge clk) if (ack_rx) accepted++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic send(input flit_t p[$]);
    foreach (p[i]) begin
      data_in = p[i]; rx = 1;
      @(posedge clk);
      while (!ack_rx) @(posedge clk);
      #1 rx = 0;
    end
  endtask

  task automatic grant();
    wait (h);
    @(negedge clk) ack_h = 1;
    @(negedge clk) ack_h = 0;
  endtask

  initial begin
    flit_t p[$];
    repeat (3) @(posedge clk);
    #1 rst = 0;
    chk(!h && !sender, "request without data");

    // 1. packet of 6 payload flits; output stalled, no grant: only 2 flits enter
    p = {8'h11, 8'd6, 8'h01, 8'h02, 8'h03, 8'h04, 8'h05, 8'h06};
    fork
      send(p);
      begin
        repeat (30) @(posedge clk);
        chk(accepted == 2, $sformatf("buffer took %0d flits without room", accepted));
        chk(h && !data_av, "no header request, or data before grant");
        stall = 0;
        grant();
      end
    join
    repeat (20) @(posedge clk);
    chk(out.size() == p.size(), $sformatf("%0d flits out", out.size()));
    foreach (p[i]) if (i < out.size()) chk(out[i] == p[i], $sformatf("flit %0d", i));
    chk(!sender && !h, "connection not closed after last flit");
    out = {};

    // 2. zero-length packet followed by a 1-flit packet
    fork
      send({8'h22, 8'd0, 8'h33, 8'd1, 8'hAB});
      begin grant(); @(negedge clk); wait (!sender); grant(); end
    join
    repeat (20) @(posedge clk);
    chk(out.size() == 5 && out[1] == 8'd0 && out[2] == 8'h33 && out[4] == 8'hAB, "back-to-back packets");
    chk(!sender, "sender after second packet");
    out = {};

    // 3. throughput: 20 payload flits, connection granted at once
    p = {8'h44, 8'd20};
    for (int i = 0; i < 20; i++) p.push_back(flit_t'(i));
    out_t = {};
    fork
      send(p);
      grant();
    join
    repeat (10) @(posedge clk);
    chk(out.size() == 22, "long packet");
    // once connected, one flit leaves every two clocks
    chk(out_t.size() >= 22 && out_t[21] - out_t[1] == 2 * 20,
        $sformatf("20 flits took %0d clocks", out_t[21] - out_t[1]));
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

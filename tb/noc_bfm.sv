// noc_bfm -- bus-functional model of one end of a Hermes NoC link, for tests.
//
// It plays the role of a router local port facing an IP: send() offers the
// flits of a packet on `tx`/`data_out`, holding each until `ack_tx`, and the
// receive side acknowledges every flit offered on `rx`/`data_in` one clock
// later (the two-cycle handshake of the design) and queues it in `got`.
// `hold_rx` stops acknowledging, to create back-pressure.
module noc_bfm
  import multinoc_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  output logic  tx,
  output flit_t data_out,
  input  logic  ack_tx,
  input  logic  rx,
  input  flit_t data_in,
  output logic  ack_rx
);
  flit_t got [$];
  logic  hold_rx = 1'b0;

  initial begin
    tx       = 1'b0;
    data_out = '0;
  end

  always_ff @(posedge clk) begin
    if (rst) ack_rx <= 1'b0;
    else begin
      ack_rx <= rx && !ack_rx && !hold_rx;
      if (rx && !ack_rx && !hold_rx) got.push_back(data_in);
    end
  end

  task automatic send(input flit_t pkt[$]);
    foreach (pkt[i]) begin
      data_out = pkt[i];
      tx       = 1'b1;
      @(posedge clk);
      while (!ack_tx) @(posedge clk);
      #1;
      tx = 1'b0;
    end
  endtask

  // wait until n flits are queued or the time-out (in clocks) runs out
  task automatic wait_flits(input int n, input int timeout);
    for (int i = 0; i < timeout && got.size() < n; i++) @(posedge clk);
  endtask
endmodule

// multinoc -- MultiNoC: two R8 processor IPs, a remote memory and a serial
// link to a host, connected by a 2x2 Hermes network on chip.
//
//   router 00  Serial IP (RS-232 to the host)
//   router 01  Processor IP 1 (R8 bus on index 0 of the r8_* ports)
//   router 10  Processor IP 2 (R8 bus on index 1 of the r8_* ports)
//   router 11  remote Memory IP (1K x 16-bit, NoC access only)
//
// The host loads programs and data by write packets, starts the processors
// with activate packets, serves their printf/scanf requests and reads memory
// back, all through the Serial IP. The processors reach each other's memory
// and the remote memory with read and write packets and synchronise with
// wait and notify (see proc_ctrl).
//
// External interface as in the paper: clock, reset, tx (serial data from the
// host) and rx (serial data to the host). The R8 cores are not part of this
// RTL, so each Processor IP's core bus is brought out as ports: the core
// drives r8_ce, r8_rw, r8_addr and r8_dout (store data) and receives r8_din
// (load data, one clock after the access ends), r8_wait (hold the access),
// r8_reset (held until activated); it reports r8_halt. The clock is the
// system clock itself (the board clock divider of the prototype is outside).
// Reset is synchronous and active high.
module multinoc
  import multinoc_pkg::*;
(
  input  logic       clock,
  input  logic       reset,
  input  logic       tx,            // host -> MultiNoC
  output logic       rx,            // MultiNoC -> host
  // R8 core buses, [0] = processor 1, [1] = processor 2
  input  logic [1:0] r8_ce,
  input  logic [1:0] r8_rw,
  input  word_t      r8_addr [2],
  input  word_t      r8_dout [2],
  output word_t      r8_din  [2],
  output logic [1:0] r8_wait,
  input  logic [1:0] r8_halt,
  output logic [1:0] r8_reset
);

  // NoC local ports: 0 = router 00, 1 = router 10, 2 = router 01, 3 = router 11
  logic [3:0] l_rx, l_ack_rx, l_tx, l_ack_tx;
  flit_t      l_din [4];
  flit_t      l_dout[4];

  hermes_noc u_noc (
    .clk(clock), .rst(reset),
    .l_rx, .l_din, .l_ack_rx, .l_tx, .l_dout, .l_ack_tx
  );

  serial_ip #(.ADDRESS(ADDR_SERIAL)) u_serial (
    .clk(clock), .rst(reset), .rxd(tx), .txd(rx),
    .tx(l_rx[0]), .data_out(l_din[0]), .ack_tx(l_ack_rx[0]),
    .rx(l_tx[0]), .data_in(l_dout[0]), .ack_rx(l_ack_tx[0])
  );

  processor_ip #(.ADDRESS(ADDR_P1), .OTHER_PROC(ADDR_P2)) u_proc1 (
    .clk(clock), .rst(reset),
    .ce(r8_ce[0]), .rw(r8_rw[0]), .addr(r8_addr[0]), .dout(r8_dout[0]),
    .din(r8_din[0]), .waitR8(r8_wait[0]), .haltR8(r8_halt[0]), .resetR8(r8_reset[0]),
    .tx(l_rx[2]), .data_out(l_din[2]), .ack_tx(l_ack_rx[2]),
    .rx(l_tx[2]), .data_in(l_dout[2]), .ack_rx(l_ack_tx[2])
  );

  processor_ip #(.ADDRESS(ADDR_P2), .OTHER_PROC(ADDR_P1)) u_proc2 (
    .clk(clock), .rst(reset),
    .ce(r8_ce[1]), .rw(r8_rw[1]), .addr(r8_addr[1]), .dout(r8_dout[1]),
    .din(r8_din[1]), .waitR8(r8_wait[1]), .haltR8(r8_halt[1]), .resetR8(r8_reset[1]),
    .tx(l_rx[1]), .data_out(l_din[1]), .ack_tx(l_ack_rx[1]),
    .rx(l_tx[1]), .data_in(l_dout[1]), .ack_rx(l_ack_tx[1])
  );

  word_t remote_dout;
  logic  remote_busy;

  memory_ip u_memory (
    .clk(clock), .rst(reset), .addressCore(ADDR_MEM),
    .tx(l_rx[3]), .data_out(l_din[3]), .ack_tx(l_ack_rx[3]),
    .rx(l_tx[3]), .data_in(l_dout[3]), .ack_rx(l_ack_tx[3]),
    .ceR8(1'b0), .rwR8(1'b1), .addrR8('0), .dinR8('0), .doutR8(remote_dout),
    .busyNoCR8(1'b0), .busyNoCMem(remote_busy)
  );

endmodule

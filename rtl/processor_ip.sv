// processor_ip -- Processor IP of MultiNoC without its R8 core.
//
// The IP joins the processor control logic (proc_ctrl) and a local Memory IP
// (memory_ip, 1K x 16-bit, the core's program and data memory) behind one
// NoC local port. Every incoming flit is acknowledged by the Memory IP, which
// serves read and write packets; proc_ctrl watches the same flits and serves
// activate, notify, read return and scanf return. Outgoing flits come from
// whichever of the two currently owns the port: busyNoCR8 (proc_ctrl wants
// or uses the port) and busyNoCMem (the memory is sending a read return)
// keep them apart.
//
// The R8 core is outside: its bus (ce, rw, addr, dout to the IP, din to the
// core, waitR8, haltR8, resetR8) is brought out as ports, with the timing
// described in proc_ctrl. The split into control logic and Memory IP and
// the busy signals follow the paper's Processor IP figure; the sharing
// scheme of the one NoC port is this design's.
module processor_ip
  import multinoc_pkg::*;
#(
  parameter flit_t ADDRESS    = ADDR_P1,
  parameter flit_t OTHER_PROC = ADDR_P2
) (
  input  logic  clk,
  input  logic  rst,
  // R8 core bus
  input  logic  ce,
  input  logic  rw,
  input  word_t addr,
  input  word_t dout,
  output word_t din,
  output logic  waitR8,
  input  logic  haltR8,
  output logic  resetR8,
  // NoC local port, as seen from the IP
  output logic  tx,
  output flit_t data_out,
  input  logic  ack_tx,
  input  logic  rx,
  input  flit_t data_in,
  output logic  ack_rx
);

  logic  ceR8, rwR8, busyNoCR8, busyNoCMem;
  word_t addrR8, dinR8, doutR8;
  logic  m_tx, c_tx;
  flit_t m_data, c_data;

  memory_ip u_mem (
    .clk, .rst, .addressCore(ADDRESS),
    .tx(m_tx), .data_out(m_data), .ack_tx,
    .rx, .data_in, .ack_rx,
    .ceR8, .rwR8, .addrR8, .dinR8, .doutR8, .busyNoCR8, .busyNoCMem
  );

  proc_ctrl #(.OTHER_PROC(OTHER_PROC)) u_ctrl (
    .clk, .rst, .addressCore(ADDRESS),
    .ce, .rw, .addr, .dout, .din, .waitR8, .haltR8, .resetR8,
    .ceR8, .rwR8, .addrR8, .dinR8, .doutR8, .busyNoCR8, .busyNoCMem,
    .tx(c_tx), .data_out(c_data), .ack_tx, .data_in, .ack_rx
  );

  assign tx       = m_tx || c_tx;
  assign data_out = busyNoCMem ? m_data : c_data;

  // The memory and the control logic never send at the same time.
  a_one_sender: assert property (@(posedge clk) disable iff (rst) !(m_tx && c_tx));

endmodule

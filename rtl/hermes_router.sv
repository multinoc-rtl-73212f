// hermes_router -- five-port Hermes wormhole router (East, West, North,
// South, Local).
//
// Each input port has a hermes_buffer; one hermes_control serves all header
// requests and keeps the connection tables; a crossbar made of multiplexers
// routes each connected input buffer's flit, data-available signal and the
// returning acknowledge between the buffer and its output port. Ports are
// indexed EAST=0, WEST=1, NORTH=2, SOUTH=3, LOCAL=4 (multinoc_pkg).
//
// Per port p: rx[p]/data_in[p]/ack_rx[p] bring flits in, tx[p]/data_out[p]/
// ack_tx[p] send them out, with the two-cycle handshake described in
// hermes_buffer. The router is built as the paper describes it (centralized
// control, 2-flit circular input buffers, XY routing, round-robin arbitration);
// the internal signal split is this design's.
module hermes_router
  import multinoc_pkg::*;
#(
  parameter flit_t ADDRESS = 8'h00,
  parameter int    DEPTH   = 2
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [NPORT-1:0] rx,
  input  flit_t            data_in  [NPORT],
  output logic [NPORT-1:0] ack_rx,
  output logic [NPORT-1:0] tx,
  output flit_t            data_out [NPORT],
  input  logic [NPORT-1:0] ack_tx
);

  logic [NPORT-1:0] h, ack_h, sender, data_av, data_ack;
  flit_t            data [NPORT];
  logic [NPORT-1:0] out_busy, in_conn;
  logic [2:0]       out_sel [NPORT];
  logic [2:0]       in_sel  [NPORT];

  for (genvar p = 0; p < NPORT; p++) begin : g_buf
    hermes_buffer #(.DEPTH(DEPTH)) u_buf (
      .clk, .rst,
      .rx(rx[p]), .data_in(data_in[p]), .ack_rx(ack_rx[p]),
      .h(h[p]), .ack_h(ack_h[p]), .sender(sender[p]),
      .data_av(data_av[p]), .data(data[p]), .data_ack(data_ack[p])
    );
  end

  hermes_control #(.ADDRESS(ADDRESS)) u_ctrl (
    .clk, .rst, .h, .header(data), .sender, .ack_h,
    .out_busy, .out_sel, .in_conn, .in_sel
  );

  // crossbar
  always_comb begin
    for (int o = 0; o < NPORT; o++) begin
      tx[o]       = out_busy[o] && data_av[out_sel[o]];
      data_out[o] = data[out_sel[o]];
    end
    for (int i = 0; i < NPORT; i++) begin
      data_ack[i] = in_conn[i] && ack_tx[in_sel[i]];
    end
  end

endmodule

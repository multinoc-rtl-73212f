// hermes_noc -- the 2x2 Hermes mesh of MultiNoC.
//
// Four hermes_router instances with addresses 00, 10, 01 and 11 (X in the
// high nibble, Y in the low nibble) are joined by bidirectional links: the
// east port of router X=0 faces the west port of router X=1 in the same row,
// and the north port of router Y=0 faces the south port of router Y=1 in
// the same column. Ports at the border of the mesh are tied off (no flits in,
// never acknowledged); XY routing never selects them for an address inside
// the mesh. Each router's local port is brought out as local index
// 0..3 = router 00, 10, 01, 11 (index = x + 2*y). The mesh size follows the
// paper's Fig. 1; the index order is this design's.
module hermes_noc
  import multinoc_pkg::*;
#(
  parameter int DEPTH = 2
) (
  input  logic       clk,
  input  logic       rst,
  // local ports, as seen from the IP: the IP sends on l_rx/l_din, receives on l_tx/l_dout
  input  logic [3:0] l_rx,
  input  flit_t      l_din  [4],
  output logic [3:0] l_ack_rx,
  output logic [3:0] l_tx,
  output flit_t      l_dout [4],
  input  logic [3:0] l_ack_tx
);

  logic [NPORT-1:0] rx     [4];
  logic [NPORT-1:0] ack_rx [4];
  logic [NPORT-1:0] tx     [4];
  logic [NPORT-1:0] ack_tx [4];
  flit_t            din    [4][NPORT];
  flit_t            dout   [4][NPORT];

  for (genvar r = 0; r < 4; r++) begin : g_r
    localparam int X = r % 2;
    localparam int Y = r / 2;
    hermes_router #(.ADDRESS(flit_t'((X << 4) | Y)), .DEPTH(DEPTH)) u_router (
      .clk, .rst,
      .rx(rx[r]), .data_in(din[r]), .ack_rx(ack_rx[r]),
      .tx(tx[r]), .data_out(dout[r]), .ack_tx(ack_tx[r])
    );
  end

  // neighbour of router r through port p, -1 at the border
  function automatic int nb(input int r, input int p);
    int x, y;
    x = r % 2; y = r / 2;
    case (p)
      EAST:    return (x == 0) ? r + 1 : -1;
      WEST:    return (x == 1) ? r - 1 : -1;
      NORTH:   return (y == 0) ? r + 2 : -1;
      SOUTH:   return (y == 1) ? r - 2 : -1;
      default: return -1;
    endcase
  endfunction

  // port of the neighbour that faces port p
  function automatic int opp(input int p);
    case (p)
      EAST:    return WEST;
      WEST:    return EAST;
      NORTH:   return SOUTH;
      default: return NORTH;
    endcase
  endfunction

  always_comb begin
    for (int r = 0; r < 4; r++) begin
      for (int p = 0; p < 4; p++) begin
        if (nb(r, p) >= 0) begin
          rx[r][p]     = tx[nb(r, p)][opp(p)];
          din[r][p]    = dout[nb(r, p)][opp(p)];
          ack_tx[r][p] = ack_rx[nb(r, p)][opp(p)];
        end else begin
          rx[r][p]     = 1'b0;
          din[r][p]    = '0;
          ack_tx[r][p] = 1'b0;
        end
      end
      rx[r][LOCAL]     = l_rx[r];
      din[r][LOCAL]    = l_din[r];
      ack_tx[r][LOCAL] = l_ack_tx[r];
      l_ack_rx[r]      = ack_rx[r][LOCAL];
      l_tx[r]          = tx[r][LOCAL];
      l_dout[r]        = dout[r][LOCAL];
    end
  end

endmodule

// hermes_control -- the single, centralized control logic of a Hermes router.
//
// It serves header requests from the five input buffers one at a time. A
// round-robin pointer picks the next requesting port after the one served
// last (so no port starves, as the paper requires); the target address of
// that port's header flit is then compared with the router's own address by
// the XY algorithm (first along X, then along Y). If the chosen output port
// is free the connection is written into the connection tables and the
// buffer is acknowledged; if it is busy nothing is granted and the request
// stays pending for a later round, as the paper describes. Connections close
// when the buffer drops `sender` after the packet's last flit. Up to five
// connections can be open at once.
//
// Timing: a request is served in the sequence IDLE, ARBITRATE, ROUTE, CHECK,
// CONNECT, one clock each (the paper says only that routing takes at least 7
// cycles per router; the state split is this design's). Addresses are 8-bit,
// X in the high nibble and Y in the low nibble, as in the IP names of the
// paper's block diagram. X grows towards EAST and Y towards NORTH (direction
// names are this design's choice).
module hermes_control
  import multinoc_pkg::*;
#(
  parameter flit_t ADDRESS = 8'h00
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [NPORT-1:0] h,                // header requests
  input  flit_t            header [NPORT],   // head flit of each buffer
  input  logic [NPORT-1:0] sender,           // buffer still sending its packet
  output logic [NPORT-1:0] ack_h,            // connection granted
  // connection tables
  output logic [NPORT-1:0] out_busy,         // output port o is in use
  output logic [2:0]       out_sel [NPORT],  // input port driving output o
  output logic [NPORT-1:0] in_conn,          // input port i is connected
  output logic [2:0]       in_sel  [NPORT]   // output port fed by input i
);

  typedef enum logic [2:0] {S_IDLE, S_ARB, S_ROUTE, S_CHECK, S_CONNECT} state_e;
  state_e     state;
  logic [2:0] sel;        // input port being served
  logic [2:0] last;       // port served last (round-robin pointer)
  logic [2:0] dir;        // output chosen by XY routing
  logic [2:0] rr_next;

  // Round-robin choice: first requesting port after `last`.
  always_comb begin
    rr_next = last;
    for (int k = NPORT; k >= 1; k--) begin
      automatic int p = (int'(last) + k) % NPORT;
      if (h[p]) rr_next = 3'(p);
    end
  end

  // XY routing of the selected header.
  function automatic logic [2:0] xy_route(input flit_t here, input flit_t tgt);
    logic [3:0] xl, yl, xt, yt;
    xl = here[7:4]; yl = here[3:0];
    xt = tgt[7:4];  yt = tgt[3:0];
    if (xt > xl)      return 3'(EAST);
    else if (xt < xl) return 3'(WEST);
    else if (yt > yl) return 3'(NORTH);
    else if (yt < yl) return 3'(SOUTH);
    else              return 3'(LOCAL);
  endfunction

  always_comb begin
    ack_h = '0;
    if (state == S_CONNECT) ack_h[sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      sel      <= '0;
      last     <= 3'(NPORT-1);
      dir      <= '0;
      out_busy <= '0;
      in_conn  <= '0;
      for (int p = 0; p < NPORT; p++) begin
        out_sel[p] <= '0;
        in_sel[p]  <= '0;
      end
    end else begin
      // close finished connections
      for (int i = 0; i < NPORT; i++) begin
        if (in_conn[i] && !sender[i]) begin
          in_conn[i]          <= 1'b0;
          out_busy[in_sel[i]] <= 1'b0;
        end
      end

      unique case (state)
        S_IDLE:  if (h != '0) state <= S_ARB;
        S_ARB: begin
          sel   <= rr_next;
          last  <= rr_next;
          state <= S_ROUTE;
        end
        S_ROUTE: begin
          dir   <= xy_route(ADDRESS, header[sel]);
          state <= S_CHECK;
        end
        S_CHECK: state <= (out_busy[dir] || !h[sel]) ? S_IDLE : S_CONNECT;
        S_CONNECT: begin
          out_busy[dir] <= 1'b1;
          out_sel[dir]  <= sel;
          in_conn[sel]  <= 1'b1;
          in_sel[sel]   <= dir;
          state         <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // An output port is never given to two inputs.
  a_no_double_grant: assert property (@(posedge clk) disable iff (rst)
    (state == S_CONNECT) |-> !out_busy[dir]);

endmodule

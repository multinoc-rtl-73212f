// hermes_buffer -- input buffer of one Hermes router port.
//
// Each router input port stores incoming flits in a small circular FIFO
// (2 flits in MultiNoC, as in the paper) so that a blocked packet occupies
// fewer routers. The buffer also follows the packet it holds: when a header
// flit reaches the head of the FIFO it raises `h` to ask the router control
// for a connection and waits for `ack_h`. Once connected it forwards the
// header, the length flit and then as many payload flits as the length flit
// says; after the last one it drops `sender`, which tells the control logic
// to close the connection (wormhole switching).
//
// Flit handshake (both sides, the paper gives the signal names and that a
// flit needs at least two clock cycles; the exact protocol is this design's):
// the sender holds `rx`/`data_in` until it sees `ack_rx`. The buffer writes a
// flit in a cycle where rx=1, ack_rx=0 and there is room, and answers with a
// one-cycle registered ack_rx. The sender drops the flit on that ack, so a
// flit takes two cycles. The output side is the same protocol seen from the
// sender: `data_av` is the tx towards the next router, `data_ack` its ack.
module hermes_buffer
  import multinoc_pkg::*;
#(
  parameter int DEPTH = 2
) (
  input  logic  clk,
  input  logic  rst,
  // from the neighbour (or the local IP)
  input  logic  rx,
  input  flit_t data_in,
  output logic  ack_rx,
  // to the router control
  output logic  h,          // header at the head, asking for a connection
  input  logic  ack_h,      // connection granted
  output logic  sender,     // connection in use by this buffer
  // towards the output port it is connected to
  output logic  data_av,
  output flit_t data,
  input  logic  data_ack
);

  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t          mem [DEPTH];
  logic [PW-1:0]  rd_ptr, wr_ptr;
  logic [PW:0]    count;
  logic           wr_en, rd_en;

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_SEND} state_e;
  state_e state;
  logic [1:0] idx;          // 0: header, 1: length, 2: payload
  logic [7:0] remaining;    // payload flits still to send

  assign wr_en = rx && !ack_rx && (count != (PW+1)'(DEPTH));
  assign rd_en = (state == S_SEND) && data_ack && (count != '0);

  assign data    = mem[rd_ptr];
  assign data_av = (state == S_SEND) && (count != '0);
  assign h       = (state == S_WAIT);
  assign sender  = (state == S_SEND);

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_ptr] <= data_in;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ptr    <= '0;
      wr_ptr    <= '0;
      count     <= '0;
      ack_rx    <= 1'b0;
      state     <= S_IDLE;
      idx       <= '0;
      remaining <= '0;
    end else begin
      ack_rx <= wr_en;
      if (wr_en) wr_ptr <= inc(wr_ptr);
      if (rd_en) rd_ptr <= inc(rd_ptr);
      count <= count + (PW+1)'(wr_en) - (PW+1)'(rd_en);

      unique case (state)
        S_IDLE: if (count != '0) state <= S_WAIT;
        S_WAIT: if (ack_h) begin
          state <= S_SEND;
          idx   <= 2'd0;
        end
        S_SEND: if (rd_en) begin
          unique case (idx)
            2'd0: idx <= 2'd1;
            2'd1: begin
              idx       <= 2'd2;
              remaining <= data;
              if (data == '0) state <= S_IDLE;
            end
            default: begin
              remaining <= remaining - 1'b1;
              if (remaining == 8'd1) state <= S_IDLE;
            end
          endcase
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A connection is only granted to a buffer that asked for one.
  a_ack_h_only_when_asked: assert property (@(posedge clk) disable iff (rst) ack_h |-> h);
  // The sender keeps a flit on the wire until it is acknowledged.
  a_ack_only_with_rx: assert property (@(posedge clk) disable iff (rst) ack_rx |-> rx);

endmodule

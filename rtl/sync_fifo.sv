// sync_fifo -- small synchronous FIFO used by the Serial IP.
//
// DEPTH entries of W bits in a circular array. push stores din when the FIFO
// is not full; pop drops the head when it is not empty; both may happen in
// the same clock. dout always shows the head; empty, full and count are
// registered state. Reset empties it.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   push,
  input  logic [W-1:0]           din,
  input  logic                   pop,
  output logic [W-1:0]           dout,
  output logic                   empty,
  output logic                   full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int PW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rd, wr;
  logic          do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == (PW+1)'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rd];

  always_ff @(posedge clk) begin
    if (do_push) mem[wr] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd    <= '0;
      wr    <= '0;
      count <= '0;
    end else begin
      if (do_push) wr <= (wr == PW'(DEPTH-1)) ? '0 : wr + 1'b1;
      if (do_pop)  rd <= (rd == PW'(DEPTH-1)) ? '0 : rd + 1'b1;
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end
endmodule

// uart_rx_autobaud -- RS-232 receiver that learns the host's baud rate.
//
// After reset the receiver waits for the synchronisation byte 55h. Sent LSB
// first with a start bit, 55h makes the line fall at the start of bits 0, 2,
// 4, 6 and 8 of the frame (start bit, then data bits 1, 3, 5 and 7), so the
// time from the first to the fifth falling edge is exactly eight bit times.
// That count, divided by eight, becomes the bit period `div` in clocks, which
// the transmitter uses too. From then on each frame (start bit, 8 data bits
// LSB first, one stop bit) is sampled in the middle of every bit and the byte
// is delivered with a one-clock `valid` pulse. A frame whose stop bit is low
// is dropped. The 55h synchronisation is the paper's; the measurement method
// is this design's.
module uart_rx_autobaud #(
  parameter int CW = 20          // counter width: up to 2**CW clocks per frame
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          rxd,
  output logic          synced,
  output logic [CW-4:0] div,     // clocks per bit
  output logic          valid,
  output logic [7:0]    data
);

  logic [2:0] sync_q;            // input synchroniser and edge detector
  logic       line, fall;
  assign line = sync_q[1];
  assign fall = sync_q[2] && !sync_q[1];

  typedef enum logic [2:0] {B_IDLE, B_MEASURE, B_STOP, R_IDLE, R_START, R_BITS, R_STOP} state_e;
  state_e        state;
  logic [CW-1:0] cnt;
  logic [2:0]    edges;
  logic [2:0]    bitn;
  logic [7:0]    shreg;

  always_ff @(posedge clk) begin
    if (rst) sync_q <= 3'b111;
    else     sync_q <= {sync_q[1:0], rxd};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= B_IDLE;
      synced <= 1'b0;
      div    <= '0;
      cnt    <= '0;
      edges  <= '0;
      bitn   <= '0;
      shreg  <= '0;
      valid  <= 1'b0;
      data   <= '0;
    end else begin
      valid <= 1'b0;
      unique case (state)
        B_IDLE: if (fall) begin
          cnt   <= CW'(1);
          edges <= 3'd1;
          state <= B_MEASURE;
        end
        B_MEASURE: begin
          cnt <= cnt + 1'b1;
          if (fall) begin
            edges <= edges + 1'b1;
            if (edges == 3'd4) begin
              div   <= cnt[CW-1:3];
              state <= B_STOP;
            end
          end
        end
        B_STOP: if (line) begin   // line back high in bit 8 (stop bit)
          synced <= 1'b1;
          state  <= R_IDLE;
        end
        R_IDLE: if (fall) begin
          cnt   <= '0;
          state <= R_START;
        end
        R_START: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(div >> 1)) begin
            cnt   <= '0;
            bitn  <= '0;
            state <= line ? R_IDLE : R_BITS;   // glitch: not a start bit
          end
        end
        R_BITS: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(div) - 1'b1) begin
            cnt   <= '0;
            shreg <= {line, shreg[7:1]};
            bitn  <= bitn + 1'b1;
            if (bitn == 3'd7) state <= R_STOP;
          end
        end
        R_STOP: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(div) - 1'b1) begin
            valid <= line;
            data  <= shreg;
            state <= R_IDLE;
          end
        end
        default: state <= B_IDLE;
      endcase
    end
  end
endmodule

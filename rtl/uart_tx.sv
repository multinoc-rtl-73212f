// uart_tx -- RS-232 transmitter with a run-time bit period.
//
// When `start` is seen while idle, `data` is sent as one frame: a low start
// bit, eight data bits LSB first and a high stop bit, each `div` clocks long.
// `busy` is high from the start request until the stop bit has ended; the
// line idles high. Frame format follows common RS-232 practice (8N1); the
// paper names only the RS-232 standard.
module uart_tx #(
  parameter int DW = 17
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [DW-1:0] div,
  input  logic          start,
  input  logic [7:0]    data,
  output logic          busy,
  output logic          txd
);
  logic [DW-1:0] cnt;
  logic [3:0]    bitn;     // 0: start bit, 1..8: data, 9: stop
  logic [8:0]    shreg;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      txd   <= 1'b1;
      cnt   <= '0;
      bitn  <= '0;
      shreg <= '1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (start) begin
        busy  <= 1'b1;
        txd   <= 1'b0;
        shreg <= {1'b1, data};
        cnt   <= '0;
        bitn  <= '0;
      end
    end else begin
      cnt <= cnt + 1'b1;
      if (cnt == div - 1'b1) begin
        cnt <= '0;
        if (bitn == 4'd9) begin
          busy <= 1'b0;
          txd  <= 1'b1;
        end else begin
          txd   <= shreg[0];
          shreg <= {1'b1, shreg[8:1]};
          bitn  <= bitn + 1'b1;
        end
      end
    end
  end
endmodule

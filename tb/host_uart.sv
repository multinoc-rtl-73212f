// host_uart -- behavioural model of the host computer's serial port.
//
// send_byte() drives one 8N1 frame on `txd` with a bit period of BIT clocks;
// every frame seen on `rxd` (sampled in the middle of each bit) is queued in
// `got`. sync() sends the 55h synchronisation byte.
module host_uart #(
  parameter int BIT = 16
) (
  input  logic clk,
  output logic txd,
  input  logic rxd
);
  logic [7:0] got [$];

  initial txd = 1'b1;

  task automatic send_byte(input logic [7:0] b);
    logic [9:0] frame;
    frame = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      txd = frame[i];
      repeat (BIT) @(posedge clk);
    end
  endtask

  task automatic sync();
    send_byte(8'h55);
    repeat (2*BIT) @(posedge clk);
  endtask

  task automatic send(input logic [7:0] bytes[$]);
    foreach (bytes[i]) send_byte(bytes[i]);
  endtask

  task automatic wait_bytes(input int n, input int timeout);
    for (int i = 0; i < timeout && got.size() < n; i++) @(posedge clk);
  endtask

  // receiver
  initial begin
    logic [7:0] b;
    forever begin
      @(negedge rxd);
      repeat (BIT/2) @(posedge clk);
      if (rxd == 1'b0) begin
        for (int i = 0; i < 8; i++) begin
          repeat (BIT) @(posedge clk);
          b[i] = rxd;
        end
        repeat (BIT) @(posedge clk);
        if (rxd) got.push_back(b);
      end
    end
  end
endmodule

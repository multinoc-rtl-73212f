// serial_ip -- bridge between the host's RS-232 line and the NoC.
//
// The host first sends 55h so the receiver can learn its baud rate; the
// transmitter answers at the same rate. After that the IP turns host
// commands into NoC packets and packets addressed to it into host bytes.
//
// Host to NoC (bytes from the host, 16-bit values high byte first):
//   00 tgt cnt ahi alo              read cnt words at a of IP tgt
//   02 tgt cnt ahi alo d1..d2cnt    write cnt words at a of IP tgt
//   03 tgt                          activate the processor at tgt
//   06 tgt hi lo                    scanf return value for processor tgt
// Each command becomes one packet from source 00 with the same command code.
// Header flits are queued as soon as they are known, data bytes as they
// arrive, so a long write streams through the network (wormhole). The
// payload length is one byte, which limits cnt to 125 words per command.
//
// NoC to host (packets addressed to 00):
//   read return    its data bytes only (one word read gives two bytes)
//   printf         04 src hi lo
//   scanf          05 src
//
// Flits wait in a 16-entry FIFO before the NoC, bytes in a 16-entry FIFO
// before the UART; a full byte FIFO holds the NoC back, a full flit FIFO
// drops host bytes (the host must not outrun the network). The command codes
// and the read syntax "00 tgt cnt addr" follow the paper's debugging
// example; the other host formats and the FIFOs are this design's choice.
module serial_ip
  import multinoc_pkg::*;
#(
  parameter flit_t ADDRESS = ADDR_SERIAL
) (
  input  logic  clk,
  input  logic  rst,
  // host side
  input  logic  rxd,
  output logic  txd,
  // NoC local port, as seen from the IP
  output logic  tx,
  output flit_t data_out,
  input  logic  ack_tx,
  input  logic  rx,
  input  flit_t data_in,
  output logic  ack_rx
);

  // ------------------------------------------------------------ UART
  logic        synced, rx_valid;
  logic [7:0]  rx_byte;
  logic [16:0] div;
  logic        utx_busy, utx_start;

  uart_rx_autobaud #(.CW(20)) u_rx (
    .clk, .rst, .rxd, .synced, .div, .valid(rx_valid), .data(rx_byte)
  );

  // ------------------------------------------------------------ host -> NoC
  logic  f_push, f_empty, f_full;
  flit_t f_din;
  logic [4:0] f_count;

  sync_fifo #(.W(8), .DEPTH(16)) u_flits (
    .clk, .rst, .push(f_push), .din(f_din), .pop(tx && ack_tx),
    .dout(data_out), .empty(f_empty), .full(f_full), .count(f_count)
  );
  assign tx = !f_empty;

  typedef enum logic [2:0] {H_CMD, H_TGT, H_CNT, H_AHI, H_ALO, H_DATA, H_HI, H_LO} hstate_e;
  hstate_e    hstate;
  cmd_e       hcmd;
  flit_t      htgt;
  logic [8:0] hleft;          // data bytes still expected
  flit_t      hq [5];         // header flits waiting to enter the FIFO
  logic [2:0] hq_n, hq_i;

  // one flit per clock: queued header flits first, else the byte just received
  logic  byte_flit;           // the received byte goes into the FIFO as is
  always_comb begin
    f_push = 1'b0;
    f_din  = rx_byte;
    if (hq_i != hq_n) begin
      f_push = 1'b1;
      f_din  = hq[hq_i];
    end else if (byte_flit) begin
      f_push = 1'b1;
    end
  end

  always_comb begin
    byte_flit = 1'b0;
    if (rx_valid && synced)
      unique case (hstate)
        H_AHI, H_ALO, H_DATA, H_HI, H_LO: byte_flit = 1'b1;
        default: ;
      endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      hstate <= H_CMD;
      hcmd   <= CMD_READ;
      htgt   <= '0;
      hleft  <= '0;
      hq_n   <= '0;
      hq_i   <= '0;
      for (int i = 0; i < 5; i++) hq[i] <= '0;
    end else begin
      if (hq_i != hq_n) hq_i <= hq_i + 1'b1;
      if (rx_valid && synced) begin
        unique case (hstate)
          H_CMD: begin
            hcmd <= cmd_e'(rx_byte);
            if (rx_byte inside {CMD_READ, CMD_WRITE, CMD_ACTIVATE, CMD_SCANF_RETURN})
              hstate <= H_TGT;
          end
          H_TGT: begin
            htgt <= rx_byte;
            unique case (hcmd)
              CMD_ACTIVATE: begin
                hq[0] <= rx_byte; hq[1] <= 8'd2; hq[2] <= ADDRESS; hq[3] <= CMD_ACTIVATE;
                hq_n <= 3'd4; hq_i <= '0;
                hstate <= H_CMD;
              end
              CMD_SCANF_RETURN: begin
                hq[0] <= rx_byte; hq[1] <= 8'd4; hq[2] <= ADDRESS; hq[3] <= CMD_SCANF_RETURN;
                hq_n <= 3'd4; hq_i <= '0;
                hstate <= H_HI;
              end
              default: hstate <= H_CNT;
            endcase
          end
          H_CNT: begin
            hq[0] <= htgt;
            hq[1] <= (hcmd == CMD_WRITE) ? 8'd5 + {rx_byte[6:0], 1'b0} : 8'd5;
            hq[2] <= ADDRESS;
            hq[3] <= hcmd;
            hq[4] <= rx_byte;
            hq_n  <= 3'd5;
            hq_i  <= '0;
            hleft <= {rx_byte, 1'b0};
            hstate <= H_AHI;
          end
          H_AHI:  hstate <= H_ALO;
          H_ALO:  hstate <= (hcmd == CMD_WRITE && hleft != '0) ? H_DATA : H_CMD;
          H_DATA: begin
            hleft <= hleft - 1'b1;
            if (hleft == 9'd1) hstate <= H_CMD;
          end
          H_HI:   hstate <= H_LO;
          default: hstate <= H_CMD;   // H_LO
        endcase
      end
    end
  end

  // ------------------------------------------------------------ NoC -> host
  logic       b_push, b_empty, b_full;
  logic [7:0] b_din, b_dout;
  logic [4:0] b_count;

  sync_fifo #(.W(8), .DEPTH(16)) u_bytes (
    .clk, .rst, .push(b_push), .din(b_din), .pop(utx_start),
    .dout(b_dout), .empty(b_empty), .full(b_full), .count(b_count)
  );

  assign utx_start = !b_empty && !utx_busy && synced;

  uart_tx #(.DW(17)) u_tx (
    .clk, .rst, .div, .start(utx_start), .data(b_dout), .busy(utx_busy), .txd
  );

  logic [7:0] pidx, pleft;
  flit_t      psrc;
  cmd_e       pcmd;
  logic       src_pending;    // the source byte of a printf/scanf still to queue
  logic       take;

  assign take = rx && !ack_rx && !src_pending && (b_count <= 5'd14);

  always_comb begin
    b_push = 1'b0;
    b_din  = data_in;
    if (src_pending) begin
      b_push = 1'b1;
      b_din  = psrc;
    end else if (take && pidx == 8'd3) begin
      b_push = (data_in == CMD_PRINTF) || (data_in == CMD_SCANF);
    end else if (take && pidx >= 8'd4) begin
      b_push = (pcmd == CMD_READ_RETURN) || (pcmd == CMD_PRINTF);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ack_rx      <= 1'b0;
      pidx        <= '0;
      pleft       <= '0;
      psrc        <= '0;
      pcmd        <= CMD_READ;
      src_pending <= 1'b0;
    end else begin
      ack_rx <= take;
      if (src_pending) src_pending <= 1'b0;
      if (take) begin
        if (pidx != 8'd4) pidx <= pidx + 1'b1;  // flits 0-3 told apart; no wrap
        if (pidx == 8'd1) begin
          pleft <= data_in;
          if (data_in == '0) pidx <= '0;
        end else if (pidx >= 8'd2) begin
          pleft <= pleft - 1'b1;
          if (pleft == 8'd1) pidx <= '0;
          if (pidx == 8'd2) psrc <= data_in;
          if (pidx == 8'd3) begin
            pcmd        <= cmd_e'(data_in);
            src_pending <= (data_in == CMD_PRINTF) || (data_in == CMD_SCANF);
          end
        end
      end
    end
  end

endmodule

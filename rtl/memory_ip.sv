// memory_ip -- 1K x 16-bit memory reachable from a processor bus and the NoC.
//
// Four 1024 x 4-bit blockram banks are accessed in parallel, bank k holding
// bits 4k+3..4k of every word (the paper's RAM0..RAM3). Three requesters share
// them, one per clock, in fixed priority: the processor interface (ceR8)
// first, as the paper requires, then a word written by a NoC packet, then a
// word read for a NoC read return.
//
// NoC side: the receiver parses every packet that arrives on the local port
// (target, length, source, command, arguments). A "write in memory" packet
// (count, address hi, address lo, count words hi/lo) stores its words at
// consecutive addresses. A "read from memory" packet (count, address hi,
// address lo) is handed to the transmitter, which answers the source with a
// "read return" packet carrying the count words. Packets with any other
// command are accepted and discarded here; inside a Processor IP the
// processor control logic watches the same flits and handles them.
// The transmitter only starts when busyNoCR8 is low and holds busyNoCMem high
// while it sends, so the processor control logic and the memory never drive
// the shared NoC interface together.
//
// Processor side: ceR8 enables an access, rwR8 = 1 reads and 0 writes,
// addrR8 (low 10 bits used) and dinR8 carry address and write data, doutR8
// shows the read word one clock after the access. The remote Memory IP ties
// ceR8 low (the paper says its processor interface does not exist).
//
// Flit handshake as in hermes_buffer: one flit per two clocks at best. The
// signal names follow the paper; the packet argument layout, the rwR8
// polarity and the one-clock read latency are this design's choices.
module memory_ip
  import multinoc_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  flit_t addressCore,   // this IP's router address
  // NoC interface, as seen from the IP
  output logic  tx,
  output flit_t data_out,
  input  logic  ack_tx,
  input  logic  rx,
  input  flit_t data_in,
  output logic  ack_rx,
  // processor interface
  input  logic  ceR8,
  input  logic  rwR8,
  input  word_t addrR8,
  input  word_t dinR8,
  output word_t doutR8,       // read data, one clock after the access
  input  logic  busyNoCR8,
  output logic  busyNoCMem
);

  // ---------------------------------------------------------------- banks
  logic        bank_en, bank_we;
  logic [9:0]  bank_addr;
  word_t       bank_di, bank_do;

  for (genvar k = 0; k < 4; k++) begin : g_ram
    blockram u_ram (
      .clk, .we(bank_we), .en(bank_en), .addr(bank_addr),
      .di(bank_di[4*k +: 4]), .dout(bank_do[4*k +: 4])
    );
  end
  assign doutR8 = bank_do;

  // ---------------------------------------------------------------- receiver
  typedef enum logic [2:0] {R_TGT, R_SIZE, R_SRC, R_CMD, R_ARG} rstate_e;
  rstate_e rstate;
  logic [7:0] left;          // payload flits still to come
  logic [7:0] argi;          // argument index
  flit_t      r_src;
  cmd_e       r_cmd;
  logic [7:0] r_count;
  logic [9:0] r_addr;
  flit_t      r_hi;
  logic       wr_pending;    // a received word waits for the banks
  logic [9:0] wr_addr;
  word_t      wr_data;
  logic       rd_pending;    // a read request waits for the transmitter
  flit_t      rd_src;
  logic [7:0] rd_count;
  logic [9:0] rd_addr0;
  logic       take, last_flit;

  assign take      = rx && !ack_rx && !wr_pending && !rd_pending;
  assign last_flit = (left == 8'd1);

  // ---------------------------------------------------------------- bank arbitration
  logic noc_rd_req, noc_rd_gnt, wr_gnt;
  logic [9:0] noc_rd_addr;

  always_comb begin
    bank_en    = 1'b0;
    bank_we    = 1'b0;
    bank_addr  = addrR8[9:0];
    bank_di    = dinR8;
    wr_gnt     = 1'b0;
    noc_rd_gnt = 1'b0;
    if (ceR8) begin
      bank_en = 1'b1;
      bank_we = !rwR8;
    end else if (wr_pending) begin
      bank_en   = 1'b1;
      bank_we   = 1'b1;
      bank_addr = wr_addr;
      bank_di   = wr_data;
      wr_gnt    = 1'b1;
    end else if (noc_rd_req) begin
      bank_en    = 1'b1;
      bank_addr  = noc_rd_addr;
      noc_rd_gnt = 1'b1;
    end
  end

  // ---------------------------------------------------------------- transmitter
  typedef enum logic [3:0] {T_IDLE, T_CLAIM, T_TGT, T_SIZE, T_SRC, T_CMD,
                            T_RD, T_RDW, T_HI, T_LO} tstate_e;
  tstate_e    tstate;
  flit_t      t_dst;
  logic [7:0] t_count;
  logic [9:0] t_addr;
  word_t      t_word;

  logic rd_taken;
  assign rd_taken    = (tstate == T_IDLE) && rd_pending;
  assign noc_rd_req  = (tstate == T_RD);
  assign noc_rd_addr = t_addr;
  assign tx          = (tstate inside {T_TGT, T_SIZE, T_SRC, T_CMD, T_HI, T_LO});
  assign busyNoCMem  = (tstate != T_IDLE) && (tstate != T_CLAIM);

  always_comb begin
    unique case (tstate)
      T_TGT:   data_out = t_dst;
      T_SIZE:  data_out = 8'd2 + {t_count[6:0], 1'b0};
      T_SRC:   data_out = addressCore;
      T_CMD:   data_out = CMD_READ_RETURN;
      T_HI:    data_out = t_word[15:8];
      T_LO:    data_out = t_word[7:0];
      default: data_out = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rstate     <= R_TGT;
      ack_rx     <= 1'b0;
      left       <= '0;
      argi       <= '0;
      r_src      <= '0;
      r_cmd      <= CMD_READ;
      r_count    <= '0;
      r_addr     <= '0;
      r_hi       <= '0;
      wr_pending <= 1'b0;
      wr_addr    <= '0;
      wr_data    <= '0;
      rd_pending <= 1'b0;
      rd_src     <= '0;
      rd_count   <= '0;
      rd_addr0   <= '0;
    end else begin
      ack_rx <= take;
      if (wr_gnt)   wr_pending <= 1'b0;
      if (rd_taken) rd_pending <= 1'b0;
      if (take) begin
        unique case (rstate)
          R_TGT:  rstate <= R_SIZE;
          R_SIZE: begin
            left   <= data_in;
            rstate <= (data_in == '0) ? R_TGT : R_SRC;
          end
          R_SRC: begin
            r_src  <= data_in;
            left   <= left - 1'b1;
            rstate <= last_flit ? R_TGT : R_CMD;
          end
          R_CMD: begin
            r_cmd  <= cmd_e'(data_in);
            left   <= left - 1'b1;
            argi   <= '0;
            rstate <= last_flit ? R_TGT : R_ARG;
          end
          default: begin  // R_ARG
            left <= left - 1'b1;
            argi <= argi + 1'b1;
            if (r_cmd == CMD_READ || r_cmd == CMD_WRITE) begin
              unique case (argi)
                8'd0:    r_count <= data_in;
                8'd1:    r_addr[9:8] <= data_in[1:0];
                8'd2:    r_addr[7:0] <= data_in;
                default: begin
                  if (argi[0]) r_hi <= data_in;
                  else if (r_cmd == CMD_WRITE) begin
                    wr_pending <= 1'b1;
                    wr_addr    <= r_addr;
                    wr_data    <= {r_hi, data_in};
                    r_addr     <= r_addr + 1'b1;
                  end
                end
              endcase
            end
            if (last_flit) begin
              rstate <= R_TGT;
              if (r_cmd == CMD_READ) begin
                rd_pending <= 1'b1;
                rd_src     <= r_src;
                rd_count   <= r_count;
                rd_addr0   <= (argi == 8'd2) ? {r_addr[9:8], data_in} : r_addr;
              end
            end
          end
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      tstate  <= T_IDLE;
      t_dst   <= '0;
      t_count <= '0;
      t_addr  <= '0;
      t_word  <= '0;
    end else begin
      unique case (tstate)
        T_IDLE: if (rd_pending) begin
          t_dst   <= rd_src;
          t_count <= rd_count;
          t_addr  <= rd_addr0;
          tstate  <= T_CLAIM;
        end
        T_CLAIM: if (!busyNoCR8) tstate <= T_TGT;
        T_TGT:   if (ack_tx) tstate <= T_SIZE;
        T_SIZE:  if (ack_tx) tstate <= T_SRC;
        T_SRC:   if (ack_tx) tstate <= T_CMD;
        T_CMD:   if (ack_tx) tstate <= (t_count == '0) ? T_IDLE : T_RD;
        T_RD:    if (noc_rd_gnt) tstate <= T_RDW;
        T_RDW: begin
          t_word <= bank_do;
          tstate <= T_HI;
        end
        T_HI:    if (ack_tx) tstate <= T_LO;
        T_LO:    if (ack_tx) begin
          t_addr  <= t_addr + 1'b1;
          t_count <= t_count - 1'b1;
          tstate  <= (t_count == 8'd1) ? T_IDLE : T_RD;
        end
        default: tstate <= T_IDLE;
      endcase
    end
  end

  // A flit stays on the wire until it is acknowledged.
  a_tx_held: assert property (@(posedge clk) disable iff (rst) (tx && !ack_tx) |=> tx);

endmodule

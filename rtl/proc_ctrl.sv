// proc_ctrl -- control logic of the Processor IP.
//
// It sits between the R8 core's memory bus and the local Memory IP and turns
// the core's loads and stores into local memory accesses or NoC services:
//
//   address          LD (rw=1)                  ST (rw=0)
//   0000h-03FFh      local memory               local memory
//   0400h-07FFh      read the other processor   write the other processor
//   0800h-0BFFh      read the remote memory     write the remote memory
//   FFFFh            scanf                      printf
//   FFFEh            -                          wait for a notify from processor n
//   FFFDh            -                          notify processor n
//
// (n is the stored value: 1 or 2.) A local access goes straight to the
// Memory IP and completes at once. Any other access sets waitR8 and, if it
// needs the NoC, raises busyNoCR8, waits until the memory's transmitter is
// idle (busyNoCMem low), sends its packet and, for a load, waits for the
// read return or scanf return packet. A wait completes when a notify packet
// from the named processor has arrived (notifies are remembered, so one that
// comes before the wait is not lost). The core is held in reset (resetR8)
// until an "activate processor" packet arrives, and then starts from address
// 0; an activate received later restarts it, and haltR8 marks it stopped.
//
// Incoming flits are not acknowledged here: the Memory IP acknowledges every
// flit of the shared local port, and this block reads each flit in the cycle
// of that acknowledge (ack_rx high), when the sender still holds it.
//
// R8 bus (this design's choice; the R8 itself is not part of this RTL): the
// core holds ce, rw, addr and dout while waitR8 is high; an access ends in a
// cycle with ce high and waitR8 low, and the loaded word is on din in the
// next cycle. The address map, the I/O, wait and notify addresses and the
// wait-state idea are the paper's. The paper's map gives the global address
// of the other processor and the remote memory as "1024 - address" and
// "2048 - address"; this design uses address - 1024 and address - 2048, the
// only reading that gives addresses inside the 1K target memories.
module proc_ctrl
  import multinoc_pkg::*;
#(
  parameter flit_t OTHER_PROC = ADDR_P2   // router address of the other processor
) (
  input  logic  clk,
  input  logic  rst,
  input  flit_t addressCore,              // this IP's router address
  // R8 core bus
  input  logic  ce,
  input  logic  rw,                       // 1: load, 0: store
  input  word_t addr,
  input  word_t dout,                     // store data from the core
  output word_t din,                      // load data to the core
  output logic  waitR8,
  input  logic  haltR8,
  output logic  resetR8,
  // local Memory IP, processor interface
  output logic  ceR8,
  output logic  rwR8,
  output word_t addrR8,
  output word_t dinR8,
  input  word_t doutR8,
  output logic  busyNoCR8,
  input  logic  busyNoCMem,
  // shared NoC local port
  output logic  tx,
  output flit_t data_out,
  input  logic  ack_tx,
  input  flit_t data_in,
  input  logic  ack_rx                    // the Memory IP's acknowledge: a flit is taken
);

  typedef enum logic [2:0] {
    A_LOCAL, A_OTHER, A_REMOTE, A_IO, A_WAIT, A_NOTIFY
  } area_e;

  typedef enum logic [2:0] {C_IDLE, C_CLAIM, C_SEND, C_RESP, C_WAITN, C_DONE} cstate_e;

  area_e   area;
  cstate_e state;
  logic    running, restart;
  logic    sel_local;        // din comes from the memory (last access was local)
  word_t   resp;             // word returned by a NoC load
  flit_t   pkt [9];
  logic [3:0] plen, pidx;
  logic [3:0] notified;      // notify received, indexed by {x[0], y[0]} of the source
  logic [1:0] wait_idx;

  // ------------------------------------------------------------ address decoding
  always_comb begin
    if (addr < 16'd1024)                    area = A_LOCAL;
    else if (addr < 16'd2048)               area = A_OTHER;
    else if (addr < 16'd3072)               area = A_REMOTE;
    else if (addr == IO_ADDR)               area = A_IO;
    else if (addr == WAIT_ADDR   && !rw)    area = A_WAIT;
    else if (addr == NOTIFY_ADDR && !rw)    area = A_NOTIFY;
    else                                    area = A_LOCAL;  // unmapped: local, low 10 bits
  end

  assign ceR8    = ce && (area == A_LOCAL) && (state == C_IDLE) && running;
  assign rwR8    = rw;
  assign addrR8  = {6'b0, addr[9:0]};
  assign dinR8   = dout;
  assign waitR8  = ce && (area != A_LOCAL) && (state != C_DONE);
  assign resetR8 = !running || restart;
  assign din     = sel_local ? doutR8 : resp;

  assign busyNoCR8 = (state == C_CLAIM) || (state == C_SEND);
  assign tx        = (state == C_SEND);
  assign data_out  = pkt[pidx];

  function automatic logic [1:0] src_idx(input flit_t a);
    return {a[4], a[0]};
  endfunction

  // ------------------------------------------------------------ incoming packets
  logic [7:0] ridx;          // index of the flit being received
  logic [7:0] rleft;         // payload flits left
  flit_t      rsrc, rhi;
  cmd_e       rcmd;
  logic       rx_flit;
  assign rx_flit = ack_rx;

  // events decoded at the last flit of a packet
  logic ev_activate, ev_word, ev_notify;
  word_t ev_data;
  always_comb begin
    ev_activate = 1'b0;
    ev_word     = 1'b0;
    ev_notify   = 1'b0;
    ev_data     = {rhi, data_in};
    if (rx_flit && ridx >= 8'd2 && rleft == 8'd1) begin
      // flit 3 (the command) can itself be the last one
      unique case ((ridx == 8'd3) ? cmd_e'(data_in) : rcmd)
        CMD_ACTIVATE:     ev_activate = 1'b1;
        CMD_NOTIFY:       ev_notify   = 1'b1;
        CMD_READ_RETURN,
        CMD_SCANF_RETURN: ev_word     = (ridx == 8'd5);
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ridx  <= '0;
      rleft <= '0;
      rsrc  <= '0;
      rhi   <= '0;
      rcmd  <= CMD_READ;
    end else if (rx_flit) begin
      // ridx stops at 6: only flits 0-5 are told apart, and a full packet
      // (257 flits) would otherwise wrap it
      if (ridx != 8'd6) ridx <= ridx + 1'b1;
      unique case (ridx)
        8'd0: ;
        8'd1: begin
          rleft <= data_in;
          if (data_in == '0) ridx <= '0;
        end
        default: begin
          rleft <= rleft - 1'b1;
          if (ridx == 8'd2) rsrc <= data_in;
          if (ridx == 8'd3) rcmd <= cmd_e'(data_in);
          if (ridx == 8'd4) rhi  <= data_in;
          if (rleft == 8'd1) ridx <= '0;
        end
      endcase
    end
  end

  // ------------------------------------------------------------ core access sequencing
  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= C_IDLE;
      running   <= 1'b0;
      restart   <= 1'b0;
      sel_local <= 1'b1;
      resp      <= '0;
      plen      <= '0;
      pidx      <= '0;
      notified  <= '0;
      wait_idx  <= '0;
      for (int i = 0; i < 9; i++) pkt[i] <= '0;
    end else begin
      restart <= 1'b0;
      if (haltR8) running <= 1'b0;
      if (ev_activate) begin
        running <= 1'b1;
        restart <= 1'b1;
        state   <= C_IDLE;
      end
      if (ev_notify) notified[src_idx(rsrc)] <= 1'b1;
      if (ceR8) sel_local <= 1'b1;

      unique case (state)
        C_IDLE: if (ce && running && !restart && area != A_LOCAL) begin
          automatic word_t ga = (area == A_OTHER) ? addr - 16'd1024 : addr - 16'd2048;
          automatic flit_t tgt = (area == A_OTHER) ? OTHER_PROC : ADDR_MEM;
          pidx  <= '0;
          state <= C_CLAIM;
          unique case (area)
            A_OTHER, A_REMOTE: begin
              pkt[0] <= tgt;
              pkt[2] <= addressCore;
              pkt[4] <= 8'd1;
              pkt[5] <= ga[15:8];
              pkt[6] <= ga[7:0];
              pkt[7] <= dout[15:8];
              pkt[8] <= dout[7:0];
              if (rw) begin
                pkt[1] <= 8'd5; pkt[3] <= CMD_READ;  plen <= 4'd7;
              end else begin
                pkt[1] <= 8'd7; pkt[3] <= CMD_WRITE; plen <= 4'd9;
              end
            end
            A_IO: begin
              pkt[0] <= ADDR_SERIAL;
              pkt[2] <= addressCore;
              pkt[4] <= dout[15:8];
              pkt[5] <= dout[7:0];
              if (rw) begin
                pkt[1] <= 8'd2; pkt[3] <= CMD_SCANF;  plen <= 4'd4;
              end else begin
                pkt[1] <= 8'd4; pkt[3] <= CMD_PRINTF; plen <= 4'd6;
              end
            end
            A_NOTIFY: begin
              pkt[0] <= proc_router(dout);
              pkt[1] <= 8'd2;
              pkt[2] <= addressCore;
              pkt[3] <= CMD_NOTIFY;
              plen   <= 4'd4;
            end
            default: begin  // A_WAIT: no packet
              wait_idx <= src_idx(proc_router(dout));
              state    <= C_WAITN;
            end
          endcase
        end
        C_CLAIM: if (!busyNoCMem) state <= C_SEND;
        C_SEND: if (ack_tx) begin
          pidx <= pidx + 1'b1;
          if (pidx == plen - 1'b1) state <= rw ? C_RESP : C_DONE;
        end
        C_RESP: if (ev_word) begin
          resp  <= ev_data;
          state <= C_DONE;
        end
        C_WAITN: if (notified[wait_idx]) begin
          notified[wait_idx] <= 1'b0;
          state <= C_DONE;
        end
        C_DONE: begin
          sel_local <= 1'b0;
          state     <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // The core keeps its request stable while it is held.
  a_core_holds: assert property (@(posedge clk) disable iff (rst || resetR8)
    (ce && waitR8) |=> (ce && $stable(addr) && $stable(rw)));

endmodule

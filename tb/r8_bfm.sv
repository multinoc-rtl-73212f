// r8_bfm -- bus-functional stand-in for an R8 core, for tests only.
//
// This is NOT the R8 instruction set. It runs a tiny test program kept in the
// core's local memory, three words per step: {kind, address, value}, fetched
// with ordinary local reads from address 0 upwards, so that program loading
// over the NoC, activation and local memory timing are exercised exactly as
// a real core would exercise them. Kinds:
//   0 halt                 raise halt and stop
//   1 load  address        acc = word at address
//   2 store address, value word at address = value
//   3 store address, acc   word at address = acc
//   4 add   value          acc = acc + value (no bus access)
//   5 addm  address        acc = acc + word at address
//   6 subm  address        acc = acc - word at address
// Bus timing: request set up after a falling clock edge, held while wait is
// high; loaded data taken from din in the clock after the access ends, when
// the next request is already on the bus (one access per clock at best).
// The model restarts from address 0 whenever reset is raised.
module r8_bfm
  import multinoc_pkg::*;
(
  input  logic  clk,
  output logic  ce,
  output logic  rw,
  output word_t addr,
  output word_t dout,
  input  word_t din,
  input  logic  waitR8,
  output logic  haltR8,
  input  logic  resetR8
);
  word_t acc;
  int    steps, halts, accesses;

  initial begin
    ce = 0; rw = 1; addr = 0; dout = 0; haltR8 = 0; acc = 0;
    steps = 0; halts = 0; accesses = 0;
  end

  // Accesses follow each other without a gap: ce stays high and the next
  // request is set up in the same half cycle in which the previous load's
  // data is taken.
  task automatic access(input logic r, input word_t a, input word_t d, output word_t q);
    if (!ce) @(negedge clk);
    ce = 1; rw = r; addr = a; dout = d;
    @(posedge clk);
    while (waitR8) @(posedge clk);
    @(negedge clk);
    q = din;
    accesses++;
  endtask

  task automatic run();
    word_t pc, kind, a, v, q;
    pc = 0;
    forever begin
      access(1, pc, 0, kind);
      access(1, pc + 1, 0, a);
      access(1, pc + 2, 0, v);
      pc += 3;
      steps++;
      case (kind)
        16'd0: begin
          ce = 0;
          halts++;
          @(negedge clk) haltR8 = 1;
          @(negedge clk) haltR8 = 0;
          return;
        end
        16'd1: begin access(1, a, 0, q); acc = q; end
        16'd2: access(0, a, v, q);
        16'd3: access(0, a, acc, q);
        16'd5: begin access(1, a, 0, q); acc = acc + q; end
        16'd6: begin access(1, a, 0, q); acc = acc - q; end
        default: acc = acc + v;
      endcase
    end
  endtask

  initial begin
    forever begin
      @(posedge clk);
      if (!resetR8) begin
        fork
          begin : prog
            run();
            wait (resetR8);
          end
          begin : rst_watch
            @(posedge resetR8);
          end
        join_any
        disable fork;
        ce = 0; haltR8 = 0;
      end
    end
  end
endmodule

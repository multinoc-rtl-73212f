// blockram -- one 1024 x 4-bit synchronous block RAM (a Spartan-IIe
// BlockRAM configured as 1024 words of 4 bits, as in the paper's Memory IP).
//
// Ports follow the paper's figure: we, en, addr, di and do (here `dout`,
// since `do` is a SystemVerilog keyword). When en is high at a rising clock
// edge the word at addr is written with di if we is high; dout then shows
// the new word (write-first), otherwise it shows the stored word. When en is
// low dout keeps its value. Read latency is one clock. The write-first mode
// and the reset-free contents are this design's choices.
module blockram #(
  parameter int AW = 10,
  parameter int DW = 4
) (
  input  logic          clk,
  input  logic          we,
  input  logic          en,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] di,
  output logic [DW-1:0] dout
);

  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        mem[addr] <= di;
        dout      <= di;
      end else begin
        dout      <= mem[addr];
      end
    end
  end

endmodule

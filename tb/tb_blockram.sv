// tb_blockram -- self-checking test of the 1024 x 4-bit block RAM.
// Writes every address with a pattern, reads all back (one-clock latency),
// checks write-first output, and that dout holds while en is low.
module tb_blockram;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, en = 0;
  logic [9:0] addr = 0;
  logic [3:0] di = 0, dout;
  int checks = 0, failures = 0;

  blockram dut (.*);

  function automatic logic [3:0] pat(input int a);
    return 4'((a * 7 + (a >> 4)) ^ 4'h9);
  endfunction

  initial begin
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 10'(a); di = pat(a);
      @(negedge clk);
      checks++;
      if (dout !== pat(a)) begin failures++; $display("FAIL write-first %0d", a); end
    end
    for (int a = 1023; a >= 0; a--) begin
      @(negedge clk); en = 1; we = 0; addr = 10'(a);
      @(negedge clk);
      checks++;
      if (dout !== pat(a)) begin failures++; $display("FAIL read %0d = %h expected %h", a, dout, pat(a)); end
    end
    // en low: no write, output held
    @(negedge clk); en = 0; we = 1; addr = 10'd5; di = ~pat(5);
    @(negedge clk); en = 1; we = 0; addr = 10'd5;
    @(negedge clk); en = 0; addr = 10'd6;
    @(negedge clk);
    checks++;
    if (dout !== pat(5)) begin failures++; $display("FAIL write with en low or output not held"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

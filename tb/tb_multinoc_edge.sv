// tb_multinoc_edge -- parallel edge detection, two image lines, end to end.
//
// The host keeps a window of three image rows in the remote memory (router
// 11, slots at 000h, 010h and 020h, one 8-bit pixel per word). For each
// output line both processors are activated together: processor 1 computes
// the horizontal gradient of the middle row, gx(i) = p(r,i+1) - p(r,i-1),
// into its own local memory; processor 2 computes the vertical gradient
// gy(i) = p(r+1,i) - p(r-1,i), waits for processor 1's notify, adds gx(i),
// read from processor 1's memory, to its gy(i), stores the sums in the
// remote memory at 041h upwards and tells the host with a printf of the line
// number. The host then reads the processed line back and sends the next
// image row, which overwrites the oldest slot. Sums are 16-bit two's
// complement; absolute values and thresholds are left to the host.
//
// The split of work follows the application described for the prototype
// (one gradient per processor, one of them adds them and notifies the host);
// the image size, memory layout and the use of notify/wait between the two
// processors are this test's own. The cores are the bus-functional model
// r8_bfm running lists of bus steps, not R8 machine code; with no indexed
// addressing in that model, the host writes a fresh program for each line,
// in commands of at most 125 words, the most one packet can carry.
module tb_multinoc_edge;
  import multinoc_pkg::*;

  localparam int BIT   = 8;
  localparam int W     = 10;      // pixels per row
  localparam int ROWS  = 4;       // rows of the test image, ROWS-2 output lines
  localparam int RES   = 'h40;    // result line in the remote memory (pixel i at RES+i)
  localparam int GX    = 'h200;   // gradients in the local memories

  logic clock = 0, reset = 1;
  always #5 clock = ~clock;

  logic       tx, rx;
  logic [1:0] r8_ce, r8_rw, r8_wait, r8_halt, r8_reset;
  word_t      r8_addr [2], r8_dout [2], r8_din [2];

  multinoc dut (.*);

  for (genvar i = 0; i < 2; i++) begin : g_core
    r8_bfm core (.clk(clock), .ce(r8_ce[i]), .rw(r8_rw[i]), .addr(r8_addr[i]), .dout(r8_dout[i]),
                 .din(r8_din[i]), .waitR8(r8_wait[i]), .haltR8(r8_halt[i]), .resetR8(r8_reset[i]));
  end
  host_uart #(.BIT(BIT)) host (.clk(clock), .txd(tx), .rxd(rx));

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic expect_bytes(input logic [7:0] exp[$], input string what);
    host.wait_bytes(exp.size(), 400000);
    chk(host.got.size() >= exp.size(), $sformatf("%s: %0d bytes", what, host.got.size()));
    foreach (exp[i]) if (host.got.size() > 0) begin
      logic [7:0] b = host.got.pop_front();
      chk(b == exp[i], $sformatf("%s byte %0d = %h expected %h", what, i, b, exp[i]));
    end
  endtask

  // Both cores out of reset in the same clock: the gradients run in parallel.
  int overlap = 0;
  always @(posedge clock) if (!r8_reset[0] && !r8_reset[1]) overlap++;

  logic [7:0] img [ROWS][W];

  function automatic int slot(input int row);
    return 16 * (row % 3);
  endfunction

  // Host write of the words w from addr on at target tgt, split into
  // commands of at most 125 words (the most one packet can carry).
  task automatic host_write(input flit_t tgt, input word_t addr, input word_t w[$]);
    for (int base = 0; base < w.size(); base += 125) begin
      logic [7:0] b[$];
      int         n;
      word_t      a;
      n = (w.size() - base > 125) ? 125 : w.size() - base;
      a = addr + word_t'(base);
      b = {CMD_WRITE, tgt, 8'(n), a[15:8], a[7:0]};
      for (int i = base; i < base + n; i++) begin b.push_back(w[i][15:8]); b.push_back(w[i][7:0]); end
      host.send(b);
    end
  endtask

  task automatic send_row(input int r);
    word_t w[$];
    for (int i = 0; i < W; i++) w.push_back(word_t'(img[r][i]));
    host_write(ADDR_MEM, word_t'(slot(r)), w);
  endtask

  // Programs for the output line of middle row r.
  function automatic void programs(input int r, output word_t p1[$], output word_t p2[$]);
    p1 = {}; p2 = {};
    for (int i = 1; i < W - 1; i++)
      p1 = {p1, 16'd1, word_t'('h800 + slot(r) + i + 1), 16'd0,
                16'd6, word_t'('h800 + slot(r) + i - 1), 16'd0,
                16'd3, word_t'(GX + i), 16'd0};
    p1 = {p1, 16'd2, NOTIFY_ADDR, 16'd2,          // notify processor 2
              16'd0, 16'd0, 16'd0};
    for (int i = 1; i < W - 1; i++)
      p2 = {p2, 16'd1, word_t'('h800 + slot(r + 1) + i), 16'd0,
                16'd6, word_t'('h800 + slot(r - 1) + i), 16'd0,
                16'd3, word_t'(GX + i), 16'd0};
    p2 = {p2, 16'd2, WAIT_ADDR, 16'd1};           // wait for processor 1
    for (int i = 1; i < W - 1; i++)
      p2 = {p2, 16'd1, word_t'(GX + i), 16'd0,
                16'd5, word_t'('h400 + GX + i), 16'd0,     // + gx from processor 1
                16'd3, word_t'('h800 + RES + i), 16'd0};   // to the remote memory
    p2 = {p2, 16'd2, IO_ADDR, word_t'(r),         // printf line number
              16'd0, 16'd0, 16'd0};
  endfunction

  initial begin
    word_t p1[$], p2[$];
    int    h0, h1;
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < W; i++) img[r][i] = 8'($urandom_range(0, 255));
    repeat (5) @(posedge clock);
    #1 reset = 0;
    repeat (5) @(posedge clock);
    host.sync();
    for (int r = 0; r < 3; r++) send_row(r);
    for (int r = 1; r < ROWS - 1; r++) begin
      if (r > 1) send_row(r + 1);                 // the new line replaces the oldest
      programs(r, p1, p2);
      chk(p2.size() > 125, "program needs more than one write command");
      host_write(ADDR_P1, 16'h0000, p1);
      host_write(ADDR_P2, 16'h0000, p2);
      h0 = g_core[0].core.halts;
      h1 = g_core[1].core.halts;
      host.send({CMD_ACTIVATE, ADDR_P1});
      host.send({CMD_ACTIVATE, ADDR_P2});
      expect_bytes({CMD_PRINTF, ADDR_P2, 8'h00, 8'(r)}, $sformatf("line %0d done", r));
      host.send({CMD_READ, ADDR_MEM, 8'(W - 2), 8'h00, 8'(RES + 1)});
      host.wait_bytes(2 * (W - 2), 400000);
      chk(host.got.size() == 2 * (W - 2), $sformatf("line %0d: %0d bytes read back", r, host.got.size()));
      for (int i = 1; i < W - 1 && host.got.size() >= 2; i++) begin
        word_t gx, gy, got;
        gx  = word_t'(img[r][i + 1]) - word_t'(img[r][i - 1]);
        gy  = word_t'(img[r + 1][i]) - word_t'(img[r - 1][i]);
        got[15:8] = host.got.pop_front();
        got[7:0]  = host.got.pop_front();
        chk(got == gx + gy, $sformatf("line %0d pixel %0d: %h expected %h", r, i, got, gx + gy));
      end
      chk(g_core[0].core.halts == h0 + 1 && g_core[1].core.halts == h1 + 1,
          $sformatf("line %0d: both processors halted once", r));
    end
    chk(overlap > 0, "the two processors never ran at the same time");
    $display("edge: %0d lines of %0d pixels, %0d clocks with both cores running",
             ROWS - 2, W - 2, overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clock);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

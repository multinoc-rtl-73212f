// multinoc_pkg -- types and constants shared by the MultiNoC blocks.
//
// The flit width (8 bits), the router addresses of the four IPs (Serial 00,
// Processor 1 at 01, Processor 2 at 10, remote Memory at 11, the high nibble
// being X and the low nibble Y) and the nine packet services follow the paper.
// The numeric command codes are this design's choice: they number the nine
// services in the order the paper lists them, starting at 0, which keeps the
// host's "read" command equal to 00 as in the paper's debugging example.
//
// Packet layout (flit 0 and 1 as in the paper, the rest chosen here):
//   flit 0  target router address
//   flit 1  payload length in flits (flits after this one)
//   flit 2  source router address
//   flit 3  command code (cmd_e)
//   flit 4.. command arguments, 16-bit values sent high byte first
package multinoc_pkg;

  localparam int FLIT_W = 8;
  typedef logic [FLIT_W-1:0] flit_t;
  typedef logic [15:0]       word_t;

  // Router port numbering.
  localparam int EAST  = 0;
  localparam int WEST  = 1;
  localparam int NORTH = 2;
  localparam int SOUTH = 3;
  localparam int LOCAL = 4;
  localparam int NPORT = 5;

  // Router addresses of the IPs (Fig. 1).
  localparam flit_t ADDR_SERIAL = 8'h00;
  localparam flit_t ADDR_P1     = 8'h01;
  localparam flit_t ADDR_P2     = 8'h10;
  localparam flit_t ADDR_MEM    = 8'h11;

  // Packet services.
  typedef enum logic [7:0] {
    CMD_READ         = 8'h00,  // read from memory: count, addr hi, addr lo
    CMD_READ_RETURN  = 8'h01,  // read return: count words (hi, lo)
    CMD_WRITE        = 8'h02,  // write in memory: count, addr hi, addr lo, words
    CMD_ACTIVATE     = 8'h03,  // activate processor: no arguments
    CMD_PRINTF       = 8'h04,  // printf: word
    CMD_SCANF        = 8'h05,  // scanf request: no arguments
    CMD_SCANF_RETURN = 8'h06,  // scanf return: word
    CMD_NOTIFY       = 8'h07,  // notify: no arguments
    CMD_WAIT         = 8'h08   // wait: no arguments
  } cmd_e;

  // Memory-mapped special addresses of the Processor IP.
  localparam word_t IO_ADDR     = 16'hFFFF;  // ST: printf, LD: scanf
  localparam word_t WAIT_ADDR   = 16'hFFFE;  // ST: wait for notify of processor n
  localparam word_t NOTIFY_ADDR = 16'hFFFD;  // ST: notify processor n

  // Processor number (1 or 2) to router address.
  function automatic flit_t proc_router(input word_t n);
    return (n == 16'd2) ? ADDR_P2 : ADDR_P1;
  endfunction

endpackage

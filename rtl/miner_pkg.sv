// Types and constants shared by the control side of the miner: the register
// map of the PS-PL register file (byte addresses, 32-bit registers) and the
// entry of the metadata FIFO.  All 256-bit and 640-bit values are byte
// vectors, byte i at bits [8i+7:8i]; so a hash or target compares as a
// little-endian 256-bit number, and the nonce is header bytes 76..79.
package miner_pkg;
  localparam logic [6:0] ADDR_STATUS  = 7'h00;
  localparam logic [6:0] ADDR_CONTROL = 7'h04;
  localparam logic [6:0] ADDR_WIN     = 7'h08;
  localparam logic [6:0] ADDR_TARGET  = 7'h0C;  // 8 words, 0x0C .. 0x28
  localparam logic [6:0] ADDR_HEADER  = 7'h2C;  // 20 words, 0x2C .. 0x78
  localparam logic [6:0] ADDR_MAXN    = 7'h7C;

  // status register bits
  localparam int ST_NOT_FOUND = 0;
  localparam int ST_WIN_FOUND = 1;
  localparam int ST_ERROR     = 2;
  // control register bits
  localparam int CT_START     = 0;

  typedef struct packed {
    logic [31:0]  nonce;
    logic [255:0] target;
    logic         last;     // nonce equals the maximum nonce
  } meta_t;
endpackage

// cs_pkg: shared types and constants of the chip-site interconnect.
//
// The interconnect carries one memory-mapped message format in both
// directions. A host-to-block (h2b) request and a block-to-host (b2h)
// response have the same fields: a 1-bit command, a 7-bit chip site
// address, a 1-bit bank address, a 32-bit word address and a 32-bit data
// payload, 73 bits in all. None of these widths depend on the number of chip
// sites, which is what keeps the area of every station fixed. Inside a site
// the site address and bank bit are dropped, leaving the 65-bit site message
// that crosses into and out of the user block.
//
// The field widths, the bank split (bank 0 = user block, bank 1 = periphery)
// and the periphery register addresses 0x1000/0x1004/0x1008 follow the
// paper. The command encoding (0 = read, 1 = write) and the packing order of
// the fields inside the vector are this design's own choice.
package cs_pkg;

  localparam int unsigned SITE_AW   = 7;   // up to 128 chip sites
  localparam int unsigned WORD_AW   = 32;  // 4 GB logical space per bank
  localparam int unsigned DATA_W    = 32;
  localparam int unsigned MAX_SITES = 1 << SITE_AW;

  typedef enum logic { CMD_READ = 1'b0, CMD_WRITE = 1'b1 } cmd_e;
  typedef enum logic { BANK_USER = 1'b0, BANK_PERIPH = 1'b1 } bank_e;

  // Track message (h2b and b2h alike), 73 bits.
  typedef struct packed {
    cmd_e                cmd;
    logic [SITE_AW-1:0]  site_addr;
    bank_e               bank_addr;
    logic [WORD_AW-1:0]  word_addr;
    logic [DATA_W-1:0]   data;
  } msg_t;

  // Message between a station and its user block, 65 bits.
  typedef struct packed {
    cmd_e                cmd;
    logic [WORD_AW-1:0]  word_addr;
    logic [DATA_W-1:0]   data;
  } site_msg_t;

  localparam int unsigned MSG_W      = $bits(msg_t);       // 73
  localparam int unsigned SITE_MSG_W = $bits(site_msg_t);  // 65

  // Periphery bank registers of every station (bit 0 of the data word).
  localparam logic [WORD_AW-1:0] ADDR_RSTN_SOFT  = 32'h0000_1000;
  localparam logic [WORD_AW-1:0] ADDR_EN         = 32'h0000_1004;
  localparam logic [WORD_AW-1:0] ADDR_EN_PWR_BAR = 32'h0000_1008;

endpackage

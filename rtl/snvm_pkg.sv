// snvm_pkg: types and constants shared by the self-obscuring NVM memory
// controller. Sizes follow the evaluated system: 64-byte lines, 4 KB NVM
// pages, a 4 GB single-channel PCM with 4 banks and a 128 MB DRAM buffer
// cache. The 64-bit cipher word, the level encoding and the CSR map are
// choices of this design.
package snvm_pkg;

  localparam int LINE_BYTES      = 64;                  // cache block size
  localparam int LINE_W          = LINE_BYTES * 8;      // 512 bits
  localparam int WORD_W          = 64;                  // cipher word (assumed)
  localparam int WORDS_PER_LINE  = LINE_W / WORD_W;     // 8
  localparam int PAGE_BYTES      = 4096;                // NVM page / row
  localparam int LINES_PER_PAGE  = PAGE_BYTES / LINE_BYTES; // 64
  localparam int LPP_W           = $clog2(LINES_PER_PAGE);  // 6

  // Security level of a page; for a bank it names the algorithm in use.
  // A higher level is the stronger and slower cipher.
  typedef enum logic [1:0] {
    LVL_NONE = 2'd0,   // page is stored in plaintext
    LVL_DES  = 2'd1,
    LVL_AES  = 2'd2,
    LVL_RSA  = 2'd3
  } level_e;

  typedef struct packed {
    logic   valid;     // OS says the page holds live data
    level_e level;     // security flag assigned by the OS
  } page_attr_t;

  // CSR word addresses (byte address >> 2)
  localparam logic [11:0] CSR_CTRL     = 12'h000; // [0] DRAM cache enable
  localparam logic [11:0] CSR_STATUS   = 12'h001; // [0] keys loaded [1] busy [2] dcache active [3] init done
  localparam logic [11:0] CSR_CMD      = 12'h002; // [0] flush [1] sleep [2] resume
  localparam logic [11:0] CSR_PAGE     = 12'h003; // [19:0] page, [20] valid, [22:21] level
  localparam logic [11:0] CSR_PAGEOUT  = 12'h004; // page to hand to the disk
  localparam logic [11:0] CSR_BANKALG  = 12'h005; // 2 bits per bank
  localparam logic [11:0] CSR_KEY_BASE = 12'h400; // bank*32 + word

  localparam logic [2:0] CMD_FLUSH  = 3'b001;
  localparam logic [2:0] CMD_SLEEP  = 3'b010;
  localparam logic [2:0] CMD_RESUME = 3'b100;

endpackage

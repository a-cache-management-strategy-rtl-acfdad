// clash_pkg: constants and types shared by the C-lash flash cache.
//
// The cache sits between a host and a NAND flash and is split into a page
// space (p-space, 128 free-standing page frames) and a block space (b-space,
// 2 directly mapped 64-page block slots). The geometry below follows the
// evaluated configuration: 2 KB pages, 128 KB blocks (64 pages), 128 p-space
// pages and 2 b-space blocks (512 KB of cache), over a 1 GB flash space
// (8192 blocks). The 32-bit data word, and hence 512 words per page, is a
// choice of this design; the source gives only byte sizes.
package clash_pkg;

  parameter int unsigned WORD_W          = 32;    // data word (own choice)
  parameter int unsigned PAGE_WORDS      = 512;   // 2 KB page / 4 B word
  parameter int unsigned PAGES_PER_BLOCK = 64;    // 128 KB block / 2 KB page
  parameter int unsigned P_FRAMES        = 128;   // p-space pages
  parameter int unsigned B_SLOTS         = 2;     // b-space blocks
  parameter int unsigned FLASH_BLOCKS    = 8192;  // 1 GB / 128 KB

  // Flash media command opcodes.
  typedef enum logic [1:0] {
    FL_READ  = 2'd0,   // read one page, PAGE_WORDS words come back
    FL_PROG  = 2'd1,   // program one page, PAGE_WORDS words are sent
    FL_ERASE = 2'd2    // erase one block, no data
  } fl_op_e;

  // Host request opcodes.
  typedef enum logic {
    HOST_READ  = 1'b0,
    HOST_WRITE = 1'b1
  } host_op_e;

  // Where a finished host request was served (Fig. 1 paths).
  typedef enum logic [1:0] {
    SRV_FLASH = 2'd0,  // read miss served by the flash (A)
    SRV_PSPACE = 2'd1, // p-space hit or p-space allocation (B, C)
    SRV_BSPACE = 2'd2  // b-space hit (D, E)
  } served_e;

  // One-cycle event strobes, for statistics and for testbenches.
  typedef struct packed {
    logic evict;        // a p-space eviction started (G)
    logic to_free_slot; // victims copied into a free b-space block
    logic to_own_slot;  // victims joined the b-space slot of their own block
    logic switch_op;    // switch between victims and a b-space block (F, G)
    logic flush;        // LRU b-space block flushed to flash (I)
    logic merge_read;   // one page read from flash by a late merge (J)
    logic erase;        // block erase sent to flash
    logic prog;         // page program sent to flash
  } clash_events_t;

endpackage

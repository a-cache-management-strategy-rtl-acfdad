// clash_top: the C-lash flash cache, controller plus cache SRAM.
//
// Sits between a host issuing one-page reads and writes and a NAND flash
// that takes page reads, page programs and block erases. The cache keeps a
// p-space of P_FRAMES single pages and a b-space of B_SLOTS whole blocks in a
// single SRAM, and talks to the flash only in whole blocks (erase, then
// program every page), so that repeated writes are absorbed in the cache
// instead of being spread over the flash by wear leveling. The defaults are
// the evaluated configuration: 2 KB pages, 64-page (128 KB) blocks, 128
// p-space pages, 2 b-space blocks, a 1 GB flash of 8192 blocks. The 32-bit
// word is this design's choice.
//
// Ports: host request/data and flash command/data channels, all valid/ready,
// as described in clash_ctrl; events carries one-cycle strobes of the cache's
// internal operations for statistics. The flash itself is outside.
module clash_top
  import clash_pkg::host_op_e, clash_pkg::served_e, clash_pkg::fl_op_e,
         clash_pkg::clash_events_t;
#(
  parameter int unsigned WORD_W       = clash_pkg::WORD_W,
  parameter int unsigned PAGE_WORDS   = clash_pkg::PAGE_WORDS,
  parameter int unsigned PPB          = clash_pkg::PAGES_PER_BLOCK,
  parameter int unsigned P_FRAMES     = clash_pkg::P_FRAMES,
  parameter int unsigned B_SLOTS      = clash_pkg::B_SLOTS,
  parameter int unsigned FLASH_BLOCKS = clash_pkg::FLASH_BLOCKS,
  localparam int unsigned OFF_W   = $clog2(PPB),
  localparam int unsigned BLK_W   = $clog2(FLASH_BLOCKS),
  localparam int unsigned LPN_W   = BLK_W + OFF_W,
  localparam int unsigned FRAMES  = P_FRAMES + B_SLOTS * PPB,
  localparam int unsigned AW      = $clog2(FRAMES) + $clog2(PAGE_WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              host_req_valid,
  output logic              host_req_ready,
  input  host_op_e          host_req_op,
  input  logic [LPN_W-1:0]  host_req_lpn,
  input  logic              host_wvalid,
  output logic              host_wready,
  input  logic [WORD_W-1:0] host_wdata,
  output logic              host_rvalid,
  input  logic              host_rready,
  output logic [WORD_W-1:0] host_rdata,
  output logic              host_rlast,
  output logic              host_done,
  output served_e           host_served,
  output logic              fl_cmd_valid,
  input  logic              fl_cmd_ready,
  output fl_op_e            fl_cmd_op,
  output logic [BLK_W-1:0]  fl_cmd_blk,
  output logic [OFF_W-1:0]  fl_cmd_page,
  output logic              fl_wvalid,
  input  logic              fl_wready,
  output logic [WORD_W-1:0] fl_wdata,
  input  logic              fl_rvalid,
  output logic              fl_rready,
  input  logic [WORD_W-1:0] fl_rdata,
  output clash_events_t     events
);

  logic              sram_en, sram_we;
  logic [AW-1:0]     sram_addr;
  logic [WORD_W-1:0] sram_wdata, sram_rdata;

  clash_ctrl #(
    .WORD_W(WORD_W), .PAGE_WORDS(PAGE_WORDS), .PPB(PPB), .P_FRAMES(P_FRAMES),
    .B_SLOTS(B_SLOTS), .FLASH_BLOCKS(FLASH_BLOCKS)
  ) u_ctrl (
    .clk, .rst_n,
    .host_req_valid, .host_req_ready, .host_req_op, .host_req_lpn,
    .host_wvalid, .host_wready, .host_wdata,
    .host_rvalid, .host_rready, .host_rdata, .host_rlast,
    .host_done, .host_served,
    .fl_cmd_valid, .fl_cmd_ready, .fl_cmd_op, .fl_cmd_blk, .fl_cmd_page,
    .fl_wvalid, .fl_wready, .fl_wdata, .fl_rvalid, .fl_rready, .fl_rdata,
    .sram_en, .sram_we, .sram_addr, .sram_wdata, .sram_rdata,
    .events
  );

  cache_sram #(.WORD_W(WORD_W), .DEPTH(FRAMES * PAGE_WORDS)) u_sram (
    .clk, .en(sram_en), .we(sram_we), .addr(sram_addr), .wdata(sram_wdata),
    .rdata(sram_rdata)
  );

endmodule

// pspace_dir: directory of the p-space, the page half of the C-lash cache.
//
// The p-space holds pages that may come from any flash block. Each of the
// N_FRAMES frames has an entry {valid, logical page number}; the logical page
// number is the flash block number above the page offset. This directory is
// the p-space part of the cache's mapping table (128 x 20 bits at the
// defaults, under the "much less than 1KB" the design is meant to need).
//
// Function (from the C-lash policy): a fully associative lookup of one
// logical page, and a search for a free frame. How it is built (a CAM
// compare on every entry, a priority encoder picking the lowest free frame)
// is this design's choice.
//
// Interface and timing: lookup_* and free_* are combinational on the current
// contents. One entry is written per cycle through wr_* (wr_valid=0 frees
// it); the change is visible from the next cycle. All entries are invalid
// after reset. The whole table is exported for the victim selector.
module pspace_dir #(
  parameter int unsigned N_FRAMES = clash_pkg::P_FRAMES,
  parameter int unsigned LPN_W    = $clog2(clash_pkg::FLASH_BLOCKS * clash_pkg::PAGES_PER_BLOCK),
  localparam int unsigned IDX_W   = $clog2(N_FRAMES)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // lookup
  input  logic [LPN_W-1:0]              lookup_lpn,
  output logic                          lookup_hit,
  output logic [IDX_W-1:0]              lookup_idx,
  // free-frame search
  output logic                          free_any,
  output logic [IDX_W-1:0]              free_idx,
  // entry write
  input  logic                          wr_en,
  input  logic [IDX_W-1:0]              wr_idx,
  input  logic                          wr_valid,
  input  logic [LPN_W-1:0]              wr_lpn,
  // whole table
  output logic [N_FRAMES-1:0]           entry_valid,
  output logic [N_FRAMES-1:0][LPN_W-1:0] entry_lpn
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      entry_valid <= '0;
      entry_lpn   <= '0;
    end else if (wr_en) begin
      entry_valid[wr_idx] <= wr_valid;
      entry_lpn[wr_idx]   <= wr_lpn;
    end
  end

  always_comb begin
    lookup_hit = 1'b0;
    lookup_idx = '0;
    free_any   = 1'b0;
    free_idx   = '0;
    for (int i = N_FRAMES - 1; i >= 0; i--) begin
      if (entry_valid[i] && entry_lpn[i] == lookup_lpn) begin
        lookup_hit = 1'b1;
        lookup_idx = IDX_W'(i);
      end
      if (!entry_valid[i]) begin
        free_any = 1'b1;
        free_idx = IDX_W'(i);
      end
    end
  end

endmodule

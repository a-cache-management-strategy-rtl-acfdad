// bspace_dir: directory of the b-space, the block half of the C-lash cache.
//
// Each of the N_SLOTS block slots caches one flash block, directly mapped:
// page o of the block lives in page o of the slot. An entry is {valid, flash
// block number, one valid bit per page}. Pages whose bit is clear are not in
// the slot (they are in the flash, or in the p-space). This is the b-space
// part of the cache's mapping table.
//
// Function (from the C-lash policy): find the slot of a block, find a free
// slot, and find the slot with the fewest valid pages, which the switch
// compares with the size of the p-space victim set. On a tie the lowest
// slot wins (own choice; the source does not say).
//
// Interface and timing: lookup_*, free_* and min_* are combinational on the
// current contents; min_* consider valid slots only. One entry is written
// per cycle through wr_*; it is visible from the next cycle. All slots are
// free after reset.
module bspace_dir #(
  parameter int unsigned N_SLOTS = clash_pkg::B_SLOTS,
  parameter int unsigned BLK_W   = $clog2(clash_pkg::FLASH_BLOCKS),
  parameter int unsigned PPB     = clash_pkg::PAGES_PER_BLOCK,
  localparam int unsigned SLOT_W = (N_SLOTS > 1) ? $clog2(N_SLOTS) : 1,
  localparam int unsigned CNT_W  = $clog2(PPB + 1)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // lookup by block number
  input  logic [BLK_W-1:0]                lookup_blk,
  output logic                            lookup_hit,
  output logic [SLOT_W-1:0]               lookup_slot,
  // free slot
  output logic                            free_any,
  output logic [SLOT_W-1:0]               free_slot,
  // slot with the fewest valid pages
  output logic [SLOT_W-1:0]               min_slot,
  output logic [CNT_W-1:0]                min_count,
  // entry write
  input  logic                            wr_en,
  input  logic [SLOT_W-1:0]               wr_slot,
  input  logic                            wr_valid,
  input  logic [BLK_W-1:0]                wr_blk,
  input  logic [PPB-1:0]                  wr_bitmap,
  // whole table
  output logic [N_SLOTS-1:0]              entry_valid,
  output logic [N_SLOTS-1:0][BLK_W-1:0]   entry_blk,
  output logic [N_SLOTS-1:0][PPB-1:0]     entry_bitmap
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      entry_valid  <= '0;
      entry_blk    <= '0;
      entry_bitmap <= '0;
    end else if (wr_en) begin
      entry_valid[wr_slot]  <= wr_valid;
      entry_blk[wr_slot]    <= wr_blk;
      entry_bitmap[wr_slot] <= wr_bitmap;
    end
  end

  logic [N_SLOTS-1:0][CNT_W-1:0] pop;

  always_comb begin
    for (int s = 0; s < N_SLOTS; s++) begin
      pop[s] = '0;
      for (int o = 0; o < PPB; o++) pop[s] = pop[s] + CNT_W'(entry_bitmap[s][o]);
    end
  end

  always_comb begin
    lookup_hit  = 1'b0;
    lookup_slot = '0;
    free_any    = 1'b0;
    free_slot   = '0;
    min_slot    = '0;
    min_count   = CNT_W'(PPB);
    for (int s = N_SLOTS - 1; s >= 0; s--) begin
      if (entry_valid[s] && entry_blk[s] == lookup_blk) begin
        lookup_hit  = 1'b1;
        lookup_slot = SLOT_W'(s);
      end
      if (!entry_valid[s]) begin
        free_any  = 1'b1;
        free_slot = SLOT_W'(s);
      end
    end
    for (int s = 0; s < N_SLOTS; s++) begin
      if (entry_valid[s] && pop[s] < min_count) begin
        min_count = pop[s];
        min_slot  = SLOT_W'(s);
      end
    end
  end

endmodule

// victim_sel: chooses the pages a p-space eviction moves to the b-space.
//
// C-lash evicts from the p-space "the largest set of pages from the same
// block". This unit finds that block. It scans the N candidate entries one
// per cycle; for candidate i it compares the block number of every valid
// entry with that of entry i in parallel and counts the matches. The largest
// count wins; on a tie the lowest entry index wins (the source does not say
// how ties are broken). After the scan it reports the block, the size of the
// set and a mask of the frames in it.
//
// Interface and timing: pulse start for one cycle with the table stable on
// entry_valid/entry_blk; done pulses N+1 cycles later, and vic_* hold their
// value from then until the next start. With no valid entry the count is 0.
module victim_sel #(
  parameter int unsigned N     = clash_pkg::P_FRAMES,
  parameter int unsigned BLK_W = $clog2(clash_pkg::FLASH_BLOCKS),
  localparam int unsigned IDX_W = $clog2(N),
  localparam int unsigned CNT_W = $clog2(N + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [N-1:0]              entry_valid,
  input  logic [N-1:0][BLK_W-1:0]   entry_blk,
  output logic                      busy,
  output logic                      done,
  output logic [BLK_W-1:0]          vic_blk,
  output logic [CNT_W-1:0]          vic_count,
  output logic [N-1:0]              vic_mask
);

  logic [IDX_W-1:0] cand;
  logic [CNT_W-1:0] cand_count;

  // Number of valid entries sharing the candidate's block.
  always_comb begin
    cand_count = '0;
    for (int j = 0; j < N; j++)
      cand_count = cand_count +
                   CNT_W'(entry_valid[j] && entry_blk[j] == entry_blk[cand]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      cand      <= '0;
      vic_blk   <= '0;
      vic_count <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy      <= 1'b1;
        cand      <= '0;
        vic_count <= '0;
      end else if (busy) begin
        if (entry_valid[cand] && cand_count > vic_count) begin
          vic_count <= cand_count;
          vic_blk   <= entry_blk[cand];
        end
        if (cand == IDX_W'(N - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          cand <= cand + 1'b1;
        end
      end
    end
  end

  always_comb
    for (int j = 0; j < N; j++)
      vic_mask[j] = (vic_count != '0) && entry_valid[j] && entry_blk[j] == vic_blk;

endmodule

// cache_sram: the cache data store (the "Cache (SRAM)" of the C-lash cache).
//
// A single-port synchronous SRAM of DEPTH words. Frames 0..P_FRAMES-1 hold the
// p-space pages; the b-space block slots follow, slot s page o at frame
// P_FRAMES + s*PAGES_PER_BLOCK + o. At the default 256 frames of 512 32-bit
// words this is 512 KB, the cache size of the evaluated configuration.
//
// Interface and timing: with en=1 and we=1 the word at addr is written at the
// clock edge. With en=1 and we=0 it is read and appears on rdata after the
// edge, one cycle of latency. rdata keeps its value until the next read,
// including across writes; the page mover relies on that. Contents are not
// reset, like a real SRAM macro. The memory is written as an array so that a
// synthesis flow can map it to a macro of its own process.
module cache_sram #(
  parameter int unsigned WORD_W = clash_pkg::WORD_W,
  parameter int unsigned DEPTH  = (clash_pkg::P_FRAMES + clash_pkg::B_SLOTS * clash_pkg::PAGES_PER_BLOCK)
                                  * clash_pkg::PAGE_WORDS,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [WORD_W-1:0] wdata,
  output logic [WORD_W-1:0] rdata
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule

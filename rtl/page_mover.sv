// page_mover: exchanges the contents of two page frames of the cache SRAM.
//
// Every data movement inside the C-lash cache is built from this exchange:
// p-space victims going into a b-space slot, and the switch, in which the
// pages of a b-space block go to the p-space while the victims take their
// place. Exchanging rather than copying lets a switch reuse the frames the
// victims free without a page buffer. The source says only that pages are
// moved; the exchange is this design's choice.
//
// For each word w the mover reads A[w], reads B[w] (keeping A[w] in a
// register), writes A[w] with B[w] and writes B[w] with the saved A[w]: four
// single-port SRAM cycles per word. It needs an SRAM whose rdata holds
// across writes.
//
// Interface and timing: pulse start with frame_a/frame_b; the mover owns the
// SRAM port (sram_*) while busy and pulses done in the cycle after the last
// write, 4*PAGE_WORDS+1 cycles after start.
module page_mover #(
  parameter int unsigned WORD_W     = clash_pkg::WORD_W,
  parameter int unsigned PAGE_WORDS = clash_pkg::PAGE_WORDS,
  parameter int unsigned FRAME_W    = $clog2(clash_pkg::P_FRAMES
                                             + clash_pkg::B_SLOTS * clash_pkg::PAGES_PER_BLOCK),
  localparam int unsigned WIDX_W    = $clog2(PAGE_WORDS),
  localparam int unsigned AW        = FRAME_W + WIDX_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [FRAME_W-1:0] frame_a,
  input  logic [FRAME_W-1:0] frame_b,
  output logic              busy,
  output logic              done,
  output logic              sram_en,
  output logic              sram_we,
  output logic [AW-1:0]     sram_addr,
  output logic [WORD_W-1:0] sram_wdata,
  input  logic [WORD_W-1:0] sram_rdata
);

  typedef enum logic [1:0] {PH_RD_A, PH_RD_B, PH_WR_A, PH_WR_B} phase_e;

  phase_e            phase;
  logic [FRAME_W-1:0] fa, fb;
  logic [WIDX_W-1:0] w;
  logic [WORD_W-1:0] save_a;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      phase  <= PH_RD_A;
      fa     <= '0;
      fb     <= '0;
      w      <= '0;
      save_a <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        fa    <= frame_a;
        fb    <= frame_b;
        w     <= '0;
        phase <= PH_RD_A;
      end else if (busy) begin
        unique case (phase)
          PH_RD_A: phase <= PH_RD_B;
          PH_RD_B: begin
            save_a <= sram_rdata;
            phase  <= PH_WR_A;
          end
          PH_WR_A: phase <= PH_WR_B;
          PH_WR_B: begin
            phase <= PH_RD_A;
            if (w == WIDX_W'(PAGE_WORDS - 1)) begin
              busy <= 1'b0;
              done <= 1'b1;
            end else begin
              w <= w + 1'b1;
            end
          end
        endcase
      end
    end
  end

  always_comb begin
    sram_en    = busy;
    sram_we    = (phase == PH_WR_A) || (phase == PH_WR_B);
    sram_addr  = (phase == PH_RD_A || phase == PH_WR_A) ? {fa, w} : {fb, w};
    sram_wdata = (phase == PH_WR_A) ? sram_rdata : save_a;
  end

endmodule

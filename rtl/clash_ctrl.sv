// clash_ctrl: the C-lash cache controller.
//
// C-lash replaces the wear leveling and garbage collection of a flash
// translation layer with a small two-part cache. The p-space holds single
// pages from any block; the b-space holds whole blocks, directly mapped. Only
// whole blocks are ever written to the flash, so every flash write is one
// erase followed by the programming of a full block, and repeated writes to
// the same pages are absorbed by the cache. This controller implements the
// policy; the data sits in an external cache SRAM (cache_sram).
//
// Host requests (one page each):
//  * Read: the page is looked up in both spaces. A hit streams it from the
//    SRAM; a miss streams it straight from the flash and is not cached.
//  * Write: a hit overwrites the page where it is (p-space or b-space). A
//    miss always goes to a free p-space frame. With no free frame the
//    controller first runs a p-space eviction, then retries.
// P-space eviction: victim_sel finds the largest set of p-space pages of one
// block X. Then, in this order:
//  1. X already owns a b-space slot: the victims join it (own choice; the
//     source does not treat this case, and a second slot for X would let two
//     copies of a block reach the flash).
//  2. A b-space slot is free: the victims move into it.
//  3. Some slot holds fewer valid pages than there are victims: switch. The
//     victims take that slot's place and its valid pages move to the p-space
//     (the slot with the fewest pages is taken).
//  4. Otherwise the LRU slot is flushed to the flash with a late merge, and
//     the victims move into the freed slot.
// Flush (late merge): every page of the block that is neither in the slot nor
// in the p-space is read from the flash into the slot; the block is erased;
// its 64 pages are programmed in order. A page of the block that sits in the
// p-space is programmed from its p-space frame (own choice, so the flash never
// receives stale data) and stays cached.
//
// Invariants: a logical page is in at most one place in the cache; a flash
// page is stale exactly while the cache holds the page, so no flash-side
// validity table is needed.
//
// Interfaces, all valid/ready: host_req (op, lpn), host_w (PAGE_WORDS words
// of a write), host_r (PAGE_WORDS words of a read, last flagged), host_done
// pulses once per request with where it was served. Flash: fl_cmd (op,
// block, page), fl_w (PAGE_WORDS words after an accepted PROG), fl_r
// (PAGE_WORDS words after an accepted READ); the flash holds fl_cmd_ready low
// while it is busy. Timing: a hit moves one word per cycle after a two-cycle
// lookup; eviction costs victim_sel (P_FRAMES+1 cycles) plus 4*PAGE_WORDS
// cycles per page moved; flushes are bounded by the flash.
module clash_ctrl
  import clash_pkg::host_op_e, clash_pkg::HOST_READ, clash_pkg::HOST_WRITE,
         clash_pkg::served_e, clash_pkg::SRV_FLASH, clash_pkg::SRV_PSPACE, clash_pkg::SRV_BSPACE,
         clash_pkg::fl_op_e, clash_pkg::FL_READ, clash_pkg::FL_PROG, clash_pkg::FL_ERASE,
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
  localparam int unsigned FRAME_W = $clog2(FRAMES),
  localparam int unsigned WIDX_W  = $clog2(PAGE_WORDS),
  localparam int unsigned AW      = FRAME_W + WIDX_W,
  localparam int unsigned PIDX_W  = $clog2(P_FRAMES),
  localparam int unsigned SLOT_W  = (B_SLOTS > 1) ? $clog2(B_SLOTS) : 1,
  localparam int unsigned VCNT_W  = $clog2(P_FRAMES + 1),
  localparam int unsigned BCNT_W  = $clog2(PPB + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host requests
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
  // flash media
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
  // cache SRAM
  output logic              sram_en,
  output logic              sram_we,
  output logic [AW-1:0]     sram_addr,
  output logic [WORD_W-1:0] sram_wdata,
  input  logic [WORD_W-1:0] sram_rdata,
  // statistics
  output clash_events_t     events
);

  typedef enum logic [4:0] {
    S_IDLE, S_LOOKUP, S_RD_SRAM, S_RD_FL_CMD, S_RD_FL_DATA, S_WR_DATA, S_DONE,
    S_EV_SEL, S_EV_WAIT, S_EV_DECIDE,
    S_MV_NEXT, S_MV_WAIT,
    S_SW1_NEXT, S_SW1_WAIT, S_SW2_NEXT, S_SW2_WAIT, S_SW_FIN,
    S_FL_SCAN, S_FL_RD_CMD, S_FL_RD_DATA, S_FL_ERASE, S_FL_SRC, S_FL_PG_CMD,
    S_FL_PG_DATA, S_FL_FIN
  } state_e;

  state_e state;

  // ---------------------------------------------------------------- blocks
  logic [LPN_W-1:0]                   p_lookup_lpn;
  logic                               p_hit, p_free_any;
  logic [PIDX_W-1:0]                  p_hit_idx, p_free_idx;
  logic                               p_wr_en, p_wr_valid;
  logic [PIDX_W-1:0]                  p_wr_idx;
  logic [LPN_W-1:0]                   p_wr_lpn;
  logic [P_FRAMES-1:0]                p_valid;
  logic [P_FRAMES-1:0][LPN_W-1:0]     p_lpn;
  logic [P_FRAMES-1:0][BLK_W-1:0]     p_blk;

  pspace_dir #(.N_FRAMES(P_FRAMES), .LPN_W(LPN_W)) u_pdir (
    .clk, .rst_n,
    .lookup_lpn(p_lookup_lpn), .lookup_hit(p_hit), .lookup_idx(p_hit_idx),
    .free_any(p_free_any), .free_idx(p_free_idx),
    .wr_en(p_wr_en), .wr_idx(p_wr_idx), .wr_valid(p_wr_valid), .wr_lpn(p_wr_lpn),
    .entry_valid(p_valid), .entry_lpn(p_lpn)
  );

  always_comb
    for (int i = 0; i < P_FRAMES; i++) p_blk[i] = p_lpn[i][LPN_W-1:OFF_W];

  logic                               vs_start, vs_done;
  logic [BLK_W-1:0]                   vs_blk;
  logic [VCNT_W-1:0]                  vs_count;
  logic [P_FRAMES-1:0]                vs_mask;

  victim_sel #(.N(P_FRAMES), .BLK_W(BLK_W)) u_vsel (
    .clk, .rst_n, .start(vs_start), .entry_valid(p_valid), .entry_blk(p_blk),
    .busy(), .done(vs_done), .vic_blk(vs_blk), .vic_count(vs_count),
    .vic_mask(vs_mask)
  );

  logic [BLK_W-1:0]                   b_lookup_blk;
  logic                               b_hit, b_free_any;
  logic [SLOT_W-1:0]                  b_hit_slot, b_free_slot, b_min_slot;
  logic [BCNT_W-1:0]                  b_min_count;
  logic                               b_wr_en, b_wr_valid;
  logic [SLOT_W-1:0]                  b_wr_slot;
  logic [BLK_W-1:0]                   b_wr_blk;
  logic [PPB-1:0]                     b_wr_bitmap;
  logic [B_SLOTS-1:0][BLK_W-1:0]      b_blk;
  logic [B_SLOTS-1:0][PPB-1:0]        b_bitmap;

  bspace_dir #(.N_SLOTS(B_SLOTS), .BLK_W(BLK_W), .PPB(PPB)) u_bdir (
    .clk, .rst_n,
    .lookup_blk(b_lookup_blk), .lookup_hit(b_hit), .lookup_slot(b_hit_slot),
    .free_any(b_free_any), .free_slot(b_free_slot),
    .min_slot(b_min_slot), .min_count(b_min_count),
    .wr_en(b_wr_en), .wr_slot(b_wr_slot), .wr_valid(b_wr_valid),
    .wr_blk(b_wr_blk), .wr_bitmap(b_wr_bitmap),
    .entry_valid(), .entry_blk(b_blk), .entry_bitmap(b_bitmap)
  );

  logic              lru_touch;
  logic [SLOT_W-1:0] lru_touch_slot, lru_slot;

  bspace_lru #(.N_SLOTS(B_SLOTS)) u_lru (
    .clk, .rst_n, .touch_en(lru_touch), .touch_slot(lru_touch_slot),
    .lru_slot(lru_slot)
  );

  logic               mv_start, mv_busy, mv_done;
  logic [FRAME_W-1:0] mv_a, mv_b;
  logic               mv_en, mv_we;
  logic [AW-1:0]      mv_addr;
  logic [WORD_W-1:0]  mv_wdata;

  page_mover #(.WORD_W(WORD_W), .PAGE_WORDS(PAGE_WORDS), .FRAME_W(FRAME_W)) u_mover (
    .clk, .rst_n, .start(mv_start), .frame_a(mv_a), .frame_b(mv_b),
    .busy(mv_busy), .done(mv_done),
    .sram_en(mv_en), .sram_we(mv_we), .sram_addr(mv_addr), .sram_wdata(mv_wdata),
    .sram_rdata(sram_rdata)
  );

  // ---------------------------------------------------------------- helpers
  function automatic logic [FRAME_W-1:0] bframe(logic [SLOT_W-1:0] s, logic [OFF_W-1:0] o);
    return FRAME_W'(P_FRAMES) + FRAME_W'(s) * FRAME_W'(PPB) + FRAME_W'(o);
  endfunction

  function automatic logic [PIDX_W-1:0] first_p(logic [P_FRAMES-1:0] m);
    first_p = '0;
    for (int i = P_FRAMES - 1; i >= 0; i--) if (m[i]) first_p = PIDX_W'(i);
  endfunction

  function automatic logic [OFF_W-1:0] first_o(logic [PPB-1:0] m);
    first_o = '0;
    for (int i = PPB - 1; i >= 0; i--) if (m[i]) first_o = OFF_W'(i);
  endfunction

  // ---------------------------------------------------------------- registers
  host_op_e           req_op;
  logic [LPN_W-1:0]   req_lpn;
  logic [FRAME_W-1:0] frame;      // frame streamed to/from the host or flash
  served_e            served;
  logic [WIDX_W-1:0]  wcnt;       // words transferred
  logic [WIDX_W:0]    rd_cnt;     // SRAM reads issued by the stream-out path
  logic               so_hold;    // stream-out word waiting for its consumer
  logic               so_pend;    // SRAM read issued last cycle

  // eviction state
  logic [BLK_W-1:0]    vic_blk;
  logic [VCNT_W-1:0]   vic_count;
  logic [P_FRAMES-1:0] vic_mask;
  logic [SLOT_W-1:0]   tslot;     // slot being filled, switched or flushed
  logic [BLK_W-1:0]    tblk;      // block held in tslot before a switch/flush
  logic [PPB-1:0]      tbits;     // working valid bitmap of tslot
  logic [PPB-1:0]      nbits;     // bitmap of the victims placed by a switch
  logic [OFF_W-1:0]    off;       // page offset walked by a flush
  logic                off_last;

  wire [BLK_W-1:0] req_blk = req_lpn[LPN_W-1:OFF_W];
  wire [OFF_W-1:0] req_off = req_lpn[OFF_W-1:0];
  wire             last_word = (wcnt == WIDX_W'(PAGE_WORDS - 1));
  assign off_last = (off == OFF_W'(PPB - 1));

  // ---------------------------------------------------------------- stream-out
  // SRAM -> consumer (host on a read hit, flash on a flush program).
  logic so_active, so_ready, so_valid, so_req;
  assign so_active = (state == S_RD_SRAM) || (state == S_FL_PG_DATA);
  assign so_ready  = (state == S_RD_SRAM) ? host_rready : fl_wready;
  assign so_valid  = so_active && (so_hold || so_pend);
  assign so_req    = so_active && (rd_cnt != (WIDX_W + 1)'(PAGE_WORDS)) &&
                     (!(so_hold || so_pend) || so_ready);

  // ---------------------------------------------------------------- lookup helpers
  wire             b_page_hit = b_hit && b_bitmap[b_hit_slot][req_off];

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      req_op    <= HOST_READ;
      req_lpn   <= '0;
      frame     <= '0;
      served    <= SRV_FLASH;
      wcnt      <= '0;
      rd_cnt    <= '0;
      so_hold   <= 1'b0;
      so_pend   <= 1'b0;
      vic_blk   <= '0;
      vic_count <= '0;
      vic_mask  <= '0;
      tslot     <= '0;
      tblk      <= '0;
      tbits     <= '0;
      nbits     <= '0;
      off       <= '0;
    end else begin
      so_pend <= so_req;
      so_hold <= so_valid && !so_ready;
      if (so_req) rd_cnt <= rd_cnt + 1'b1;

      unique case (state)
        S_IDLE: if (host_req_valid) begin
          req_op  <= host_req_op;
          req_lpn <= host_req_lpn;
          state   <= S_LOOKUP;
        end

        S_LOOKUP: begin
          wcnt   <= '0;
          rd_cnt <= '0;
          if (p_hit) begin
            frame  <= FRAME_W'(p_hit_idx);
            served <= SRV_PSPACE;
            state  <= (req_op == HOST_READ) ? S_RD_SRAM : S_WR_DATA;
          end else if (b_page_hit) begin
            frame  <= bframe(b_hit_slot, req_off);
            served <= SRV_BSPACE;
            state  <= (req_op == HOST_READ) ? S_RD_SRAM : S_WR_DATA;
          end else if (req_op == HOST_READ) begin
            served <= SRV_FLASH;
            state  <= S_RD_FL_CMD;
          end else if (p_free_any) begin
            frame  <= FRAME_W'(p_free_idx);
            served <= SRV_PSPACE;
            state  <= S_WR_DATA;
          end else begin
            state  <= S_EV_SEL;
          end
        end

        S_RD_SRAM: if (so_valid && so_ready) begin
          wcnt <= wcnt + 1'b1;
          if (last_word) state <= S_DONE;
        end

        S_RD_FL_CMD: if (fl_cmd_ready) state <= S_RD_FL_DATA;

        S_RD_FL_DATA: if (fl_rvalid && host_rready) begin
          wcnt <= wcnt + 1'b1;
          if (last_word) state <= S_DONE;
        end

        S_WR_DATA: if (host_wvalid) begin
          wcnt <= wcnt + 1'b1;
          if (last_word) state <= S_DONE;
        end

        S_DONE: state <= S_IDLE;

        // ------------------------------------------------ p-space eviction
        S_EV_SEL: state <= S_EV_WAIT;

        S_EV_WAIT: if (vs_done) begin
          vic_blk   <= vs_blk;
          vic_count <= vs_count;
          vic_mask  <= vs_mask;
          state     <= S_EV_DECIDE;
        end

        S_EV_DECIDE: begin
          if (b_hit) begin                         // join own slot
            tslot <= b_hit_slot;
            tbits <= b_bitmap[b_hit_slot];
            state <= S_MV_NEXT;
          end else if (b_free_any) begin           // free slot
            tslot <= b_free_slot;
            tbits <= '0;
            state <= S_MV_NEXT;
          end else if (VCNT_W'(b_min_count) < vic_count) begin  // switch
            tslot <= b_min_slot;
            tblk  <= b_blk[b_min_slot];
            tbits <= b_bitmap[b_min_slot];
            nbits <= '0;
            state <= S_SW1_NEXT;
          end else begin                           // flush LRU, late merge
            tslot <= lru_slot;
            tblk  <= b_blk[lru_slot];
            tbits <= b_bitmap[lru_slot];
            off   <= '0;
            state <= S_FL_SCAN;
          end
        end

        // ------------------------------------------------ victims -> slot
        S_MV_NEXT: begin
          if (vic_mask == '0) begin
            state <= S_LOOKUP;
          end else begin
            tbits[p_lpn[first_p(vic_mask)][OFF_W-1:0]] <= 1'b1;
            vic_mask[first_p(vic_mask)] <= 1'b0;
            state <= S_MV_WAIT;
          end
        end
        S_MV_WAIT: if (mv_done) state <= S_MV_NEXT;

        // ------------------------------------------------ switch
        S_SW1_NEXT: begin
          if (vic_mask == '0) begin
            state <= S_SW2_NEXT;
          end else begin
            tbits[p_lpn[first_p(vic_mask)][OFF_W-1:0]] <= 1'b0;
            nbits[p_lpn[first_p(vic_mask)][OFF_W-1:0]] <= 1'b1;
            vic_mask[first_p(vic_mask)] <= 1'b0;
            state <= S_SW1_WAIT;
          end
        end
        S_SW1_WAIT: if (mv_done) state <= S_SW1_NEXT;

        S_SW2_NEXT: begin
          if (tbits == '0) begin
            state <= S_SW_FIN;
          end else begin
            tbits[first_o(tbits)] <= 1'b0;
            state <= S_SW2_WAIT;
          end
        end
        S_SW2_WAIT: if (mv_done) state <= S_SW2_NEXT;

        S_SW_FIN: state <= S_LOOKUP;

        // ------------------------------------------------ flush with late merge
        S_FL_SCAN: begin
          if (!tbits[off] && !p_hit) begin
            state <= S_FL_RD_CMD;
          end else if (off_last) begin
            off   <= '0;
            state <= S_FL_ERASE;
          end else begin
            off <= off + 1'b1;
          end
        end
        S_FL_RD_CMD: if (fl_cmd_ready) begin
          wcnt  <= '0;
          state <= S_FL_RD_DATA;
        end
        S_FL_RD_DATA: if (fl_rvalid) begin
          wcnt <= wcnt + 1'b1;
          if (last_word) begin
            if (off_last) begin
              off   <= '0;
              state <= S_FL_ERASE;
            end else begin
              off   <= off + 1'b1;
              state <= S_FL_SCAN;
            end
          end
        end
        S_FL_ERASE: if (fl_cmd_ready) state <= S_FL_SRC;
        S_FL_SRC: begin
          frame <= (!tbits[off] && p_hit) ? FRAME_W'(p_hit_idx) : bframe(tslot, off);
          state <= S_FL_PG_CMD;
        end
        S_FL_PG_CMD: if (fl_cmd_ready) begin
          wcnt   <= '0;
          rd_cnt <= '0;
          state  <= S_FL_PG_DATA;
        end
        S_FL_PG_DATA: if (so_valid && so_ready) begin
          wcnt <= wcnt + 1'b1;
          if (last_word) begin
            if (off_last) begin
              state <= S_FL_FIN;
            end else begin
              off   <= off + 1'b1;
              state <= S_FL_SRC;
            end
          end
        end
        S_FL_FIN: begin                            // slot is now free
          tbits <= '0;
          state <= S_MV_NEXT;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- outputs
  always_comb begin
    host_req_ready = (state == S_IDLE);
    host_wready    = (state == S_WR_DATA);
    host_rvalid    = 1'b0;
    host_rdata     = sram_rdata;
    host_rlast     = last_word;
    host_done      = (state == S_DONE);
    host_served    = served;

    fl_cmd_valid = 1'b0;
    fl_cmd_op    = FL_READ;
    fl_cmd_blk   = req_blk;
    fl_cmd_page  = req_off;
    fl_wvalid    = 1'b0;
    fl_wdata     = sram_rdata;
    fl_rready    = 1'b0;

    p_lookup_lpn = (state == S_IDLE) ? host_req_lpn : req_lpn;
    p_wr_en      = 1'b0;
    p_wr_idx     = '0;
    p_wr_valid   = 1'b0;
    p_wr_lpn     = req_lpn;
    b_lookup_blk = req_blk;
    b_wr_en      = 1'b0;
    b_wr_slot    = tslot;
    b_wr_valid   = 1'b1;
    b_wr_blk     = vic_blk;
    b_wr_bitmap  = tbits;
    lru_touch      = 1'b0;
    lru_touch_slot = tslot;
    vs_start     = (state == S_EV_SEL);
    mv_start     = 1'b0;
    mv_a         = '0;
    mv_b         = '0;

    sram_en    = 1'b0;
    sram_we    = 1'b0;
    sram_addr  = {frame, wcnt};
    sram_wdata = host_wdata;

    events = '0;

    unique case (state)
      S_LOOKUP: begin
        if (!p_hit && b_page_hit) begin
          lru_touch      = 1'b1;
          lru_touch_slot = b_hit_slot;
        end
        if (!p_hit && !b_page_hit && req_op == HOST_WRITE && p_free_any) begin
          p_wr_en    = 1'b1;                       // allocate the p-space frame
          p_wr_idx   = p_free_idx;
          p_wr_valid = 1'b1;
          p_wr_lpn   = req_lpn;
        end
        if (!p_hit && !b_page_hit && req_op == HOST_WRITE && !p_free_any)
          events.evict = 1'b1;
      end
      S_RD_SRAM: begin
        host_rvalid = so_valid;
        sram_en     = so_req;
        sram_addr   = {frame, rd_cnt[WIDX_W-1:0]};
      end
      S_RD_FL_CMD: begin
        fl_cmd_valid = 1'b1;
        fl_cmd_op    = FL_READ;
      end
      S_RD_FL_DATA: begin
        host_rvalid = fl_rvalid;
        host_rdata  = fl_rdata;
        fl_rready   = host_rready;
      end
      S_WR_DATA: begin
        sram_en = host_wvalid;
        sram_we = 1'b1;
      end
      S_EV_DECIDE: begin
        b_lookup_blk = vic_blk;
        if (b_hit)                                   events.to_own_slot = 1'b1;
        else if (b_free_any)                         events.to_free_slot = 1'b1;
        else if (VCNT_W'(b_min_count) < vic_count)   events.switch_op = 1'b1;
        else                                         events.flush = 1'b1;
      end
      S_MV_NEXT: begin
        if (vic_mask == '0) begin
          b_wr_en   = 1'b1;                        // slot now holds vic_blk
          lru_touch = 1'b1;
        end else begin
          mv_start   = 1'b1;
          mv_a       = FRAME_W'(first_p(vic_mask));
          mv_b       = bframe(tslot, p_lpn[first_p(vic_mask)][OFF_W-1:0]);
          p_wr_en    = 1'b1;                       // frame is free again
          p_wr_idx   = first_p(vic_mask);
          p_wr_valid = 1'b0;
        end
      end
      S_SW1_NEXT: if (vic_mask != '0) begin
        mv_start   = 1'b1;
        mv_a       = FRAME_W'(first_p(vic_mask));
        mv_b       = bframe(tslot, p_lpn[first_p(vic_mask)][OFF_W-1:0]);
        // the frame receives the slot's page at that offset, if it had one
        p_wr_en    = 1'b1;
        p_wr_idx   = first_p(vic_mask);
        p_wr_valid = tbits[p_lpn[first_p(vic_mask)][OFF_W-1:0]];
        p_wr_lpn   = {tblk, p_lpn[first_p(vic_mask)][OFF_W-1:0]};
      end
      S_SW2_NEXT: if (tbits != '0) begin
        mv_start   = 1'b1;
        mv_a       = bframe(tslot, first_o(tbits));
        mv_b       = FRAME_W'(p_free_idx);
        p_wr_en    = 1'b1;
        p_wr_idx   = p_free_idx;
        p_wr_valid = 1'b1;
        p_wr_lpn   = {tblk, first_o(tbits)};
      end
      S_SW_FIN: begin
        b_wr_en     = 1'b1;
        b_wr_bitmap = nbits;
        lru_touch   = 1'b1;
      end
      S_FL_SCAN, S_FL_SRC: p_lookup_lpn = {tblk, off};
      S_FL_RD_CMD: begin
        fl_cmd_valid = 1'b1;
        fl_cmd_op    = FL_READ;
        fl_cmd_blk   = tblk;
        fl_cmd_page  = off;
      end
      S_FL_RD_DATA: begin
        fl_rready  = 1'b1;
        sram_en    = fl_rvalid;
        sram_we    = 1'b1;
        sram_addr  = {bframe(tslot, off), wcnt};
        sram_wdata = fl_rdata;
        events.merge_read = fl_rvalid && last_word;
      end
      S_FL_ERASE: begin
        fl_cmd_valid = 1'b1;
        fl_cmd_op    = FL_ERASE;
        fl_cmd_blk   = tblk;
        fl_cmd_page  = '0;
        events.erase = fl_cmd_ready;
      end
      S_FL_PG_CMD: begin
        fl_cmd_valid = 1'b1;
        fl_cmd_op    = FL_PROG;
        fl_cmd_blk   = tblk;
        fl_cmd_page  = off;
        events.prog  = fl_cmd_ready;
      end
      S_FL_PG_DATA: begin
        fl_wvalid = so_valid;
        sram_en   = so_req;
        sram_addr = {frame, rd_cnt[WIDX_W-1:0]};
      end
      S_FL_FIN: begin
        b_wr_en    = 1'b1;                         // free the flushed slot
        b_wr_valid = 1'b0;
        b_wr_blk   = tblk;
        b_wr_bitmap = '0;
      end
      default: ;
    endcase

    if (mv_busy) begin
      sram_en    = mv_en;
      sram_we    = mv_we;
      sram_addr  = mv_addr;
      sram_wdata = mv_wdata;
    end
  end

  // ---------------------------------------------------------------- checks
  // A command offered to the flash stays offered, unchanged, until taken.
  a_fl_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    fl_cmd_valid && !fl_cmd_ready |=> fl_cmd_valid && $stable(fl_cmd_op)
                                       && $stable(fl_cmd_blk) && $stable(fl_cmd_page));
  // A read word offered from the SRAM to the host stays offered until taken.
  a_host_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_RD_SRAM && host_rvalid && !host_rready |=> host_rvalid && $stable(host_rdata));
  // A switch leaves room in the p-space for every page it takes out of the slot.
  a_switch_room: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_SW2_NEXT && tbits != '0 |-> p_free_any);
  // The victim set of a full p-space is never empty.
  a_victims: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_EV_DECIDE |-> vic_count != '0);

endmodule

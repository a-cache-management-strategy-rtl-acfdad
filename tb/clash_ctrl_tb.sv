// clash_ctrl_tb: the C-lash controller against a transaction-level reference
// model of the policy, written here from the policy's description.
//
// Tiny geometry: 4 p-space frames, 2 b-space slots of 4 pages, 4-word pages,
// 32 flash blocks. For every random request the reference predicts where it
// is served and which cache operations it causes (eviction to a free slot, to
// the block's own slot, switch, flush with how many late-merge reads, erases
// and programs); the controller's served code and event strobes must match.
// Read data is checked against a reference store. A read hit must stream a
// page at one word per cycle: it must finish within PAGE_WORDS+4 cycles.
module clash_ctrl_tb;
  import clash_pkg::*;

  localparam int unsigned PAGE_WORDS = 4, PPB = 4, P = 4, S = 2, FLASH_BLOCKS = 32;
  localparam int unsigned OFF_W = 2, BLK_W = 5, AW = 6;
  localparam int unsigned N_OPS = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              host_req_valid = 1'b0, host_req_ready;
  host_op_e          host_req_op = HOST_READ;
  logic [BLK_W+OFF_W-1:0] host_req_lpn = '0;
  logic              host_wvalid = 1'b0, host_wready;
  logic [31:0]       host_wdata = '0;
  logic              host_rvalid, host_rready = 1'b1, host_rlast, host_done;
  logic [31:0]       host_rdata;
  served_e           host_served;
  logic              fl_cmd_valid, fl_cmd_ready, fl_wvalid, fl_wready, fl_rvalid, fl_rready;
  fl_op_e            fl_cmd_op;
  logic [BLK_W-1:0]  fl_cmd_blk;
  logic [OFF_W-1:0]  fl_cmd_page;
  logic [31:0]       fl_wdata, fl_rdata;
  logic              sram_en, sram_we;
  logic [AW-1:0]     sram_addr;
  logic [31:0]       sram_wdata, sram_rdata;
  clash_events_t     events;
  int unsigned       checks = 0, failures = 0;

  clash_ctrl #(.WORD_W(32), .PAGE_WORDS(PAGE_WORDS), .PPB(PPB), .P_FRAMES(P),
               .B_SLOTS(S), .FLASH_BLOCKS(FLASH_BLOCKS)) dut (.*);

  cache_sram #(.WORD_W(32), .DEPTH((P + S * PPB) * PAGE_WORDS)) sram (
    .clk, .en(sram_en), .we(sram_we), .addr(sram_addr), .wdata(sram_wdata), .rdata(sram_rdata)
  );

  flash_model #(.PAGE_WORDS(PAGE_WORDS), .PPB(PPB), .BLK_W(BLK_W), .OFF_W(OFF_W),
                .T_READ(3), .T_PROG(4), .T_ERASE(9)) flash (
    .clk, .cmd_valid(fl_cmd_valid), .cmd_ready(fl_cmd_ready), .cmd_op(fl_cmd_op),
    .cmd_blk(fl_cmd_blk), .cmd_page(fl_cmd_page), .wvalid(fl_wvalid),
    .wready(fl_wready), .wdata(fl_wdata), .rvalid(fl_rvalid), .rready(fl_rready),
    .rdata(fl_rdata)
  );

  `include "clash_host_tasks.svh"

  // ------------------------------------------------------------ reference
  bit          pv [P];
  int unsigned pl [P];
  bit          bv [S];
  int unsigned bb [S];
  bit          bm [S][PPB];
  int unsigned age [S];
  // expected operations of the current request
  int unsigned x_evict, x_free, x_own, x_switch, x_flush, x_merge, x_erase, x_prog;
  int unsigned n_phase2 = 0;

  function automatic void touch(int s);
    for (int i = 0; i < S; i++) if (i != s && age[i] < age[s]) age[i]++;
    age[s] = 0;
  endfunction

  function automatic int lowest_free();
    for (int f = 0; f < P; f++) if (!pv[f]) return f;
    return -1;
  endfunction

  function automatic int p_find(int unsigned lpn);
    for (int f = 0; f < P; f++) if (pv[f] && pl[f] == lpn) return f;
    return -1;
  endfunction

  function automatic int popc(int s);
    int c = 0;
    for (int o = 0; o < PPB; o++) c += bm[s][o];
    return c;
  endfunction

  function automatic void evict();
    int best = 0, xblk = 0, s = -1, minc = PPB + 1, mins = 0;
    x_evict++;
    for (int i = 0; i < P; i++) begin
      int c = 0;
      for (int j = 0; j < P; j++) c += (pv[i] && pv[j] && pl[j] / PPB == pl[i] / PPB);
      if (c > best) begin best = c; xblk = pl[i] / PPB; end
    end
    for (int i = 0; i < S; i++) if (bv[i] && bb[i] == xblk) s = i;
    if (s >= 0) x_own++;
    else begin
      for (int i = S - 1; i >= 0; i--) if (!bv[i]) s = i;
      if (s >= 0) begin
        x_free++;
        for (int o = 0; o < PPB; o++) bm[s][o] = 0;
      end
    end
    if (s < 0) begin
      for (int i = 0; i < S; i++) if (popc(i) < minc) begin minc = popc(i); mins = i; end
      if (minc < best) begin
        int unsigned y;
        bit nb [PPB];
        x_switch++;
        s = mins; y = bb[s];
        for (int o = 0; o < PPB; o++) nb[o] = 0;
        for (int f = 0; f < P; f++) if (pv[f] && pl[f] / PPB == xblk) begin
          int o = pl[f] % PPB;
          if (bm[s][o]) pl[f] = y * PPB + o; else pv[f] = 0;
          bm[s][o] = 0; nb[o] = 1;
        end
        for (int o = 0; o < PPB; o++) if (bm[s][o]) begin
          int f = lowest_free();
          pv[f] = 1; pl[f] = y * PPB + o; n_phase2++;
        end
        bb[s] = xblk;
        for (int o = 0; o < PPB; o++) bm[s][o] = nb[o];
        touch(s);
        return;
      end
      // flush the LRU block with a late merge
      for (int i = 0; i < S; i++) if (age[i] == S - 1) s = i;
      x_flush++;
      for (int o = 0; o < PPB; o++) if (!bm[s][o] && p_find(bb[s] * PPB + o) < 0) x_merge++;
      x_erase++;
      x_prog += PPB;
      for (int o = 0; o < PPB; o++) bm[s][o] = 0;
    end
    bv[s] = 1; bb[s] = xblk;
    for (int f = 0; f < P; f++) if (pv[f] && pl[f] / PPB == xblk) begin
      bm[s][pl[f] % PPB] = 1; pv[f] = 0;
    end
    touch(s);
  endfunction

  function automatic served_e predict(host_op_e op, int unsigned lpn);
    int f = p_find(lpn);
    x_evict = 0; x_free = 0; x_own = 0; x_switch = 0; x_flush = 0;
    x_merge = 0; x_erase = 0; x_prog = 0;
    if (f >= 0) return SRV_PSPACE;
    for (int s = 0; s < S; s++)
      if (bv[s] && bb[s] == lpn / PPB && bm[s][lpn % PPB]) begin touch(s); return SRV_BSPACE; end
    if (op == HOST_READ) return SRV_FLASH;
    if (lowest_free() < 0) evict();
    f = lowest_free();
    pv[f] = 1; pl[f] = lpn;
    return SRV_PSPACE;
  endfunction

  // ------------------------------------------------------------ stimulus
  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input string what, input int unsigned got, input int unsigned exp,
                         input int unsigned lpn);
    checks++;
    if (got != exp) begin
      failures++;
      $display("ERROR: page %0d: %s %0d, expected %0d", lpn, what, got, exp);
    end
  endtask

  initial begin
    served_e s, e;
    int unsigned lpn, c0[8], t0;
    host_op_e op;
    for (int f = 0; f < P; f++) begin pv[f] = 0; pl[f] = 0; end
    for (int i = 0; i < S; i++) begin
      bv[i] = 0; bb[i] = 0; age[i] = i;
      for (int o = 0; o < PPB; o++) bm[i][o] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N_OPS; i++) begin
      lpn = ($urandom_range(0, 99) < 80) ? $urandom_range(0, 6 * PPB - 1)
                                         : $urandom_range(0, FLASH_BLOCKS * PPB - 1);
      op  = ($urandom_range(0, 99) < 75) ? HOST_WRITE : HOST_READ;
      c0 = '{n_evict, n_to_free, n_to_own, n_switch, n_flush, n_merge, n_erase_ev, n_prog_ev};
      e = predict(op, lpn);
      if (op == HOST_WRITE) host_write(lpn, s); else host_read(lpn, s);
      compare("served", s, e, lpn);
      compare("evictions", n_evict - c0[0], x_evict, lpn);
      compare("to free slot", n_to_free - c0[1], x_free, lpn);
      compare("to own slot", n_to_own - c0[2], x_own, lpn);
      compare("switches", n_switch - c0[3], x_switch, lpn);
      compare("flushes", n_flush - c0[4], x_flush, lpn);
      compare("merge reads", n_merge - c0[5], x_merge, lpn);
      compare("erases", n_erase_ev - c0[6], x_erase, lpn);
      compare("programs", n_prog_ev - c0[7], x_prog, lpn);
    end
    // one-word-per-cycle streaming of a read hit
    for (int f = 0; f < P; f++) if (pv[f]) lpn = pl[f];
    t0 = 0;
    fork
      host_read(lpn, s);
      begin @(negedge clk); while (!host_done) begin @(negedge clk); t0++; end end
    join
    checks++;
    if (s != SRV_PSPACE || t0 > PAGE_WORDS + 4) begin
      failures++; $display("ERROR: read hit took %0d cycles", t0);
    end
    report_mechanisms();
    check_mechanism("switch moving extra pages", n_phase2);
    checks++;
    if (flash.n_violation != 0) begin failures++; $display("ERROR: flash rule violations"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Host-side driver, reference store and mechanism counters shared by the
// end-to-end C-lash testbenches. The including module declares the DUT
// signals (host_*, events), clk, PAGE_WORDS, and the counters checks and
// failures. Stimulus is applied on the falling edge, so every handshake
// completes on the following rising edge.
//
// Reference: ver[lpn] is the number of times page lpn was written; a read
// must return data_word(lpn, ver, w), or init_word(lpn, w) if never written.

int unsigned ver [longint unsigned];
int unsigned n_rd_flash = 0, n_rd_p = 0, n_rd_b = 0, n_wr_p = 0, n_wr_b = 0;
int unsigned n_evict = 0, n_to_free = 0, n_to_own = 0, n_switch = 0, n_flush = 0;
int unsigned n_merge = 0, n_erase_ev = 0, n_prog_ev = 0;
int unsigned rd_words;
logic [31:0] rd_buf [PAGE_WORDS];
bit          rd_backpressure = 1'b0;

always @(negedge clk) begin
  host_rready = rd_backpressure ? ($urandom_range(0, 3) != 0) : 1'b1;
  if (host_rvalid && host_rready) begin
    if (rd_words < PAGE_WORDS) rd_buf[rd_words] = host_rdata;
    if (host_rlast != (rd_words == PAGE_WORDS - 1)) begin
      failures++;
      $display("ERROR: rlast wrong at word %0d", rd_words);
    end
    rd_words++;
  end
end

// sampled mid-cycle, where the strobes are stable
always @(negedge clk) begin
  if (events.evict)        n_evict++;
  if (events.to_free_slot) n_to_free++;
  if (events.to_own_slot)  n_to_own++;
  if (events.switch_op)    n_switch++;
  if (events.flush)        n_flush++;
  if (events.merge_read)   n_merge++;
  if (events.erase)        n_erase_ev++;
  if (events.prog)         n_prog_ev++;
end

task automatic send_req(input clash_pkg::host_op_e op, input longint unsigned lpn);
  @(negedge clk);
  host_req_valid = 1'b1;
  host_req_op    = op;
  host_req_lpn   = $bits(host_req_lpn)'(lpn);
  while (!host_req_ready) @(negedge clk);
  @(negedge clk);
  host_req_valid = 1'b0;
endtask

task automatic wait_done(output clash_pkg::served_e served);
  while (!host_done) @(negedge clk);
  served = host_served;
endtask

task automatic host_write(input longint unsigned lpn, output clash_pkg::served_e served);
  int unsigned v;
  v = ver.exists(lpn) ? ver[lpn] + 1 : 1;
  send_req(clash_pkg::HOST_WRITE, lpn);
  for (int unsigned w = 0; w < PAGE_WORDS; w++) begin
    host_wvalid = 1'b1;
    host_wdata  = clash_tb_pkg::data_word(lpn, v, w);
    while (!host_wready) @(negedge clk);
    @(negedge clk);
  end
  host_wvalid = 1'b0;
  wait_done(served);
  ver[lpn] = v;
  if (served == clash_pkg::SRV_BSPACE) n_wr_b++; else n_wr_p++;
  checks++;
  if (served == clash_pkg::SRV_FLASH) begin
    failures++;
    $display("ERROR: write of page %0d reported as served by flash", lpn);
  end
endtask

task automatic host_read(input longint unsigned lpn, output clash_pkg::served_e served);
  int unsigned bad;
  rd_words = 0;
  send_req(clash_pkg::HOST_READ, lpn);
  wait_done(served);
  case (served)
    clash_pkg::SRV_FLASH:  n_rd_flash++;
    clash_pkg::SRV_PSPACE: n_rd_p++;
    default:               n_rd_b++;
  endcase
  bad = 0;
  checks++;
  if (rd_words != PAGE_WORDS) bad++;
  for (int unsigned w = 0; w < PAGE_WORDS; w++) begin
    logic [31:0] exp;
    exp = ver.exists(lpn) ? clash_tb_pkg::data_word(lpn, ver[lpn], w)
                          : clash_tb_pkg::init_word(lpn, w);
    if (rd_buf[w] !== exp) begin bad++; if (bad == 1) $display("  word %0d got %h exp %h", w, rd_buf[w], exp); end
  end
  if (bad != 0) begin
    failures++;
    $display("ERROR: read of page %0d (version %0d, served %s): %0d bad words",
             lpn, ver.exists(lpn) ? ver[lpn] : 0, served.name(), bad);
  end
endtask

// Each mechanism of the cache must have happened at least once.
task automatic check_mechanism(input string name, input int unsigned n);
  checks++;
  $display("  %-28s %0d", name, n);
  if (n == 0) begin
    failures++;
    $display("ERROR: mechanism '%s' never happened", name);
  end
endtask

task automatic report_mechanisms();
  $display("mechanism counts:");
  check_mechanism("read miss from flash (A)", n_rd_flash);
  check_mechanism("read hit p-space (B)", n_rd_p);
  check_mechanism("read hit b-space (E)", n_rd_b);
  check_mechanism("write p-space (C)", n_wr_p);
  check_mechanism("write hit b-space (D)", n_wr_b);
  check_mechanism("p-space eviction (G)", n_evict);
  check_mechanism("victims to free slot", n_to_free);
  check_mechanism("victims join own slot", n_to_own);
  check_mechanism("switch (F,G)", n_switch);
  check_mechanism("b-space flush (I)", n_flush);
  check_mechanism("late-merge page read (J)", n_merge);
  check_mechanism("block erase", n_erase_ev);
endtask

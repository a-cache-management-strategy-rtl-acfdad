// page_mover_tb: a page mover on a cache_sram of 8 frames of 16 words. The
// testbench fills the SRAM through its own port, asks for random exchanges,
// and checks every word of the SRAM against a shadow copy, as well as the
// 4*PAGE_WORDS+1 cycles an exchange must take.
module page_mover_tb;
  localparam int unsigned PW = 16, FRAMES = 8, FW = 3, AW = 7;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  logic [FW-1:0] frame_a = '0, frame_b = '0;
  logic m_en, m_we;
  logic [AW-1:0] m_addr;
  logic [31:0] m_wdata, rdata;
  logic t_en = 1'b0, t_we = 1'b0;
  logic [AW-1:0] t_addr = '0;
  logic [31:0] t_wdata = '0;
  logic [31:0] shadow [FRAMES * PW];
  int unsigned checks = 0, failures = 0;

  page_mover #(.WORD_W(32), .PAGE_WORDS(PW), .FRAME_W(FW)) dut (
    .clk, .rst_n, .start, .frame_a, .frame_b, .busy, .done,
    .sram_en(m_en), .sram_we(m_we), .sram_addr(m_addr), .sram_wdata(m_wdata),
    .sram_rdata(rdata)
  );

  cache_sram #(.WORD_W(32), .DEPTH(FRAMES * PW)) mem (
    .clk, .en(busy ? m_en : t_en), .we(busy ? m_we : t_we),
    .addr(busy ? m_addr : t_addr), .wdata(busy ? m_wdata : t_wdata), .rdata
  );

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    int bad = 0;
    for (int a = 0; a < FRAMES * PW; a++) begin
      @(negedge clk); t_en = 1; t_we = 0; t_addr = AW'(a);
      @(negedge clk); t_en = 0;
      if (rdata !== shadow[a]) bad++;
    end
    checks++;
    if (bad) begin failures++; $display("ERROR: %0d words differ", bad); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < FRAMES * PW; a++) begin
      shadow[a] = $urandom;
      @(negedge clk); t_en = 1; t_we = 1; t_addr = AW'(a); t_wdata = shadow[a];
    end
    @(negedge clk); t_en = 0; t_we = 0;
    for (int t = 0; t < 40; t++) begin
      int fa, fb, cycles;
      fa = $urandom_range(0, FRAMES - 1);
      do fb = $urandom_range(0, FRAMES - 1); while (fb == fa);
      @(negedge clk); start = 1; frame_a = FW'(fa); frame_b = FW'(fb);
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != 4 * PW + 1) begin failures++; $display("ERROR: %0d cycles", cycles); end
      for (int w = 0; w < PW; w++) begin
        logic [31:0] x;
        x = shadow[fa * PW + w]; shadow[fa * PW + w] = shadow[fb * PW + w]; shadow[fb * PW + w] = x;
      end
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// victim_sel_tb: random 16-entry tables drawn from few blocks; the expected
// victim block (largest set, lowest index on a tie), set size and mask are
// computed here, and done must come exactly N+1 cycles after start.
module victim_sel_tb;
  localparam int unsigned N = 16, BLK_W = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  logic [N-1:0] entry_valid = '0;
  logic [N-1:0][BLK_W-1:0] entry_blk = '0;
  logic [BLK_W-1:0] vic_blk;
  logic [4:0] vic_count;
  logic [N-1:0] vic_mask;
  int unsigned checks = 0, failures = 0;

  victim_sel #(.N(N), .BLK_W(BLK_W)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 1000; t++) begin
      int best_cnt, best_i, cnt, cycles;
      logic [N-1:0] exp_mask;
      for (int i = 0; i < N; i++) begin
        entry_valid[i] = ($urandom_range(0, 9) != 0);
        entry_blk[i]   = BLK_W'($urandom_range(0, 4));
      end
      best_cnt = 0; best_i = 0;
      for (int i = 0; i < N; i++) begin
        cnt = 0;
        for (int j = 0; j < N; j++) cnt += (entry_valid[i] && entry_valid[j] && entry_blk[j] == entry_blk[i]);
        if (cnt > best_cnt) begin best_cnt = cnt; best_i = i; end
      end
      for (int j = 0; j < N; j++)
        exp_mask[j] = best_cnt > 0 && entry_valid[j] && entry_blk[j] == entry_blk[best_i];
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != N + 1) begin failures++; $display("ERROR: took %0d cycles", cycles); end
      checks++;
      if (vic_count != 5'(best_cnt) || (best_cnt > 0 && vic_blk != entry_blk[best_i]) ||
          vic_mask != exp_mask) begin
        failures++;
        $display("ERROR: victim %0d x%0d mask %h, expected %0d x%0d mask %h",
                 vic_blk, vic_count, vic_mask, entry_blk[best_i], best_cnt, exp_mask);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

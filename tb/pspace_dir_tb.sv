// pspace_dir_tb: random entry writes on an 8-frame directory against a
// shadow table; after every write checks a lookup of a random page (often
// one that is present), the lowest free frame and the exported table.
module pspace_dir_tb;
  localparam int unsigned N = 8, LPN_W = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [LPN_W-1:0] lookup_lpn = '0, wr_lpn = '0;
  logic lookup_hit, free_any, wr_en = 1'b0, wr_valid = 1'b0;
  logic [2:0] lookup_idx, free_idx, wr_idx = '0;
  logic [N-1:0] entry_valid;
  logic [N-1:0][LPN_W-1:0] entry_lpn;
  bit sv [N];
  logic [LPN_W-1:0] sl [N];
  int unsigned checks = 0, failures = 0;

  pspace_dir #(.N_FRAMES(N), .LPN_W(LPN_W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_state();
    int exp_free; bit exp_hit; int exp_idx;
    exp_free = -1; exp_hit = 0; exp_idx = 0;
    for (int i = N - 1; i >= 0; i--) begin
      if (!sv[i]) exp_free = i;
      if (sv[i] && sl[i] == lookup_lpn) begin exp_hit = 1; exp_idx = i; end
    end
    checks++;
    if (lookup_hit !== exp_hit || (exp_hit && lookup_idx !== 3'(exp_idx))) begin
      failures++; $display("ERROR: lookup %0d hit %0b/%0d expected %0b/%0d",
                           lookup_lpn, lookup_hit, lookup_idx, exp_hit, exp_idx);
    end
    checks++;
    if (free_any !== (exp_free >= 0) || (exp_free >= 0 && free_idx !== 3'(exp_free))) begin
      failures++; $display("ERROR: free %0b/%0d expected %0d", free_any, free_idx, exp_free);
    end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (entry_valid[i] !== sv[i] || (sv[i] && entry_lpn[i] !== sl[i])) begin
        failures++; $display("ERROR: entry %0d differs", i);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin sv[i] = 0; sl[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check_state();
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 3'($urandom_range(0, N - 1));
      wr_valid = ($urandom_range(0, 99) < 70); wr_lpn = LPN_W'($urandom);
      @(negedge clk);
      wr_en = 0;
      sv[wr_idx] = wr_valid; sl[wr_idx] = wr_lpn;
      // look up a present page half of the time, another one otherwise
      lookup_lpn = $urandom_range(0, 1) ? sl[$urandom_range(0, N - 1)] : LPN_W'($urandom);
      #1 check_state();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

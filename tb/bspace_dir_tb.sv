// bspace_dir_tb: random slot writes on a 3-slot, 8-page directory against a
// shadow table; checks block lookup, lowest free slot and the valid slot
// with the fewest pages (lowest slot on a tie).
module bspace_dir_tb;
  localparam int unsigned NS = 3, BLK_W = 4, PPB = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [BLK_W-1:0] lookup_blk = '0, wr_blk = '0;
  logic lookup_hit, free_any, wr_en = 1'b0, wr_valid = 1'b0;
  logic [1:0] lookup_slot, free_slot, min_slot, wr_slot = '0;
  logic [3:0] min_count;
  logic [PPB-1:0] wr_bitmap = '0;
  logic [NS-1:0] entry_valid;
  logic [NS-1:0][BLK_W-1:0] entry_blk;
  logic [NS-1:0][PPB-1:0] entry_bitmap;
  bit sv [NS];
  logic [BLK_W-1:0] sb [NS];
  logic [PPB-1:0] sm [NS];
  int unsigned checks = 0, failures = 0;

  bspace_dir #(.N_SLOTS(NS), .BLK_W(BLK_W), .PPB(PPB)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NS; s++) begin sv[s] = 0; sb[s] = 0; sm[s] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      int ef, eh, es, mc, ms;
      @(negedge clk);
      wr_en = 1; wr_slot = 2'($urandom_range(0, NS - 1)); wr_valid = ($urandom_range(0, 3) != 0);
      wr_blk = BLK_W'($urandom_range(0, 5));
      wr_bitmap = PPB'($urandom) & PPB'($urandom);
      @(negedge clk);
      wr_en = 0;
      sv[wr_slot] = wr_valid; sb[wr_slot] = wr_blk; sm[wr_slot] = wr_bitmap;
      lookup_blk = BLK_W'($urandom_range(0, 5));
      #1;
      ef = -1; eh = 0; es = 0; mc = PPB; ms = 0;
      for (int s = NS - 1; s >= 0; s--) begin
        if (!sv[s]) ef = s;
        if (sv[s] && sb[s] == lookup_blk) begin eh = 1; es = s; end
      end
      for (int s = 0; s < NS; s++)
        if (sv[s] && $countones(sm[s]) < mc) begin mc = $countones(sm[s]); ms = s; end
      checks++;
      if (lookup_hit !== 1'(eh) || (eh && lookup_slot !== 2'(es))) begin
        failures++; $display("ERROR: lookup");
      end
      checks++;
      if (free_any !== (ef >= 0) || (ef >= 0 && free_slot !== 2'(ef))) begin
        failures++; $display("ERROR: free slot");
      end
      checks++;
      if (min_count !== 4'(mc) || (mc < PPB && min_slot !== 2'(ms))) begin
        failures++; $display("ERROR: min %0d/%0d expected %0d/%0d", min_slot, min_count, ms, mc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// bspace_lru_tb: random touches of a 4-slot LRU against a recency list kept
// here; the reported victim must be the slot touched longest ago.
module bspace_lru_tb;
  localparam int unsigned NS = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic touch_en = 1'b0;
  logic [1:0] touch_slot = '0, lru_slot;
  int order [$];   // most recent first
  int unsigned checks = 0, failures = 0;

  bspace_lru #(.N_SLOTS(NS)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NS; s++) order.push_back(s);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    #1 checks++;
    if (lru_slot != 2'(NS - 1)) begin failures++; $display("ERROR: reset order"); end
    for (int t = 0; t < 3000; t++) begin
      int s;
      s = $urandom_range(0, NS - 1);
      @(negedge clk); touch_en = ($urandom_range(0, 4) != 0); touch_slot = 2'(s);
      @(negedge clk);
      if (touch_en) begin
        foreach (order[i]) if (order[i] == s) begin order.delete(i); break; end
        order.push_front(s);
      end
      touch_en = 0;
      #1 checks++;
      if (lru_slot != 2'(order[NS - 1])) begin
        failures++; $display("ERROR: lru %0d expected %0d", lru_slot, order[NS - 1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

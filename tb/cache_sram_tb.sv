// cache_sram_tb: random writes and reads against a shadow array on a small
// SRAM; checks the one-cycle read latency and that rdata holds its value
// through writes and idle cycles.
module cache_sram_tb;
  localparam int unsigned DEPTH = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic en = 1'b0, we = 1'b0;
  logic [5:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] shadow [DEPTH];
  int unsigned checks = 0, failures = 0;

  cache_sram #(.WORD_W(32), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); en = 1; we = 1; addr = 6'(a); wdata = d;
    @(negedge clk); en = 0; we = 0;
    shadow[a] = d;
  endtask

  task automatic rd_check(input int a);
    logic [31:0] held;
    @(negedge clk); en = 1; we = 0; addr = 6'(a);
    @(negedge clk); en = 0;
    checks++;
    if (rdata !== shadow[a]) begin
      failures++; $display("ERROR: addr %0d read %h expected %h", a, rdata, shadow[a]);
    end
    held = rdata;
    // a write elsewhere and an idle cycle must not disturb rdata
    wr((a + 1) % DEPTH, $urandom);
    @(negedge clk);
    checks++;
    if (rdata !== held) begin
      failures++; $display("ERROR: rdata changed without a read");
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) wr(a, $urandom);
    for (int i = 0; i < 500; i++) begin
      if ($urandom_range(0, 1)) wr($urandom_range(0, DEPTH - 1), $urandom);
      else                      rd_check($urandom_range(0, DEPTH - 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

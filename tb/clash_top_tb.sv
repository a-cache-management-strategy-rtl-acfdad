// clash_top_tb: end-to-end test of the C-lash cache at reduced size.
//
// 16-page p-space, 2 b-space slots of 8 pages, 8-word pages, 64 flash blocks,
// short flash latencies. A random workload with 80% writes (the write rate of
// the evaluated workloads) and strong block locality drives every path of the
// cache; every read is compared with a reference store, the flash model checks
// that blocks are only erased then programmed in page order, and each
// mechanism (hits in both spaces, misses, eviction to a free slot, joining a
// block's own slot, switch, LRU flush, late merge) must occur at least once.
// Every page touched is read back at the end.
module clash_top_tb;
  import clash_pkg::*;

  localparam int unsigned PAGE_WORDS   = 8;
  localparam int unsigned PPB          = 8;
  localparam int unsigned P_FRAMES     = 16;
  localparam int unsigned B_SLOTS      = 2;
  localparam int unsigned FLASH_BLOCKS = 64;
  localparam int unsigned OFF_W = $clog2(PPB);
  localparam int unsigned BLK_W = $clog2(FLASH_BLOCKS);
  localparam int unsigned N_OPS = 4000;

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
  clash_events_t     events;
  int unsigned       checks = 0, failures = 0;

  clash_top #(
    .PAGE_WORDS(PAGE_WORDS), .PPB(PPB), .P_FRAMES(P_FRAMES), .B_SLOTS(B_SLOTS),
    .FLASH_BLOCKS(FLASH_BLOCKS)
  ) dut (.*);

  flash_model #(
    .PAGE_WORDS(PAGE_WORDS), .PPB(PPB), .BLK_W(BLK_W), .OFF_W(OFF_W),
    .T_READ(5), .T_PROG(7), .T_ERASE(20)
  ) flash (
    .clk, .cmd_valid(fl_cmd_valid), .cmd_ready(fl_cmd_ready), .cmd_op(fl_cmd_op),
    .cmd_blk(fl_cmd_blk), .cmd_page(fl_cmd_page), .wvalid(fl_wvalid),
    .wready(fl_wready), .wdata(fl_wdata), .rvalid(fl_rvalid), .rready(fl_rready),
    .rdata(fl_rdata)
  );

  `include "clash_host_tasks.svh"

  initial begin
    repeat (50_000_000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    served_e s;
    longint unsigned lpn, blk;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    rd_backpressure = 1'b1;
    for (int i = 0; i < N_OPS; i++) begin
      // 85% of requests go to 5 hot blocks, the rest anywhere.
      blk = ($urandom_range(0, 99) < 85) ? 10 + $urandom_range(0, 4)
                                         : $urandom_range(0, FLASH_BLOCKS - 1);
      lpn = (blk << OFF_W) | $urandom_range(0, PPB - 1);
      if ($urandom_range(0, 99) < 80) host_write(lpn, s);
      else                             host_read(lpn, s);
    end
    foreach (ver[p]) host_read(p, s);
    report_mechanisms();
    checks++;
    if (flash.n_violation != 0) begin
      failures++;
      $display("ERROR: %0d flash programming rule violations", flash.n_violation);
    end
    checks++;
    if (flash.n_prog != flash.n_erase * PPB || flash.n_erase != n_erase_ev) begin
      failures++;
      $display("ERROR: flash saw %0d programs for %0d erases", flash.n_prog, flash.n_erase);
    end
    $display("flash: %0d reads, %0d programs, %0d erases", flash.n_read, flash.n_prog, flash.n_erase);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

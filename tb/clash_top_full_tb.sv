// clash_top_full_tb: the C-lash cache at its default size, end to end.
//
// 128-page p-space, 2 b-space blocks of 64 pages, 2 KB (512-word) pages and a
// 1 GB flash of 8192 blocks, with the flash latencies of the evaluation
// (130.9 us read, 405.9 us program, 2 ms erase) at a 50 MHz clock. 1200
// requests, 80% writes, 90% of them to 6 hot blocks (more pages than the
// 512 KB cache holds) and the rest spread over the whole flash. Every read is
// checked against a reference store, every touched page is read back at the
// end, the flash model checks that blocks are only erased then programmed in
// page order, and each cache mechanism must occur at least once. A directed
// prologue makes p-space pages join their block's b-space slot.
module clash_top_full_tb;
  import clash_pkg::*;

  localparam int unsigned PAGE_WORDS   = clash_pkg::PAGE_WORDS;
  localparam int unsigned PPB          = clash_pkg::PAGES_PER_BLOCK;
  localparam int unsigned P_FRAMES     = clash_pkg::P_FRAMES;
  localparam int unsigned B_SLOTS      = clash_pkg::B_SLOTS;
  localparam int unsigned FLASH_BLOCKS = clash_pkg::FLASH_BLOCKS;
  localparam int unsigned OFF_W = $clog2(PPB);
  localparam int unsigned BLK_W = $clog2(FLASH_BLOCKS);
  localparam int unsigned N_OPS = 1200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;

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

  clash_top dut (.*);

  flash_model #(
    .PAGE_WORDS(PAGE_WORDS), .PPB(PPB), .BLK_W(BLK_W), .OFF_W(OFF_W),
    .T_READ(6545), .T_PROG(20295), .T_ERASE(100000)
  ) flash (
    .clk, .cmd_valid(fl_cmd_valid), .cmd_ready(fl_cmd_ready), .cmd_op(fl_cmd_op),
    .cmd_blk(fl_cmd_blk), .cmd_page(fl_cmd_page), .wvalid(fl_wvalid),
    .wready(fl_wready), .wdata(fl_wdata), .rvalid(fl_rvalid), .rready(fl_rready),
    .rdata(fl_rdata)
  );

  `include "clash_host_tasks.svh"

  initial begin
    repeat (400_000_000) @(posedge clk);
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
    // Directed prologue: 36 pages of block 200 and 92 pages spread over the
    // 6 hot blocks (at most 16 each) fill the p-space; the next write evicts
    // block 200 into a free slot. 28 more pages of block 200 and 8 more hot
    // pages fill it again, and that eviction must make block 200's pages
    // join its slot. The filler stays useful to the random phase below.
    for (int o = 0; o < 36; o++) host_write((200 << OFF_W) | o, s);
    for (int b = 0; b < 92; b++) host_write(((100 + b % 6) << OFF_W) | (b / 6), s);
    host_write(400 << OFF_W, s);
    checks++;
    if (n_to_free != 1) begin failures++; $display("ERROR: first eviction not to a free slot"); end
    for (int o = 36; o < 64; o++) host_write((200 << OFF_W) | o, s);
    for (int b = 0; b < 8; b++) host_write(((100 + b % 6) << OFF_W) | (20 + b / 6), s);
    checks++;
    if (n_to_own != 1) begin failures++; $display("ERROR: second eviction did not join the block's slot"); end
    for (int i = 0; i < N_OPS; i++) begin
      // 90% of requests go to 6 hot blocks, the rest anywhere in 1 GB.
      blk = ($urandom_range(0, 99) < 90) ? 100 + $urandom_range(0, 5)
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

// clash_workload_tb: synthetic workloads of the kind C-lash was evaluated on,
// run on the cache at its default size.
//
// Requests of 4 pages (the default mean request size of the evaluation),
// 80% writes, over the whole 1 GB address space, each issued to the cache as
// 4 page requests. Two workloads run back to back, from an empty cache:
// 100% sequential (every request starts where the previous one ended), then
// 0% sequential (every request starts at a random page). The flash latencies
// are shortened, which changes no cache decision, only the run time. Every
// read is checked. The checks on the outcome follow the evaluation's main
// trend: the sequential workload must cost far fewer erases than the random
// one (under a quarter), and its flushed blocks must be nearly full, at most
// one erase more than one per 64 pages written.
module clash_workload_tb;
  import clash_pkg::*;

  localparam int unsigned PAGE_WORDS   = clash_pkg::PAGE_WORDS;
  localparam int unsigned PPB          = clash_pkg::PAGES_PER_BLOCK;
  localparam int unsigned FLASH_BLOCKS = clash_pkg::FLASH_BLOCKS;
  localparam int unsigned OFF_W = $clog2(PPB);
  localparam int unsigned BLK_W = $clog2(FLASH_BLOCKS);
  localparam int unsigned N_REQ = 250;      // requests per workload
  localparam int unsigned REQ_PAGES = 4;

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

  clash_top dut (.*);

  flash_model #(
    .PAGE_WORDS(PAGE_WORDS), .PPB(PPB), .BLK_W(BLK_W), .OFF_W(OFF_W),
    .T_READ(20), .T_PROG(20), .T_ERASE(50)
  ) flash (
    .clk, .cmd_valid(fl_cmd_valid), .cmd_ready(fl_cmd_ready), .cmd_op(fl_cmd_op),
    .cmd_blk(fl_cmd_blk), .cmd_page(fl_cmd_page), .wvalid(fl_wvalid),
    .wready(fl_wready), .wdata(fl_wdata), .rvalid(fl_rvalid), .rready(fl_rready),
    .rdata(fl_rdata)
  );

  `include "clash_host_tasks.svh"

  initial begin
    repeat (100_000_000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Runs N_REQ requests; seq=1 makes each start where the last one ended.
  task automatic run_workload(input string name, input bit seq, output int unsigned erases,
                              output int unsigned written);
    served_e s;
    longint unsigned next_lpn, start;
    int unsigned e0, m0, w0;
    e0 = flash.n_erase; m0 = n_merge; w0 = n_wr_p + n_wr_b;
    next_lpn = longint'($urandom_range(0, FLASH_BLOCKS - 1)) << OFF_W;
    for (int r = 0; r < N_REQ; r++) begin
      bit wr;
      start = seq ? next_lpn : longint'($urandom_range(0, FLASH_BLOCKS * PPB - REQ_PAGES));
      wr = ($urandom_range(0, 99) < 80);
      for (int p = 0; p < REQ_PAGES; p++) begin
        if (wr) host_write(start + p, s);
        else    host_read(start + p, s);
      end
      next_lpn = (start + REQ_PAGES) % (FLASH_BLOCKS * PPB);
    end
    erases  = flash.n_erase - e0;
    written = n_wr_p + n_wr_b - w0;
    $display("%s: %0d pages written, %0d erases, %0d merge reads",
             name, written, erases, n_merge - m0);
  endtask

  initial begin
    int unsigned e_rand, w_rand, e_seq, w_seq;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_workload("sequential (100%)", 1'b1, e_seq, w_seq);
    run_workload("random (0% sequential)", 1'b0, e_rand, w_rand);
    checks++;
    if (!(e_seq * 4 < e_rand)) begin
      failures++; $display("ERROR: sequential workload did not save erases");
    end
    checks++;
    if (e_seq > w_seq / PPB + 1) begin
      failures++; $display("ERROR: sequential workload needs %0d erases for %0d pages", e_seq, w_seq);
    end
    checks++;
    if (flash.n_violation != 0) begin failures++; $display("ERROR: flash rule violations"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

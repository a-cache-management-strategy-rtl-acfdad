// flash_model: behavioural model of the NAND flash media (not synthesizable).
//
// Stands in for the flash chip the cache is built for. It stores pages
// sparsely, so a full 1 GB address space costs only the pages touched. A
// page never written reads as clash_tb_pkg::init_word (the flash starts
// "completely dirty"); an erased page reads as all ones. Commands, one at a
// time, through a valid/ready channel that is low while the chip is busy:
//   FL_READ  : after T_READ cycles, PAGE_WORDS words on the r channel.
//   FL_PROG  : PAGE_WORDS words taken on the w channel, then T_PROG busy.
//   FL_ERASE : T_ERASE busy cycles.
// Default latencies are 130.9 us, 405.9 us and 2 ms at an assumed 50 MHz
// clock (10 ns period assumed by the input sampling). It counts operations and per-block erases, and counts a rule
// violation when a page is programmed that is not erased or out of the
// in-block order NAND requires.
module flash_model
  import clash_pkg::fl_op_e, clash_pkg::FL_READ, clash_pkg::FL_PROG, clash_pkg::FL_ERASE;
#(
  parameter int unsigned WORD_W     = 32,
  parameter int unsigned PAGE_WORDS = 512,
  parameter int unsigned PPB        = 64,
  parameter int unsigned BLK_W      = 13,
  parameter int unsigned OFF_W      = 6,
  parameter int unsigned T_READ     = 6545,
  parameter int unsigned T_PROG     = 20295,
  parameter int unsigned T_ERASE    = 100000
) (
  input  logic              clk,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  fl_op_e            cmd_op,
  input  logic [BLK_W-1:0]  cmd_blk,
  input  logic [OFF_W-1:0]  cmd_page,
  input  logic              wvalid,
  output logic              wready,
  input  logic [WORD_W-1:0] wdata,
  output logic              rvalid,
  input  logic              rready,
  output logic [WORD_W-1:0] rdata
);

  // page state: absent = never written, 1 = erased, 2 = programmed
  int                unsigned pstate [longint unsigned];
  logic [WORD_W-1:0] store  [longint unsigned];
  int unsigned       next_page [longint unsigned];   // next page to program in a block
  int unsigned       erase_count [longint unsigned];
  int unsigned       n_read = 0, n_prog = 0, n_erase = 0, n_violation = 0;

  function automatic logic [WORD_W-1:0] page_word(longint unsigned lpn, int unsigned w);
    if (!pstate.exists(lpn)) return WORD_W'(clash_tb_pkg::init_word(lpn, w));
    if (pstate[lpn] == 1)    return '1;
    return store[lpn * PAGE_WORDS + w];
  endfunction

  // Inputs are sampled 2 ns after the falling edge, once every driver has
  // settled, and acted on at the next rising edge; outputs change right after
  // a rising edge. This keeps the model free of races with the design.
  logic              s_cmd_valid, s_wvalid, s_rready;
  fl_op_e            s_op;
  logic [BLK_W-1:0]  s_blk;
  logic [OFF_W-1:0]  s_page;
  logic [WORD_W-1:0] s_wdata;

  task automatic step();
    @(negedge clk);
    #2;
    s_cmd_valid = cmd_valid;
    s_op        = cmd_op;
    s_blk       = cmd_blk;
    s_page      = cmd_page;
    s_wvalid    = wvalid;
    s_wdata     = wdata;
    s_rready    = rready;
    @(posedge clk);
  endtask

  initial begin
    cmd_ready = 1'b1;
    wready    = 1'b0;
    rvalid    = 1'b0;
    rdata     = '0;
    forever begin
      step();
      if (s_cmd_valid && cmd_ready) begin
        automatic fl_op_e          op  = s_op;
        automatic longint unsigned blk = longint'(s_blk);
        automatic longint unsigned lpn = (blk << OFF_W) | longint'(s_page);
        cmd_ready <= 1'b0;
        case (op)
          FL_READ: begin
            n_read++;
            repeat (T_READ) step();
            for (int unsigned w = 0; w < PAGE_WORDS; w++) begin
              rvalid <= 1'b1;
              rdata  <= page_word(lpn, w);
              do step(); while (!s_rready);
            end
            rvalid <= 1'b0;
          end
          FL_PROG: begin
            n_prog++;
            if (!pstate.exists(lpn) || pstate[lpn] != 1) n_violation++;
            if (!next_page.exists(blk) || next_page[blk] != int'(s_page)) n_violation++;
            next_page[blk] = int'(s_page) + 1;
            pstate[lpn] = 2;
            wready <= 1'b1;
            for (int unsigned w = 0; w < PAGE_WORDS; w++) begin
              do step(); while (!s_wvalid);
              store[lpn * PAGE_WORDS + w] = s_wdata;
            end
            wready <= 1'b0;
            repeat (T_PROG) step();
          end
          FL_ERASE: begin
            n_erase++;
            if (erase_count.exists(blk)) erase_count[blk]++;
            else erase_count[blk] = 1;
            for (int unsigned p = 0; p < PPB; p++) pstate[(blk << OFF_W) | p] = 1;
            next_page[blk] = 0;
            repeat (T_ERASE) step();
          end
          default: n_violation++;
        endcase
        cmd_ready <= 1'b1;
      end
    end
  end

endmodule

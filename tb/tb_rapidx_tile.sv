// tb_rapidx_tile: end-to-end test of one tile against a word-level model.
//
// The model below computes the same banded, parallelized difference-based
// DP with plain integers (no bit-serial rows, no PIM commands, no
// shifter): per segment it keeps the B cells of the wavefront, updates
// them with the recurrences, picks the band direction and realigns the
// vectors. The testbench programs a tile, runs two batches and compares
// every segment's score, the traceback codes of every wavefront of every
// active column, and the move counters. Batch 1: 5-bit alignment scoring,
// adaptive direction, traceback on. Batch 2: 3-bit edit-distance scoring,
// fixed (alternating) direction, traceback off.
module tb_rapidx_tile;
  import rapidx_pkg::*;
  localparam int unsigned ROWS = 1024, COLS = 256, SAW = 64, NTBM = 2, KMAX = 16;
  localparam int unsigned NSL = COLS / SAW;
  localparam int unsigned RD_LAT = 1, TB_IW = 1, TB_RW = 10, TB_SW = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        reg_we = 0, reg_re = 0;
  logic [15:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic        tb_rd_en = 0;
  logic [0:0]  tb_rd_idx = 0;
  logic [9:0]  tb_rd_row = 0;
  logic [1:0]  tb_rd_slice = 0;
  logic [SAW-1:0] tb_rd_data;
  logic busy, done;

  rapidx_tile #(.ROWS(ROWS), .COLS(COLS), .SAW(SAW), .NTBM(NTBM), .KMAX(KMAX)) dut (.*);

  `include "rapidx_tile_env.svh"

  initial begin
    for (int a = 0; a < 8192; a++) img[a] = 2'(a * 7 + 3);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // batch 1: alignment, o=4,e=2 in the "o for the first gap base"
    // convention -> programmed o=2, e=2; A=2, B=4
    mB = 10; mK = 8; mP = 5; mO = 2; mOE = 4; mSM = 2 + 2*4; mSX = 8 - 4; mAdapt = 1;
    make_pairs(8, 24, 10);
    run_batch("align", 1);
    // batch 2: edit distance, 3-bit: A=0, mismatch 1, gap 1 per base
    mB = 12; mK = 5; mP = 3; mO = 0; mOE = 1; mSM = 2; mSX = 1; mAdapt = 0;
    make_pairs(5, 20, 8);
    run_batch("edit", 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

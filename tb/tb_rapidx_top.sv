// tb_rapidx_top: end-to-end test of the RAPIDx top level (reduced size).
//
// Four tiles of 256 columns (4 column-MUX slices of 64), one 256-row TBM
// per tile. The host side programs the chip through the plain-signal
// interface: the sequence image and the scoring configuration go to all
// tiles with broadcast writes, each tile gets its own segment table with
// unicast writes, and one broadcast start launches all tiles at once.
// Every tile's scores, move counters, status and traceback codes are then
// compared with the word-level model through the global I/O (read latency
// 2 cycles).
//   Batch 1: alignment, 5-bit, adaptive direction, traceback on; tile 3
//            has long pairs so its TBM fills up (overflow flag).
//   Batch 2: edit distance, 3-bit, alternating direction, traceback off.
// The test counts every mechanism of the design and fails any that never
// happened: down, right and forced band moves, segments finishing before
// others, adaptive and fixed direction, traceback on, off and overflow,
// both precisions, broadcast writes, all tiles busy at once, and a mode
// switch between batches.
module tb_rapidx_top;
  import rapidx_pkg::*;
  localparam int unsigned NTILES = 4, ROWS = 256, COLS = 256, SAW = 64, NTBM = 1, KMAX = 16;
  localparam int unsigned NSL = COLS / SAW;
  localparam int unsigned RD_LAT = 2, TB_IW = 1, TB_RW = 8, TB_SW = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // host-side signals, named as the shared environment expects
  logic        reg_we = 0, reg_re = 0, bcast = 0;
  logic [1:0]  cur_tile = 0;
  logic [15:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic        tb_rd_en = 0;
  logic [0:0]  tb_rd_idx = 0;
  logic [7:0]  tb_rd_row = 0;
  logic [1:0]  tb_rd_slice = 0;
  logic [SAW-1:0] tb_rd_data;
  logic        h_rvalid, h_tb_rvalid, done;
  logic [NTILES-1:0] tile_busy;

  rapidx_top #(.NTILES(NTILES), .ROWS(ROWS), .COLS(COLS), .SAW(SAW), .NTBM(NTBM),
               .KMAX(KMAX)) dut (
    .clk(clk), .rst_n(rst_n),
    .h_we(reg_we), .h_re(reg_re), .h_bcast(bcast), .h_tile(cur_tile),
    .h_addr(reg_addr), .h_wdata(reg_wdata), .h_rdata(reg_rdata), .h_rvalid(h_rvalid),
    .h_tb_re(tb_rd_en), .h_tb_idx(tb_rd_idx), .h_tb_row(tb_rd_row),
    .h_tb_slice(tb_rd_slice), .h_tb_rdata(tb_rd_data), .h_tb_rvalid(h_tb_rvalid),
    .tile_busy(tile_busy), .all_done(done));

  `include "rapidx_tile_env.svh"

  // mechanism counters
  int m_down = 0, m_right = 0, m_force = 0, m_early = 0, m_adapt = 0, m_fixed = 0;
  int m_tb_on = 0, m_tb_off = 0, m_tb_ovf = 0, m_p5 = 0, m_p3 = 0, m_bcast = 0;
  int m_all_busy = 0, m_switch = 0, m_rvalid = 0;
  always @(posedge clk) begin
    if (reg_we && bcast) m_bcast++;
    if (tile_busy == '1) m_all_busy++;
    if (h_rvalid || h_tb_rvalid) m_rvalid++;
  end

  // per-tile segment tables
  int tN[NTILES][KMAX], tM[NTILES][KMAX], tRA[NTILES][KMAX], tQA[NTILES][KMAX];

  task automatic batch(string name, int k, int b, bit tb_on, int nmin, int span, int long_tile);
    int cyc, base;
    mK = k; mB = b;
    base = 0;
    for (int t = 0; t < NTILES; t++) begin
      make_pairs(k, (t == long_tile) ? 72 : nmin, (t == long_tile) ? 6 : span, base);
      for (int s = 0; s < k; s++) begin
        tN[t][s] = mN[s]; tM[t][s] = mM[s]; tRA[t][s] = mRA[s]; tQA[t][s] = mQA[s];
        if (mQA[s] + mN[s] + 2 > base) base = mQA[s] + mN[s] + 2;
      end
    end
    // configuration and image to all tiles, segment tables per tile
    bcast = 1;
    prog_cfg(tb_on);
    load_image();
    bcast = 0;
    for (int t = 0; t < NTILES; t++) begin
      cur_tile = 2'(t);
      for (int s = 0; s < k; s++) begin
        mN[s] = tN[t][s]; mM[s] = tM[t][s]; mRA[s] = tRA[t][s]; mQA[s] = tQA[t][s];
      end
      prog_segs();
    end
    bcast = 1;
    start_wait(name, cyc);
    bcast = 0;
    for (int t = 0; t < NTILES; t++) begin
      logic [31:0] d;
      cur_tile = 2'(t);
      for (int s = 0; s < k; s++) begin
        mN[s] = tN[t][s]; mM[s] = tM[t][s]; mRA[s] = tRA[t][s]; mQA[s] = tQA[t][s];
      end
      verify($sformatf("%s tile %0d", name, t), tb_on, cyc);
      m_down += n_down; m_right += n_right; m_force += n_force; m_early += n_early;
      rd(REG_CTRL, d);
      if (d[2]) m_tb_ovf++;
    end
    if (mAdapt) m_adapt++; else m_fixed++;
    if (tb_on) m_tb_on++; else m_tb_off++;
    if (mP == 5) m_p5++; else m_p3++;
  endtask

  task automatic need(int n, string what);
    check(n > 0, {"mechanism never happened: ", what});
    $display("mechanism %-26s %0d", what, n);
  endtask

  initial begin
    for (int a = 0; a < 8192; a++) img[a] = 2'(a * 5 + 1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // batch 1: alignment scoring (o=4, e=2, A=2, B=4 in the minimap2
    // convention -> programmed o=2, e=2), adaptive, traceback on
    mP = 5; mO = 2; mOE = 4; mSM = 2 + 2*4; mSX = 8 - 4; mAdapt = 1;
    batch("align", 4, 10, 1, 20, 12, 3);
    // batch 2: edit distance, 3 bits, alternating direction, no traceback
    mP = 3; mO = 0; mOE = 1; mSM = 2; mSX = 1; mAdapt = 0;
    m_switch++;
    batch("edit", 3, 12, 0, 18, 8, -1);
    need(m_down, "down move");
    need(m_right, "right move");
    need(m_force, "forced move");
    need(m_early, "segment done early");
    need(m_adapt, "adaptive direction");
    need(m_fixed, "fixed direction");
    need(m_tb_on, "traceback on");
    need(m_tb_off, "traceback off");
    need(m_tb_ovf, "TBM overflow");
    need(m_p5, "5-bit precision");
    need(m_p3, "3-bit precision");
    need(m_bcast, "broadcast write");
    need(m_all_busy, "all tiles busy");
    need(m_switch, "mode switch");
    need(m_rvalid, "host read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

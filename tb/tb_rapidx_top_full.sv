// tb_rapidx_top_full: the RAPIDx top level at its default (paper) size.
//
// 64 tiles, each with a 1024 x 1024 CM read through a 128-bit column MUX,
// 15 TBMs of 1024 x 1024 and a 2 KB sequence buffer. The band is the
// paper's short-read bandwidth B = w + 0.01L = 10 + 0.01*100 = 11; each
// tile runs two segments of short pairs (kept short so the simulation
// stays brief), 5-bit alignment scoring, adaptive direction and
// traceback. Configuration and sequence image are broadcast, segment
// tables are unicast, one broadcast write starts all 64 tiles, and every
// tile's scores, counters, status and traceback codes are compared with
// the word-level model.
module tb_rapidx_top_full;
  import rapidx_pkg::*;
  localparam int unsigned NTILES = 64, ROWS = 1024, COLS = 1024, SAW = 128, NTBM = 15, KMAX = 128;
  localparam int unsigned NSL = COLS / SAW;
  localparam int unsigned RD_LAT = 2, TB_IW = 4, TB_RW = 10, TB_SW = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // host-side signals, named as the shared environment expects
  logic        reg_we = 0, reg_re = 0, bcast = 0;
  logic [5:0]  cur_tile = 0;
  logic [15:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic        tb_rd_en = 0;
  logic [3:0]  tb_rd_idx = 0;
  logic [9:0]  tb_rd_row = 0;
  logic [2:0]  tb_rd_slice = 0;
  logic [SAW-1:0] tb_rd_data;
  logic        h_rvalid, h_tb_rvalid, done;
  logic [NTILES-1:0] tile_busy;

  rapidx_top dut (
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
      cur_tile = 6'(t);
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
      cur_tile = 6'(t);
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

  initial begin
    for (int a = 0; a < 8192; a++) img[a] = 2'(a * 5 + 1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    mP = 5; mO = 2; mOE = 4; mSM = 2 + 2*4; mSX = 8 - 4; mAdapt = 1;
    batch("full", 2, 11, 1, 14, 4, -1);
    check(m_all_busy > 0, "all 64 tiles busy at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

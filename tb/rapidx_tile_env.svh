// rapidx_tile_env.svh: shared test environment of the tile and the tile
// controller testbenches, included inside the testbench module.
//
// It holds the check counters, register-bus tasks, an image of the
// sequence buffer, and a word-level model of the banded, parallelized
// difference-based DP: per segment it keeps the B cells of the wavefront
// as integers, applies the same recurrences, direction rule, forced moves
// and realignment as the hardware, and records the traceback code of
// every cell of every wavefront. run_batch programs the design, runs one
// batch, and compares scores, move counters and traceback codes.
// The including module declares ROWS, COLS, SAW, NSL, KMAX, NTBM, the
// read latency RD_LAT, the widths TB_IW/TB_RW/TB_SW of the TBM read
// address, the bus signals (reg_*, tb_rd_*, done) and clk.
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic wr(logic [15:0] a, logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rd(logic [15:0] a, output logic [31:0] d);
    @(negedge clk); reg_re = 1; reg_addr = a;
    @(negedge clk); reg_re = 0;
    repeat (RD_LAT - 1) @(negedge clk);
    d = reg_rdata;
  endtask

  // ---------------- memory image of the sequence buffer ----------------
  logic [1:0] img [8192];

  // ---------------- word-level model ----------------
  int unsigned mB, mK, mP, mSM, mSX, mO, mOE;
  bit mAdapt;
  int mN[KMAX], mM[KMAX], mRA[KMAX], mQA[KMAX];
  int unsigned R[KMAX][128], Q[KMAX][128], U[KMAX][128], V[KMAX][128], X[KMAX][128], Y[KMAX][128];
  int H[KMAX][128];
  int ib[KMAX], jb[KMAX], score[KMAX];
  bit sdone[KMAX];
  int n_it, n_down, n_right, n_force, n_early;
  int done_it[KMAX];
  logic [1:0] tbc [1024][COLS];   // [iteration][column]

  function automatic int unsigned mx(int unsigned a, int unsigned b);
    return a > b ? a : b;
  endfunction

  task automatic model_run();
    int unsigned msk;
    msk = (1 << mP) - 1;
    n_it = 0; n_down = 0; n_right = 0; n_force = 0;
    for (int s = 0; s < mK; s++) begin
      ib[s] = mB; jb[s] = 1; sdone[s] = 0;
      for (int p = 0; p < mB; p++) begin
        R[s][p] = img[(mRA[s] + p) % 8192];
        Q[s][p] = img[(mQA[s] + mB - 1 - p) % 8192];
        U[s][p] = 0; V[s][p] = 0; X[s][p] = 0; Y[s][p] = 0; H[s][p] = 0;
      end
    end
    forever begin
      bit all;
      // compute the wavefront
      for (int s = 0; s < mK; s++)
        for (int p = 0; p < mB; p++) begin
          int unsigned sc, a, b, z, u, v, ta, tb;
          logic [1:0] code;
          sc = (R[s][p] == Q[s][p]) ? mSM : mSX;
          a = (X[s][p] + V[s][p]) & msk;
          b = (Y[s][p] + U[s][p]) & msk;
          z = mx(mx(sc, a), b);
          code = (z == sc) ? 2'b00 : (z == a) ? 2'b01 : (z == b) ? 2'b10 : 2'b11;
          if (n_it < 1024) tbc[n_it][s*mB + p] = code;
          u = (z - V[s][p]) & msk;
          v = (z - U[s][p]) & msk;
          ta = (a + mO) & msk;
          tb = (b + mO) & msk;
          X[s][p] = (mx(z, ta) - z) & msk;
          Y[s][p] = (mx(z, tb) - z) & msk;
          U[s][p] = u; V[s][p] = v;
          H[s][p] = H[s][p] + int'(u) - int'(mOE);
        end
      // direction and realignment
      all = 1;
      for (int s = 0; s < mK; s++) begin
        bit cd, cr, right;
        if (sdone[s]) continue;
        cd = ib[s] < mN[s]; cr = jb[s] < mM[s];
        if (!cd && !cr) begin
          sdone[s] = 1; score[s] = H[s][0]; done_it[s] = n_it;
          continue;
        end
        all = 0;
        right = !cd ? 1 : !cr ? 0 : mAdapt ? (H[s][mB-1] > H[s][0]) : n_it[0];
        if (!cd || !cr) n_force++;
        if (right) begin
          n_right++; jb[s]++;
          for (int p = 0; p < mB - 1; p++) begin
            R[s][p] = R[s][p+1]; V[s][p] = V[s][p+1]; X[s][p] = X[s][p+1]; H[s][p] = H[s][p+1];
          end
          R[s][mB-1] = img[(mRA[s] + jb[s] + mB - 2) % 8192];
          V[s][mB-1] = 0; X[s][mB-1] = 0;
        end else begin
          n_down++; ib[s]++;
          for (int p = mB - 1; p > 0; p--) begin
            Q[s][p] = Q[s][p-1]; U[s][p] = U[s][p-1]; Y[s][p] = Y[s][p-1];
          end
          Q[s][0] = img[(mQA[s] + ib[s] - 1) % 8192];
          U[s][0] = 0; Y[s][0] = 0;
        end
      end
      for (int s = 0; s < mK; s++) if (!sdone[s]) all = 0;
      if (all) break;
      n_it++;
    end
    n_early = 0;
    for (int s = 0; s < mK; s++) if (done_it[s] < n_it) n_early++;
  endtask

  // ---------------- stimulus ----------------
  task automatic load_image();
    for (int a = 0; a < 2048; a++)
      wr(16'h8000 | 16'(a), {24'd0, img[4*a+3], img[4*a+2], img[4*a+1], img[4*a]});
  endtask

  task automatic make_pairs(int k, int nmin, int span, int base = 0);
    // reference: random; query: the reference with random edits
    int addr;
    addr = base;
    for (int s = 0; s < k; s++) begin
      int n, m, qi;
      m = nmin + int'($urandom_range(0, span));
      mRA[s] = addr;
      for (int j = 0; j < m; j++) img[addr + j] = 2'($urandom);
      addr += m;
      mQA[s] = addr;
      qi = 0;
      for (int j = 0; j < m && qi < 120; j++) begin
        int r;
        r = int'($urandom_range(0, 99));
        if (r < 5) img[addr + qi++] = 2'($urandom);          // substitution
        else if (r < 9) begin                                  // insertion
          img[addr + qi++] = 2'($urandom); img[addr + qi++] = img[mRA[s] + j];
        end else if (r < 13) ;                                 // deletion
        else img[addr + qi++] = img[mRA[s] + j];
      end
      n = (qi < int'(mB)) ? int'(mB) : qi;
      for (int j = qi; j < n; j++) img[addr + j] = 2'($urandom);
      addr += n + 2;
      mN[s] = n; mM[s] = m;
    end
  endtask

  int unsigned cap_it;   // wavefronts that fit in the TBMs
  assign cap_it = NTBM * ROWS / 2;

  task automatic prog_cfg(bit tb_on);
    wr(REG_BAND, mB); wr(REG_NSEG, mK); wr(REG_PREC, mP);
    wr(REG_SMATCH, mSM); wr(REG_SMIS, mSX); wr(REG_GAPO, mO); wr(REG_GAPOE, mOE);
    wr(REG_MODE, {30'd0, tb_on, mAdapt});
  endtask

  task automatic prog_segs();
    for (int s = 0; s < mK; s++) begin
      wr(REG_SEG + 16'(4*s) + 0, mN[s]); wr(REG_SEG + 16'(4*s) + 1, mM[s]);
      wr(REG_SEG + 16'(4*s) + 2, mRA[s]); wr(REG_SEG + 16'(4*s) + 3, mQA[s]);
    end
  endtask

  task automatic start_wait(string name, output int cyc);
    wr(REG_CTRL, 1);
    cyc = 0;
    while (!done && cyc < 4000000) begin @(negedge clk); cyc++; end
    check(done, {name, ": batch finished"});
  endtask

  // runs the model and compares the results of the selected tile
  task automatic verify(string name, bit tb_on, int cyc);
    logic [31:0] d;
    model_run();
    for (int s = 0; s < mK; s++) begin
      rd(REG_SEG + 16'(4*s), d);
      check(int'(d) == score[s], $sformatf("%s: seg %0d score %0d expected %0d", name, s, int'(d), score[s]));
    end
    rd(REG_ITER, d);   check(int'(d) == n_it,    $sformatf("%s: iterations %0d expected %0d", name, d, n_it));
    rd(REG_NDOWN, d);  check(int'(d) == n_down,  $sformatf("%s: down moves %0d expected %0d", name, d, n_down));
    rd(REG_NRIGHT, d); check(int'(d) == n_right, $sformatf("%s: right moves %0d expected %0d", name, d, n_right));
    rd(REG_NFORCE, d); check(int'(d) == n_force, $sformatf("%s: forced moves %0d expected %0d", name, d, n_force));
    rd(REG_CTRL, d);
    check(d[1] && !d[0], $sformatf("%s: status done and idle", name));
    check(d[2] == (tb_on && 2 * (n_it + 1) >= int'(NTBM * ROWS)),
          $sformatf("%s: TBM overflow flag %0d", name, d[2]));
    $display("%s: %0d iterations, %0d down, %0d right, %0d forced, %0d cycles",
             name, n_it, n_down, n_right, n_force, cyc);
    if (tb_on) begin
      // traceback codes of every stored wavefront (n_it + 1 of them)
      for (int it = 0; it <= n_it && it < int'(cap_it) && it < 1024; it++) begin
        for (int sl = 0; sl < NSL; sl++) begin
          logic [SAW-1:0] lo, hi;
          for (int h = 0; h < 2; h++) begin
            @(negedge clk); tb_rd_en = 1; tb_rd_idx = TB_IW'((2*it + h) / ROWS);
            tb_rd_row = TB_RW'((2*it + h) % ROWS); tb_rd_slice = TB_SW'(sl);
            @(negedge clk); tb_rd_en = 0;
            repeat (RD_LAT - 1) @(negedge clk);
            if (h == 0) lo = tb_rd_data; else hi = tb_rd_data;
          end
          for (int c = 0; c < SAW; c++) begin
            int col;
            col = sl*SAW + c;
            if (col < int'(mK*mB))
              check({hi[c], lo[c]} == tbc[it][col],
                    $sformatf("%s: TB it %0d col %0d got %b expected %b", name, it, col, {hi[c], lo[c]}, tbc[it][col]));
          end
        end
      end
    end
  endtask

  task automatic run_batch(string name, bit tb_on);
    int cyc;
    prog_cfg(tb_on);
    prog_segs();
    load_image();
    start_wait(name, cyc);
    verify(name, tb_on, cyc);
  endtask

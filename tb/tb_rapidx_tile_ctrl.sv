// tb_rapidx_tile_ctrl: tests the tile controller with its real datapath
// blocks and a CM whose handshake is randomly stalled.
//
// The controller is wired to the CM model, shifter, max finder, direction
// lane, traceback logic, sequence buffer, H-tree and TBMs as in a tile,
// but the CM's ready and valid pass through a gate that randomly holds
// the CM off for extra cycles (the stall mechanism). Results must not
// change: batch 1 runs without stalls, batch 2 with stalls, and both are
// compared with the word-level model (scores, counters, traceback codes).
// Without stalls, back-to-back program commands must be spaced by exactly
// 3 cycles plus the operation latency (XOR/AND 2, ADD/SUB 6 per bit).
module tb_rapidx_tile_ctrl;
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

  import rapidx_pkg::*;
  // datapath of one tile, as in rapidx_tile
  logic           cm_valid, cm_ready, cm_rvalid, c_valid, c_ready;
  cm_cmd_t        cm_cmd;
  logic [SAW-1:0] cm_wdata, cm_rdata, sa_q;
  logic           stall_en = 0, stall = 0;
  always @(posedge clk) stall <= stall_en && ($urandom_range(0, 3) == 0);
  assign c_valid  = cm_valid && !stall;
  assign c_ready  = cm_ready && !stall;
  rapidx_cm #(.ROWS(ROWS), .COLS(COLS), .SAW(SAW)) u_cm (
    .clk(clk), .rst_n(rst_n), .cmd_valid(c_valid), .cmd_ready(cm_ready),
    .cmd(cm_cmd), .wdata(cm_wdata), .rdata(cm_rdata), .rvalid(cm_rvalid));
  logic           sh_start, sh_in_valid, sh_flush, sh_from_prev, sh_out_valid;
  logic [SAW-1:0] sh_mv, sh_ins, sh_ins_val, sh_out;
  rapidx_shifter #(.SAW(SAW)) u_shifter (
    .clk(clk), .rst_n(rst_n), .start(sh_start), .in_valid(sh_in_valid),
    .in_data(sa_q), .flush(sh_flush), .from_prev(sh_from_prev), .mv(sh_mv),
    .ins(sh_ins), .ins_val(sh_ins_val), .out_data(sh_out), .out_valid(sh_out_valid));
  logic           mf_load_a, mf_cmp, mf_first;
  logic [SAW-1:0] mf_max;
  rapidx_max_finder #(.SAW(SAW)) u_max (
    .clk(clk), .rst_n(rst_n), .load_a(mf_load_a), .cmp(mf_cmp),
    .first(mf_first), .sa_bits(sa_q), .max_bits(mf_max));
  logic dl_load_a, dl_cmp, dl_first, dl_bit, dl_bgt, dl_max_unused;
  rapidx_bs_max_lane u_dir (
    .clk(clk), .rst_n(rst_n), .load_a(dl_load_a), .cmp(dl_cmp),
    .first(dl_first), .signed_msb(1'b1), .bit_in(dl_bit),
    .max_bit(dl_max_unused), .b_gt(dl_bgt));
  logic           tl_valid, tl_out_valid;
  logic [1:0]     tl_idx;
  logic [SAW-1:0] tl_lo, tl_hi;
  rapidx_traceback_logic #(.SAW(SAW)) u_tbl (
    .clk(clk), .rst_n(rst_n), .flag_valid(tl_valid), .flag_idx(tl_idx),
    .sa_bits(sa_q), .tb_lo(tl_lo), .tb_hi(tl_hi), .out_valid(tl_out_valid));
  logic        sb_rd_en;
  logic [12:0] sb_rd_base;
  logic [1:0]  sb_rd_data;
  rapidx_seq_buffer #(.BYTES(2048)) u_seq (
    .clk(clk), .wr_en(reg_we && reg_addr[15]), .wr_addr(reg_addr[10:0]),
    .wr_data(reg_wdata[7:0]), .rd_en(sb_rd_en), .rd_base(sb_rd_base),
    .rd_data(sb_rd_data));
  logic           tbw_en;
  logic [0:0]     tbw_idx;
  logic [9:0]     tbw_row;
  logic [1:0]     tbw_slice;
  logic [SAW-1:0] tbw_data;
  logic [NTBM-1:0] tbm_wr_en, tbm_rd_en;
  logic [SAW-1:0]  tbm_rd_data [NTBM];
  rapidx_htree #(.NTBM(NTBM), .SAW(SAW)) u_htree (
    .clk(clk), .wr_en(tbw_en), .wr_idx(tbw_idx), .tbm_wr_en(tbm_wr_en),
    .rd_en(tb_rd_en), .rd_idx(tb_rd_idx), .tbm_rd_en(tbm_rd_en),
    .tbm_rd_data(tbm_rd_data), .rd_data(tb_rd_data));
  for (genvar t = 0; t < NTBM; t++) begin : g_tbm
    rapidx_tbm #(.ROWS(ROWS), .COLS(COLS), .SAW(SAW)) u_tbm (
      .clk(clk), .wr_en(tbm_wr_en[t]), .wr_row(tbw_row), .wr_slice(tbw_slice),
      .wr_data(tbw_data), .rd_en(tbm_rd_en[t]), .rd_row(tb_rd_row),
      .rd_slice(tb_rd_slice), .rd_data(tbm_rd_data[t]));
  end

  rapidx_tile_ctrl #(.COLS(COLS), .SAW(SAW), .KMAX(KMAX), .NTBM(NTBM),
                     .TBM_ROWS(ROWS), .SEQ_BAW(13)) dut (
    .clk(clk), .rst_n(rst_n),
    .reg_we(reg_we), .reg_re(reg_re), .reg_addr(reg_addr),
    .reg_wdata(reg_wdata), .reg_rdata(reg_rdata),
    .cm_valid(cm_valid), .cm_ready(c_ready), .cm_cmd(cm_cmd),
    .cm_wdata(cm_wdata), .cm_rdata(cm_rdata), .cm_rvalid(cm_rvalid),
    .sa_q(sa_q),
    .sh_start(sh_start), .sh_in_valid(sh_in_valid), .sh_flush(sh_flush),
    .sh_from_prev(sh_from_prev), .sh_mv(sh_mv), .sh_ins(sh_ins),
    .sh_ins_val(sh_ins_val), .sh_out(sh_out), .sh_out_valid(sh_out_valid),
    .mf_load_a(mf_load_a), .mf_cmp(mf_cmp), .mf_first(mf_first), .mf_max(mf_max),
    .dl_load_a(dl_load_a), .dl_cmp(dl_cmp), .dl_first(dl_first), .dl_bit(dl_bit),
    .dl_bgt(dl_bgt),
    .tl_valid(tl_valid), .tl_idx(tl_idx), .tl_lo(tl_lo), .tl_hi(tl_hi),
    .tl_out_valid(tl_out_valid),
    .sb_rd_en(sb_rd_en), .sb_rd_base(sb_rd_base), .sb_rd_data(sb_rd_data),
    .tbw_en(tbw_en), .tbw_idx(tbw_idx), .tbw_row(tbw_row), .tbw_slice(tbw_slice),
    .tbw_data(tbw_data),
    .busy(busy), .done(done));

  // command spacing without stalls
  int unsigned cyc = 0, last_acc = 0, n_spaced = 0, n_stalls = 0;
  int unsigned last_lat = 0;
  bit last_pim = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (stall) n_stalls <= n_stalls + 1;
    if (c_valid && c_ready) begin
      bit pim;
      pim = !(cm_cmd.op inside {CM_READ, CM_WRITE, CM_NOP});
      if (!stall_en && pim && last_pim) begin
        n_spaced <= n_spaced + 1;
        check(cyc - last_acc == 3 + last_lat,
              $sformatf("command spacing %0d expected %0d", cyc - last_acc, 3 + last_lat));
      end
      last_acc <= cyc; last_pim <= pim;
      last_lat <= (cm_cmd.op inside {CM_AND, CM_XOR}) ? 2 :
                  (cm_cmd.op inside {CM_ADD, CM_SUB}) ? 6 * int'(cm_cmd.na) : 0;
    end
  end

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
    stall_en = 1;
    mB = 12; mK = 5; mP = 3; mO = 0; mOE = 1; mSM = 2; mSX = 1; mAdapt = 0;
    make_pairs(5, 20, 8);
    run_batch("edit", 0);
    check(n_spaced > 1000, "program commands spaced");
    check(n_stalls > 1000, "CM stalls happened");
    $display("%0d commands spacing-checked, %0d stall cycles", n_spaced, n_stalls);
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

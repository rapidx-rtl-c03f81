// rapidx_tile: one RAPIDx tile.
//
// A tile aligns up to KMAX sequence pairs at once, one per memory segment
// of its computation memory (CM). It holds the CM, NTBM traceback memories
// (TBM) behind the H-tree, the sequence buffer, and the peripheral circuits
// between the CM's column MUX and its write driver: the shifter, the
// interleaved bit-serial max finder (plus one lane in signed mode that
// makes the band-direction decision) and the traceback logic. The tile
// controller sequences them. Tiles never talk to each other.
//
// Host interface: a register bus (rapidx_pkg::REG_*); bit 15 of the address
// selects the sequence buffer (byte address in the low bits). Traceback
// codes are read back through tb_rd_*: TBM index, row and slice in, one
// SAW-bit slice out, one cycle later.
module rapidx_tile
  import rapidx_pkg::*;
#(
  parameter int unsigned ROWS     = 1024,
  parameter int unsigned COLS     = 1024,
  parameter int unsigned SAW      = 128,
  parameter int unsigned NTBM     = 15,
  parameter int unsigned KMAX     = 128,
  parameter int unsigned SEQ_BYTES = 2048,
  localparam int unsigned NSL     = COLS / SAW,
  localparam int unsigned SLW     = (NSL > 1) ? $clog2(NSL) : 1,
  localparam int unsigned IW      = (NTBM > 1) ? $clog2(NTBM) : 1,
  localparam int unsigned TRW     = $clog2(ROWS),
  localparam int unsigned SBAW    = $clog2(SEQ_BYTES)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            reg_we,
  input  logic            reg_re,
  input  logic [15:0]     reg_addr,
  input  logic [31:0]     reg_wdata,
  output logic [31:0]     reg_rdata,
  input  logic            tb_rd_en,
  input  logic [IW-1:0]   tb_rd_idx,
  input  logic [TRW-1:0]  tb_rd_row,
  input  logic [SLW-1:0]  tb_rd_slice,
  output logic [SAW-1:0]  tb_rd_data,
  output logic            busy,
  output logic            done
);
  // CM
  logic           cm_valid, cm_ready, cm_rvalid;
  cm_cmd_t        cm_cmd;
  logic [SAW-1:0] cm_wdata, cm_rdata, sa_q;

  rapidx_cm #(.ROWS(ROWS), .COLS(COLS), .SAW(SAW)) u_cm (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cm_valid), .cmd_ready(cm_ready),
    .cmd(cm_cmd), .wdata(cm_wdata), .rdata(cm_rdata), .rvalid(cm_rvalid));

  // shifter
  logic           sh_start, sh_in_valid, sh_flush, sh_from_prev, sh_out_valid;
  logic [SAW-1:0] sh_mv, sh_ins, sh_ins_val, sh_out;
  rapidx_shifter #(.SAW(SAW)) u_shifter (
    .clk(clk), .rst_n(rst_n), .start(sh_start), .in_valid(sh_in_valid),
    .in_data(sa_q), .flush(sh_flush), .from_prev(sh_from_prev), .mv(sh_mv),
    .ins(sh_ins), .ins_val(sh_ins_val), .out_data(sh_out), .out_valid(sh_out_valid));

  // interleaved bit-serial max finder and the direction lane
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

  // traceback logic
  logic           tl_valid, tl_out_valid;
  logic [1:0]     tl_idx;
  logic [SAW-1:0] tl_lo, tl_hi;
  rapidx_traceback_logic #(.SAW(SAW)) u_tbl (
    .clk(clk), .rst_n(rst_n), .flag_valid(tl_valid), .flag_idx(tl_idx),
    .sa_bits(sa_q), .tb_lo(tl_lo), .tb_hi(tl_hi), .out_valid(tl_out_valid));

  // sequence buffer
  logic            sb_rd_en;
  logic [SBAW+1:0] sb_rd_base;
  logic [1:0]      sb_rd_data;
  rapidx_seq_buffer #(.BYTES(SEQ_BYTES)) u_seq (
    .clk(clk), .wr_en(reg_we && reg_addr[15]), .wr_addr(reg_addr[SBAW-1:0]),
    .wr_data(reg_wdata[7:0]), .rd_en(sb_rd_en), .rd_base(sb_rd_base),
    .rd_data(sb_rd_data));

  // TBMs behind the H-tree
  logic                tbw_en;
  logic [IW-1:0]       tbw_idx;
  logic [TRW-1:0]      tbw_row;
  logic [SLW-1:0]      tbw_slice;
  logic [SAW-1:0]      tbw_data;
  logic [NTBM-1:0]     tbm_wr_en, tbm_rd_en;
  logic [SAW-1:0]      tbm_rd_data [NTBM];

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

  rapidx_tile_ctrl #(
    .COLS(COLS), .SAW(SAW), .KMAX(KMAX), .NTBM(NTBM), .TBM_ROWS(ROWS),
    .SEQ_BAW(SBAW + 2)
  ) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .reg_we(reg_we), .reg_re(reg_re), .reg_addr(reg_addr),
    .reg_wdata(reg_wdata), .reg_rdata(reg_rdata),
    .cm_valid(cm_valid), .cm_ready(cm_ready), .cm_cmd(cm_cmd),
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
endmodule

// rapidx_top: the RAPIDx accelerator, NTILES independent tiles behind the
// global I/O buffer.
//
// The host splits a batch of k*t sequence pairs into t tile batches of k
// pairs, loads each tile's sequence buffer and segment registers, programs
// the scoring function (it may broadcast it), and starts the tiles. Each
// tile then aligns its k pairs in parallel, one per memory segment, and
// raises done; all_done is the AND of them. Scores are read from each
// tile's registers and traceback codes from its TBMs through the same I/O
// buffer. Register map: rapidx_pkg REG_*; address bit 15 selects the
// sequence buffer. Read data returns two cycles after the request
// (tile register, then the I/O buffer register).
//
// The global row driver of the paper is analog word-line drive; its role
// is covered here by each tile's own controller and CM model.
//
// Lint note: the reset is asynchronous in every flip-flop; the only
// synchronous use of rst_n is the "disable iff (!rst_n)" of the
// assertions in the CM model and the tile controller, which a linter can
// report as a reset used both ways. It is not a circuit path.
module rapidx_top #(
  parameter int unsigned NTILES    = 64,
  parameter int unsigned ROWS      = 1024,
  parameter int unsigned COLS      = 1024,
  parameter int unsigned SAW       = 128,
  parameter int unsigned NTBM      = 15,
  parameter int unsigned KMAX      = 128,
  parameter int unsigned SEQ_BYTES = 2048,
  localparam int unsigned TW       = (NTILES > 1) ? $clog2(NTILES) : 1,
  localparam int unsigned NSL      = COLS / SAW,
  localparam int unsigned SLW      = (NSL > 1) ? $clog2(NSL) : 1,
  localparam int unsigned IW       = (NTBM > 1) ? $clog2(NTBM) : 1,
  localparam int unsigned TRW      = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              h_we,
  input  logic              h_re,
  input  logic              h_bcast,
  input  logic [TW-1:0]     h_tile,
  input  logic [15:0]       h_addr,
  input  logic [31:0]       h_wdata,
  output logic [31:0]       h_rdata,
  output logic              h_rvalid,
  input  logic              h_tb_re,
  input  logic [IW-1:0]     h_tb_idx,
  input  logic [TRW-1:0]    h_tb_row,
  input  logic [SLW-1:0]    h_tb_slice,
  output logic [SAW-1:0]    h_tb_rdata,
  output logic              h_tb_rvalid,
  output logic [NTILES-1:0] tile_busy,
  output logic              all_done
);
  logic [NTILES-1:0] t_we, t_re, t_tb_re, t_done;
  logic [15:0]       t_addr;
  logic [31:0]       t_wdata;
  logic [31:0]       t_rdata    [NTILES];
  logic [SAW-1:0]    t_tb_rdata [NTILES];

  rapidx_global_io #(.NTILES(NTILES), .SAW(SAW)) u_gio (
    .clk(clk), .rst_n(rst_n),
    .h_we(h_we), .h_re(h_re), .h_bcast(h_bcast), .h_tile(h_tile),
    .h_addr(h_addr), .h_wdata(h_wdata), .h_rdata(h_rdata), .h_rvalid(h_rvalid),
    .h_tb_re(h_tb_re), .h_tb_rdata(h_tb_rdata), .h_tb_rvalid(h_tb_rvalid),
    .h_all_done(all_done),
    .t_we(t_we), .t_re(t_re), .t_tb_re(t_tb_re), .t_addr(t_addr),
    .t_wdata(t_wdata), .t_rdata(t_rdata), .t_tb_rdata(t_tb_rdata),
    .t_done(t_done));

  for (genvar t = 0; t < NTILES; t++) begin : g_tile
    rapidx_tile #(
      .ROWS(ROWS), .COLS(COLS), .SAW(SAW), .NTBM(NTBM), .KMAX(KMAX),
      .SEQ_BYTES(SEQ_BYTES)
    ) u_tile (
      .clk(clk), .rst_n(rst_n),
      .reg_we(t_we[t]), .reg_re(t_re[t]), .reg_addr(t_addr),
      .reg_wdata(t_wdata), .reg_rdata(t_rdata[t]),
      .tb_rd_en(t_tb_re[t]), .tb_rd_idx(h_tb_idx), .tb_rd_row(h_tb_row),
      .tb_rd_slice(h_tb_slice), .tb_rd_data(t_tb_rdata[t]),
      .busy(tile_busy[t]), .done(t_done[t]));
  end
endmodule

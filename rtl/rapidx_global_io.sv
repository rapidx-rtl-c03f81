// rapidx_global_io: global I/O buffer of the tile array.
//
// The host reaches every tile through this block. A host access carries a
// tile number; bit `bcast` sends a write to all tiles at once (used to
// program a shared scoring function or to start every tile). Reads return
// the addressed tile's register or traceback data one cycle after the tile
// produced it (the buffer registers the selected word). The paper names
// the global I/O buffer but gives no protocol; this bus is this design's.
module rapidx_global_io #(
  parameter int unsigned NTILES = 64,
  parameter int unsigned SAW    = 128,
  localparam int unsigned TW    = (NTILES > 1) ? $clog2(NTILES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // host side
  input  logic              h_we,
  input  logic              h_re,
  input  logic              h_bcast,
  input  logic [TW-1:0]     h_tile,
  input  logic [15:0]       h_addr,
  input  logic [31:0]       h_wdata,
  output logic [31:0]       h_rdata,
  output logic              h_rvalid,
  input  logic              h_tb_re,
  output logic [SAW-1:0]    h_tb_rdata,
  output logic              h_tb_rvalid,
  output logic              h_all_done,
  // tile side
  output logic [NTILES-1:0] t_we,
  output logic [NTILES-1:0] t_re,
  output logic [NTILES-1:0] t_tb_re,
  output logic [15:0]       t_addr,
  output logic [31:0]       t_wdata,
  input  logic [31:0]       t_rdata    [NTILES],
  input  logic [SAW-1:0]    t_tb_rdata [NTILES],
  input  logic [NTILES-1:0] t_done
);
  logic [TW-1:0] sel_q;
  logic          re_q, tbre_q;

  always_comb begin
    for (int unsigned t = 0; t < NTILES; t++) begin
      t_we[t]    = h_we && (h_bcast || h_tile == TW'(t));
      t_re[t]    = h_re && (h_tile == TW'(t));
      t_tb_re[t] = h_tb_re && (h_tile == TW'(t));
    end
  end
  assign t_addr  = h_addr;
  assign t_wdata = h_wdata;
  assign h_all_done = &t_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q <= '0; re_q <= 1'b0; tbre_q <= 1'b0;
      h_rdata <= '0; h_rvalid <= 1'b0; h_tb_rdata <= '0; h_tb_rvalid <= 1'b0;
    end else begin
      sel_q  <= h_tile;  re_q  <= h_re;  tbre_q  <= h_tb_re;
      // tile data is valid one cycle after the request
      h_rvalid    <= re_q;
      h_tb_rvalid <= tbre_q;
      if (re_q)   h_rdata    <= t_rdata[sel_q];
      if (tbre_q) h_tb_rdata <= t_tb_rdata[sel_q];
    end
  end
endmodule

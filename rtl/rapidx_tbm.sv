// rapidx_tbm: one traceback memory (TBM) subarray.
//
// A ROWS x COLS array (1024 x 1024 in the paper) that stores the 2-bit
// traceback codes of the wavefronts. This design writes the codes of one
// wavefront as two rows (bit 0 and bit 1 of each column's code), one
// SAW-bit column-MUX slice per write, and reads one slice per cycle
// (registered) for the host. Plain storage, written as an array.
module rapidx_tbm #(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 1024,
  parameter int unsigned SAW  = 128,
  localparam int unsigned RAW = $clog2(ROWS),
  localparam int unsigned SLW = (COLS / SAW > 1) ? $clog2(COLS / SAW) : 1
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [RAW-1:0] wr_row,
  input  logic [SLW-1:0] wr_slice,
  input  logic [SAW-1:0] wr_data,
  input  logic           rd_en,
  input  logic [RAW-1:0] rd_row,
  input  logic [SLW-1:0] rd_slice,
  output logic [SAW-1:0] rd_data
);
  logic [COLS-1:0] mem [ROWS];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_slice*SAW +: SAW] <= wr_data;
    if (rd_en) rd_data <= mem[rd_row][rd_slice*SAW +: SAW];
  end
endmodule

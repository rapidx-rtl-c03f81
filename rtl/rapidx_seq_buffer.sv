// rapidx_seq_buffer: the tile's sequence buffer (2 KB in the paper).
//
// Holds the reference and query bases of the sequence pairs a tile works
// on, 2 bits per base (A=00, C=01, G=10, T=11 in this design; the paper only
// says bases are 2-bit coded), four bases per byte, base 4a+i in bits
// [2i+1:2i] of byte a. The host writes whole bytes; the tile controller
// reads one base per cycle, registered (data on the cycle after rd_en).
// Written as an array, so it maps to an SRAM macro in a real flow.
module rapidx_seq_buffer #(
  parameter int unsigned BYTES = 2048,
  localparam int unsigned AW  = $clog2(BYTES),
  localparam int unsigned BAW = AW + 2
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_addr,
  input  logic [7:0]     wr_data,
  input  logic           rd_en,
  input  logic [BAW-1:0] rd_base,   // base address
  output logic [1:0]     rd_data
);
  logic [7:0] mem [BYTES];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_base[BAW-1:2]][2*rd_base[1:0] +: 2];
  end
endmodule

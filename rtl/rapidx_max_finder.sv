// rapidx_max_finder: interleaved bit-serial max finder.
//
// SAW bit-serial max finders (rapidx_bs_max_lane) side by side, one per
// column of the column-MUX output, so the finder keeps pace with the sense
// amplifiers: each read of a SAW-bit slice of one CM row feeds one bit to
// every lane. Computing max(a, b) for a b-bit field takes, per slice and
// per bit (MSB first), a read of a's bit row (load_a), a read of b's bit row
// (cmp, max_bits valid in that cycle) and a write of max_bits back to the
// destination row. This follows the paper's structure (k finders, k = SA
// width, latch and MUX before each); the command order is this design's.
module rapidx_max_finder #(
  parameter int unsigned SAW = 128
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load_a,
  input  logic           cmp,
  input  logic           first,
  input  logic [SAW-1:0] sa_bits,
  output logic [SAW-1:0] max_bits
);
  for (genvar g = 0; g < SAW; g++) begin : g_lane
    logic unused_bgt;
    rapidx_bs_max_lane u_lane (
      .clk       (clk),
      .rst_n     (rst_n),
      .load_a    (load_a),
      .cmp       (cmp),
      .first     (first),
      .signed_msb(1'b0),
      .bit_in    (sa_bits[g]),
      .max_bit   (max_bits[g]),
      .b_gt      (unused_bgt)
    );
  end
endmodule

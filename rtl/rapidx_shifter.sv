// rapidx_shifter: column shifter between the CM sense amplifiers and the
// write driver.
//
// When the band of a memory segment moves by one cell, the rows that hold
// the previous wavefront (and the sequence rows) must be realigned by one
// column inside that segment, and the freed column at the band edge gets
// a new value: the next reference or query base fetched from the sequence
// buffer, or a boundary value. The paper names the shifter as the block
// that takes the direction signal and writes the next bases into the
// sequence rows; this design also uses it to realign the DP vector rows.
//
// A row is streamed through in SAW-bit slices, lowest slice first. The
// shifter keeps one slice, so the output for slice s-1 is produced when
// slice s arrives (it needs the first bit of slice s); a final `flush`
// beat with no new data produces the last slice. Per output column:
//   out[c] = mv[c] ? (ins[c] ? ins_val[c] : (from_prev ? old[c-1] : old[c+1]))
//                  : old[c]
// Columns beyond the ends of the row read 0. mv/ins/ins_val refer to the
// output slice. Output is combinational from the registered slice; out_valid
// is high in the cycle of a beat that produces a slice.
module rapidx_shifter #(
  parameter int unsigned SAW = 128
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,      // first beat of a row: forget history
  input  logic           in_valid,   // a slice arrives on in_data
  input  logic [SAW-1:0] in_data,
  input  logic           flush,      // end of row: emit the held slice
  input  logic           from_prev,  // 1: take column c-1, 0: take column c+1
  input  logic [SAW-1:0] mv,
  input  logic [SAW-1:0] ins,
  input  logic [SAW-1:0] ins_val,
  output logic [SAW-1:0] out_data,
  output logic           out_valid
);
  logic [SAW-1:0] held;
  logic           held_ok;
  logic           prev_msb;   // bit SAW-1 of the slice before `held`

  logic next_lsb;
  assign next_lsb = flush ? 1'b0 : in_data[0];

  always_comb begin
    for (int unsigned c = 0; c < SAW; c++) begin
      logic lo, hi;
      lo = (c == 0)       ? prev_msb : held[c-1];
      hi = (c == SAW - 1) ? next_lsb : held[c+1];
      if (!mv[c])       out_data[c] = held[c];
      else if (ins[c])  out_data[c] = ins_val[c];
      else              out_data[c] = from_prev ? lo : hi;
    end
  end
  assign out_valid = held_ok && ((in_valid && !start) || flush);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held     <= '0;
      held_ok  <= 1'b0;
      prev_msb <= 1'b0;
    end else if (in_valid) begin
      prev_msb <= start ? 1'b0 : held[SAW-1];
      held     <= in_data;
      held_ok  <= 1'b1;
    end else if (flush) begin
      held_ok  <= 1'b0;
    end
  end
endmodule

// rapidx_traceback_logic: converts the traceback flags of a wavefront into
// 2-bit traceback codes for the traceback memory.
//
// The CM computes four flag rows per wavefront (Eq. 4 of the design): F0 =
// A' equals s' (match/mismatch, code 00), F1 = A' came from the vertical gap
// candidate (code 01), F2 = from the horizontal gap candidate (code 10), F3 =
// none of them (code 11). The logic reads the four flag rows of one SAW-bit
// slice through the sense amplifiers in bit-serial order (flag_idx 0..3,
// one read per cycle), then encodes every column. The paper assumes exactly
// one flag is set and uses a one-hot encoder; when the candidates tie more
// than one flag is set, so this design resolves ties by priority F0 > F1 >
// F2 > F3 (diagonal first), which is an exact one-hot encoder on one-hot
// input. After the read of flag 3, tb_lo/tb_hi hold the code bits of the
// slice (registered, out_valid for one cycle) and are written to two TBM
// rows.
module rapidx_traceback_logic #(
  parameter int unsigned SAW = 128
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           flag_valid,
  input  logic [1:0]     flag_idx,
  input  logic [SAW-1:0] sa_bits,
  output logic [SAW-1:0] tb_lo,
  output logic [SAW-1:0] tb_hi,
  output logic           out_valid
);
  logic [SAW-1:0] f0, f1, f2;
  // F3 is read for completeness; with priority encoding it only duplicates
  // "none of F0..F2".

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f0 <= '0; f1 <= '0; f2 <= '0;
      tb_lo <= '0; tb_hi <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (flag_valid) begin
        unique case (flag_idx)
          2'd0: f0 <= sa_bits;
          2'd1: f1 <= sa_bits;
          2'd2: f2 <= sa_bits;
          default: begin
            for (int unsigned c = 0; c < SAW; c++) begin
              logic [1:0] code;
              if (f0[c])           code = 2'b00;
              else if (f1[c])      code = 2'b01;
              else if (f2[c])      code = 2'b10;
              else                 code = 2'b11;
              tb_lo[c] <= code[0];
              tb_hi[c] <= code[1];
            end
            out_valid <= 1'b1;
          end
        endcase
      end
    end
  end
endmodule

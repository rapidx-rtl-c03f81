// rapidx_bs_max_lane: one bit-serial max finder.
//
// The CM stores numbers vertically, so the sense amplifier delivers one bit
// of one operand per read. As in the paper, a latch and a multiplexer sit in
// front of the comparator: the bit of operand a is latched (`load_a`), the
// bit of operand b arrives on the next read (`cmp`), and the lane then emits
// the same bit position of max(a, b). Bits arrive most significant first;
// `first` marks the MSB and clears the decision. The decision state is
// "equal so far", "a larger" or "b larger"; once decided, the lane copies
// the larger operand's bits. With `signed_msb` the MSB is a sign bit and its
// comparison is inverted (two's complement). b_gt is high from the beat
// where b is known to be larger; it is used for the band-direction test.
module rapidx_bs_max_lane (
  input  logic clk,
  input  logic rst_n,
  input  logic load_a,      // bit_in is a bit of operand a: latch it
  input  logic cmp,         // bit_in is the same bit of operand b
  input  logic first,       // this bit is the MSB
  input  logic signed_msb,  // operands are two's complement
  input  logic bit_in,
  output logic max_bit,     // valid in the cmp cycle
  output logic b_gt         // valid in and after the cmp cycle of the LSB
);
  typedef enum logic [1:0] {ST_EQ, ST_AGT, ST_BGT} st_e;
  st_e  st, st_eff, st_now;
  logic a_lat;
  logic ad, bd;

  always_comb begin
    st_eff = first ? ST_EQ : st;
    ad = (first && signed_msb) ? ~a_lat  : a_lat;
    bd = (first && signed_msb) ? ~bit_in : bit_in;
    st_now = st_eff;
    if (st_eff == ST_EQ) begin
      if (ad && !bd)      st_now = ST_AGT;
      else if (!ad && bd) st_now = ST_BGT;
    end
    max_bit = (st_now == ST_BGT) ? bit_in : a_lat;
  end
  assign b_gt = cmp ? (st_now == ST_BGT) : (st == ST_BGT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= ST_EQ;
      a_lat <= 1'b0;
    end else begin
      if (load_a) a_lat <= bit_in;
      if (cmp)    st    <= st_now;
    end
  end
endmodule

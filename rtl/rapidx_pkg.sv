// rapidx_pkg: types and constants shared by the RAPIDx tile.
//
// The computation memory (CM) is driven by a small command set. Each
// command names up to three row addresses of the subarray and, for the
// multi-bit arithmetic, the number of bits of each operand. Data is
// stored bit-serially: a b-bit value occupies b consecutive rows of one
// column, least significant bit in the lowest row. The row map below is
// this design's own layout of the sequence rows, processing rows,
// intermediate rows and reserved (constant) rows of one memory segment;
// the paper gives the regions (sequence rows of 2+2 bits, 5-bit A', dH',
// dV', dE', dF', a 32-bit H, constants 2o+2e and o) but not addresses.
package rapidx_pkg;

  // ---------------------------------------------------------------------
  // CM command set
  // ---------------------------------------------------------------------
  typedef enum logic [3:0] {
    CM_NOP    = 4'd0,
    CM_NOR    = 4'd1,   // dst = ~(a | b)                    1 cycle
    CM_OR     = 4'd2,   // dst = a | b                       1 cycle
    CM_AND    = 4'd3,   // dst = a & b                       2 cycles
    CM_XOR    = 4'd4,   // dst = a ^ b                       2 cycles
    CM_NOT    = 4'd5,   // dst = ~a                          1 cycle
    CM_COPY   = 4'd6,   // dst = a                           1 cycle
    CM_NORN   = 4'd7,   // dst = ~(a | a+1 | ... | a+na-1)   1 cycle
    CM_ADD    = 4'd8,   // dst[na] = a[na] + zext(b[nb])     6 cycles per bit
    CM_SUB    = 4'd9,   // dst[na] = a[na] - zext(b[nb])     6 cycles per bit
    CM_SETROW = 4'd10,  // dst = {COLS{imm}}                 1 cycle
    CM_READ   = 4'd11,  // rdata = a[slice]                  1 cycle
    CM_WRITE  = 4'd12   // dst[slice] = wdata                1 cycle
  } cm_op_e;

  typedef struct packed {
    cm_op_e      op;
    logic [9:0]  dst;
    logic [9:0]  a;
    logic [9:0]  b;
    logic [5:0]  na;     // bits of a (and of dst) for ADD/SUB, inputs for NORN
    logic [5:0]  nb;     // bits of b for ADD/SUB; higher bits of b read as 0
    logic [4:0]  slice;  // column-MUX slice for READ/WRITE
    logic        imm;    // value for SETROW
  } cm_cmd_t;

  // ---------------------------------------------------------------------
  // Row map of the CM (one set of rows, shared by all memory segments)
  // ---------------------------------------------------------------------
  localparam int unsigned ROW_R0   = 0;    // reference wavefront, base bit 0
  localparam int unsigned ROW_R1   = 1;    // reference wavefront, base bit 1
  localparam int unsigned ROW_Q0   = 2;    // query wavefront, base bit 0
  localparam int unsigned ROW_Q1   = 3;    // query wavefront, base bit 1
  localparam int unsigned ROW_U    = 8;    // dH' (5 rows)
  localparam int unsigned ROW_V    = 16;   // dV'
  localparam int unsigned ROW_X    = 24;   // dE' (gap state along a column)
  localparam int unsigned ROW_Y    = 32;   // dF' (gap state along a row)
  localparam int unsigned ROW_S    = 40;   // s'(i,j)
  localparam int unsigned ROW_TA   = 48;   // x'+v' (vertical gap candidate)
  localparam int unsigned ROW_TB   = 56;   // y'+u' (horizontal gap candidate)
  localparam int unsigned ROW_Z    = 64;   // A'
  localparam int unsigned ROW_T1   = 72;   // intermediate
  localparam int unsigned ROW_T2   = 80;   // intermediate
  localparam int unsigned ROW_T3   = 88;   // intermediate
  localparam int unsigned ROW_T4   = 96;   // intermediate
  localparam int unsigned ROW_T5   = 104;  // intermediate (XOR of base bits)
  localparam int unsigned ROW_MIS  = 112;  // 1 where the bases differ
  localparam int unsigned ROW_NMIS = 113;  // 1 where the bases are equal
  localparam int unsigned ROW_F0   = 116;  // flag: A' from s' (diagonal)
  localparam int unsigned ROW_F1   = 117;  // flag: A' from vertical gap
  localparam int unsigned ROW_F2   = 118;  // flag: A' from horizontal gap
  localparam int unsigned ROW_F3   = 119;  // flag: none of the above
  localparam int unsigned ROW_H    = 128;  // H, 32 rows, two's complement
  localparam int unsigned ROW_CSM  = 192;  // reserved: s' of a match
  localparam int unsigned ROW_CSX  = 200;  // reserved: s' of a mismatch
  localparam int unsigned ROW_CQ   = 208;  // reserved: o
  localparam int unsigned ROW_CQE  = 224;  // reserved: o+e, 32 rows
  localparam int unsigned HW       = 32;   // width of H (paper: 32-bit)

  // ---------------------------------------------------------------------
  // Tile register map (word addresses on the host bus, bit 15 = 0)
  // ---------------------------------------------------------------------
  localparam logic [15:0] REG_CTRL   = 16'h0000; // W: bit0 start. R: {tb_ovf, done, busy}
  localparam logic [15:0] REG_BAND   = 16'h0001; // band width B
  localparam logic [15:0] REG_NSEG   = 16'h0002; // number of segments k
  localparam logic [15:0] REG_PREC   = 16'h0003; // PIM precision in bits (5 or 3)
  localparam logic [15:0] REG_SMATCH = 16'h0004; // s' of a match    = A + 2o + 2e
  localparam logic [15:0] REG_SMIS   = 16'h0005; // s' of a mismatch = -B + 2o + 2e
  localparam logic [15:0] REG_GAPO   = 16'h0006; // o
  localparam logic [15:0] REG_GAPOE  = 16'h0007; // o + e
  localparam logic [15:0] REG_MODE   = 16'h0008; // bit0 adaptive direction, bit1 traceback
  localparam logic [15:0] REG_ITER   = 16'h0009; // R: wavefront iterations run
  localparam logic [15:0] REG_CYC    = 16'h000A; // R: cycles of the last batch
  localparam logic [15:0] REG_NDOWN  = 16'h000B; // R: band moves downward
  localparam logic [15:0] REG_NRIGHT = 16'h000C; // R: band moves rightward
  localparam logic [15:0] REG_NFORCE = 16'h000D; // R: moves forced by a matrix edge
  localparam logic [15:0] REG_SEG    = 16'h0200; // + 4*s + {0: n, 1: m, 2: ref addr, 3: query addr}, s < 128
                                                 // read of +0 returns the final score of segment s

  typedef struct packed {
    logic [15:0] addr;   // bit 15 set: sequence buffer byte address in [10:0]
    logic [31:0] wdata;
    logic        we;
    logic        re;
  } bus_req_t;

endpackage

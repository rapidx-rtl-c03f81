// rapidx_tile_ctrl: command sequencer of one RAPIDx tile.
//
// The controller runs the adaptive banded, parallelized difference-based
// DP on all memory segments of the CM at once. Segment s owns columns
// [s*B, s*B+B-1]; column p of a segment is cell p of the band's anti-
// diagonal, at matrix position (i, j) = (ib - p, jb + p). The first
// wavefront is (ib, jb) = (B, 1). Each wavefront iteration issues:
//   1. s' = (r == q) ? s'_match : s'_mismatch   (XOR, OR, NOT, AND, OR)
//      a = x' + v',  b = y' + u'                 (PIM add)
//   2. A' = max(max(s', a), b)                  (max finder, two passes)
//   3. flags: A'==s', A'==a, A'==b, none        (XOR, multi-input NOR)
//      traceback logic encodes them into two TBM rows (if enabled)
//   4. u' = A' - v',  v' = A' - u',
//      x' = max(A', a + o) - A',  y' = max(A', b + o) - A'
//      H  = H + u' - (o + e)                    (32-bit PIM add/sub)
//   5. direction: compare H at p = 0 (left) and p = B-1 (right) with a
//      bit-serial max lane; move right if H_right > H_left, else down.
//      A move that would leave the matrix is forced the other way.
//   6. fetch the next reference base (right) or query base (down) of each
//      segment from the sequence buffer, and realign the rows through the
//      shifter: right moves shift {R, v', x', H} by one column toward p-1
//      and insert the new reference base at p = B-1; down moves shift
//      {Q, u', y'} toward p+1 and insert the new query base at p = 0.
// A segment is done when its p = 0 cell reaches (n, m); its score H(n, m)
// is kept. The batch ends when all segments are done.
//
// Here u' = H(i,j)-H(i-1,j)+o+e, v' = H(i,j)-H(i,j-1)+o+e, x' and y' are
// the gap states, all unsigned and at most PREC bits. This is the paper's
// Eq. (3) written with consistent indices: the gap candidate of cell (i,j)
// is formed from its upper (x', v') and left (y', u') neighbours. The gap
// cost of length l is o + l*e with the o and e programmed here, so a host
// that uses the convention "o for the first gap base, e for each further
// one" programs o-e and e.
//
// This design's own choices, where the paper is silent: the cells of the
// first wavefront's predecessor anti-diagonal start at u'=v'=x'=y'=0,
// H=0; a neighbour outside the band is read as u'=v'=x'=y'=0; the H of an
// out-of-band upper neighbour at p = B-1 is taken as that cell's own
// previous H; without adaptive direction the band alternates down/right.
//
// Interface: a register bus (rapidx_pkg REG_*), the CM command port, and
// strobes for the shifter, the max finder, the direction lane, the
// traceback logic, the sequence buffer and the H-tree write port. Every CM
// command is issued, waited for, then its result consumed: 3 cycles plus
// the operation's own latency.
module rapidx_tile_ctrl
  import rapidx_pkg::*;
#(
  parameter int unsigned COLS     = 1024,
  parameter int unsigned SAW      = 128,
  parameter int unsigned KMAX     = 128,
  parameter int unsigned NTBM     = 15,
  parameter int unsigned TBM_ROWS = 1024,
  parameter int unsigned SEQ_BAW  = 13,
  localparam int unsigned NSL     = COLS / SAW,
  localparam int unsigned SLW     = (NSL > 1) ? $clog2(NSL) : 1,
  localparam int unsigned IW      = (NTBM > 1) ? $clog2(NTBM) : 1,
  localparam int unsigned TRW     = $clog2(TBM_ROWS),
  localparam int unsigned CW      = $clog2(COLS) + 1,
  localparam int unsigned KW      = $clog2(KMAX) + 1,
  localparam int unsigned SIW     = (KMAX > 1) ? $clog2(KMAX) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // register bus
  input  logic                reg_we,
  input  logic                reg_re,
  input  logic [15:0]         reg_addr,
  input  logic [31:0]         reg_wdata,
  output logic [31:0]         reg_rdata,
  // CM
  output logic                cm_valid,
  input  logic                cm_ready,
  output cm_cmd_t             cm_cmd,
  output logic [SAW-1:0]      cm_wdata,
  input  logic [SAW-1:0]      cm_rdata,
  input  logic                cm_rvalid,
  // data read from the SA, registered: input of all peripherals
  output logic [SAW-1:0]      sa_q,
  // shifter
  output logic                sh_start,
  output logic                sh_in_valid,
  output logic                sh_flush,
  output logic                sh_from_prev,
  output logic [SAW-1:0]      sh_mv,
  output logic [SAW-1:0]      sh_ins,
  output logic [SAW-1:0]      sh_ins_val,
  input  logic [SAW-1:0]      sh_out,
  input  logic                sh_out_valid,
  // interleaved max finder
  output logic                mf_load_a,
  output logic                mf_cmp,
  output logic                mf_first,
  input  logic [SAW-1:0]      mf_max,
  // direction lane (a bit-serial max finder in signed mode)
  output logic                dl_load_a,
  output logic                dl_cmp,
  output logic                dl_first,
  output logic                dl_bit,
  input  logic                dl_bgt,
  // traceback logic
  output logic                tl_valid,
  output logic [1:0]          tl_idx,
  input  logic [SAW-1:0]      tl_lo,
  input  logic [SAW-1:0]      tl_hi,
  input  logic                tl_out_valid,
  // sequence buffer
  output logic                sb_rd_en,
  output logic [SEQ_BAW-1:0]  sb_rd_base,
  input  logic [1:0]          sb_rd_data,
  // H-tree write port to the TBMs
  output logic                tbw_en,
  output logic [IW-1:0]       tbw_idx,
  output logic [TRW-1:0]      tbw_row,
  output logic [SLW-1:0]      tbw_slice,
  output logic [SAW-1:0]      tbw_data,
  // status
  output logic                busy,
  output logic                done
);
  // ------------------------------------------------------------------
  // configuration and per-segment state
  // ------------------------------------------------------------------
  logic [CW-1:0]  cfg_b;
  logic [KW-1:0]  cfg_k;
  logic [5:0]     cfg_prec;
  logic [4:0]     cfg_smatch, cfg_smis, cfg_o;
  logic [31:0]    cfg_oe;
  logic           cfg_adapt, cfg_tb;

  logic [13:0]        seg_n  [KMAX];
  logic [13:0]        seg_m  [KMAX];
  logic [SEQ_BAW-1:0] seg_ra [KMAX];
  logic [SEQ_BAW-1:0] seg_qa [KMAX];
  logic [13:0]        seg_ib [KMAX];
  logic [13:0]        seg_jb [KMAX];
  logic [31:0]        seg_sc [KMAX];
  logic [KMAX-1:0]    seg_done;
  logic [KMAX-1:0]    seg_right;

  logic [COLS-1:0] m_act, m_first, m_last, m_right, m_done;
  logic [COLS-1:0] ins_r0, ins_r1, ins_q0, ins_q1;

  logic [15:0] cnt_iter, cnt_down, cnt_right, cnt_force;
  logic [31:0] cnt_cyc;
  logic        tb_ovf;
  logic [31:0] tb_ptr;     // next TBM row, counted over all TBMs

  // ------------------------------------------------------------------
  // phases
  // ------------------------------------------------------------------
  typedef enum logic [4:0] {
    PH_IDLE, PH_MASK, PH_PINIT, PH_FETCHI, PH_SHIFTI,
    PH_PSCORE, PH_MAX, PH_PFLAG, PH_TB, PH_PUPD1, PH_PUPD2,
    PH_DIR, PH_FETCH, PH_SHIFT, PH_FIN
  } phase_e;
  phase_e ph;

  // generic counters
  logic [15:0] step;      // step inside a PIM program / row list index
  logic [KW-1:0] seg;
  logic [SIW-1:0] si;        // seg as an array index (seg < KMAX where used)
  assign si = SIW'(seg);
  logic [SLW:0]  sl;      // slice (one extra bit for the flush beat)
  logic [5:0]    bt;      // bit
  logic [1:0]    sub;     // sub-step inside a slice / bit
  logic [1:0]    mx;      // which max pass
  logic [CW-1:0] tinit;   // sequence prefill step
  logic [31:0]   hacc;    // H of the left cell, assembled bit by bit

  // CM command handshake
  logic     pend, wt, got;
  cm_cmd_t  cmd_q;
  logic [SAW-1:0] wdat_q;
  logic     idle;
  assign idle = !pend && !wt;
  assign cm_valid = pend;
  assign cm_cmd   = cmd_q;
  assign cm_wdata = wdat_q;

  // ------------------------------------------------------------------
  // PIM programs
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {PG_INIT, PG_SCORE, PG_FLAG, PG_UPD1, PG_UPD2} prog_e;

  function automatic cm_cmd_t mk(cm_op_e op, int unsigned d, int unsigned a,
                                 int unsigned b, int unsigned na, int unsigned nb);
    cm_cmd_t c;
    c = '0;
    c.op = op; c.dst = 10'(d); c.a = 10'(a); c.b = 10'(b);
    c.na = 6'(na); c.nb = 6'(nb);
    // a row or count outside the CM's fields becomes a NOP (never
    // produced by the programs below)
    if ((d | a | b) >= 1024 || (na | nb) >= 64) c.op = CM_NOP;
    return c;
  endfunction

  function automatic cm_cmd_t setrow(int unsigned d, logic v);
    cm_cmd_t c;
    c = mk(CM_SETROW, d, 0, 0, 0, 0);
    c.imm = v;
    return c;
  endfunction

  // Returns the command of step `s` of program `pg`; op CM_NOP ends it.
  function automatic cm_cmd_t prog(prog_e pg, int unsigned s, int unsigned p);
    cm_cmd_t c;
    c = mk(CM_NOP, 0, 0, 0, 0, 0);
    unique case (pg)
      PG_INIT: begin
        // constants (bit k of each constant is a whole row) and zero state
        if (s < 5)            c = setrow(ROW_CSM + s,      cfg_smatch[s]);
        else if (s < 10)      c = setrow(ROW_CSX + s - 5,  cfg_smis[s-5]);
        else if (s < 15)      c = setrow(ROW_CQ  + s - 10, cfg_o[s-10]);
        else if (s < 47)      c = setrow(ROW_CQE + s - 15, cfg_oe[s-15]);
        else if (s < 52)      c = setrow(ROW_U + s - 47, 1'b0);
        else if (s < 57)      c = setrow(ROW_V + s - 52, 1'b0);
        else if (s < 62)      c = setrow(ROW_X + s - 57, 1'b0);
        else if (s < 67)      c = setrow(ROW_Y + s - 62, 1'b0);
        else if (s < 99)      c = setrow(ROW_H + s - 67, 1'b0);
      end
      PG_SCORE: begin
        if (s == 0)           c = mk(CM_XOR, ROW_T5,   ROW_R0, ROW_Q0, 0, 0);
        else if (s == 1)      c = mk(CM_XOR, ROW_T5+1, ROW_R1, ROW_Q1, 0, 0);
        else if (s == 2)      c = mk(CM_OR,  ROW_MIS,  ROW_T5, ROW_T5+1, 0, 0);
        else if (s == 3)      c = mk(CM_NOT, ROW_NMIS, ROW_MIS, 0, 0, 0);
        else if (s < 4 + 3*p) begin
          int unsigned k, r;
          k = (s - 4) / 3; r = (s - 4) % 3;
          if (r == 0)         c = mk(CM_AND, ROW_T1 + k, ROW_MIS,  ROW_CSX + k, 0, 0);
          else if (r == 1)    c = mk(CM_AND, ROW_T2 + k, ROW_NMIS, ROW_CSM + k, 0, 0);
          else                c = mk(CM_OR,  ROW_S + k,  ROW_T1 + k, ROW_T2 + k, 0, 0);
        end
        else if (s == 4 + 3*p) c = mk(CM_ADD, ROW_TA, ROW_X, ROW_V, p, p);
        else if (s == 5 + 3*p) c = mk(CM_ADD, ROW_TB, ROW_Y, ROW_U, p, p);
      end
      PG_FLAG: begin
        // three equality tests, each p XORs then one multi-input NOR
        if (s < 3 * (p + 1)) begin
          int unsigned t, k, src;
          t = s / (p + 1); k = s % (p + 1);
          src = (t == 0) ? ROW_S : (t == 1) ? ROW_TA : ROW_TB;
          if (k < p)          c = mk(CM_XOR,  ROW_T1 + k, ROW_Z + k, src + k, 0, 0);
          else                c = mk(CM_NORN, ROW_F0 + t, ROW_T1, 0, p, 0);
        end
        else if (s == 3 * (p + 1)) c = mk(CM_NORN, ROW_F3, ROW_F0, 0, 3, 0);
      end
      PG_UPD1: begin
        if (s == 0)           c = mk(CM_SUB, ROW_T1, ROW_Z,  ROW_V,  p, p);
        else if (s == 1)      c = mk(CM_SUB, ROW_T2, ROW_Z,  ROW_U,  p, p);
        else if (s == 2)      c = mk(CM_ADD, ROW_TA, ROW_TA, ROW_CQ, p, p);
        else if (s == 3)      c = mk(CM_ADD, ROW_TB, ROW_TB, ROW_CQ, p, p);
      end
      default: begin // PG_UPD2
        if (s == 0)           c = mk(CM_SUB, ROW_X, ROW_T3, ROW_Z, p, p);
        else if (s == 1)      c = mk(CM_SUB, ROW_Y, ROW_T4, ROW_Z, p, p);
        else if (s < 2 + p)   c = mk(CM_COPY, ROW_U + s - 2, ROW_T1 + s - 2, 0, 0, 0);
        else if (s < 2 + 2*p) c = mk(CM_COPY, ROW_V + s - 2 - p, ROW_T2 + s - 2 - p, 0, 0, 0);
        else if (s == 2 + 2*p) c = mk(CM_ADD, ROW_H, ROW_H, ROW_U, HW, p);
        else if (s == 3 + 2*p) c = mk(CM_SUB, ROW_H, ROW_H, ROW_CQE, HW, HW);
      end
    endcase
    return c;
  endfunction

  // operands of the four max passes: {dst, a, b}
  function automatic logic [29:0] max_rows(logic [1:0] m);
    unique case (m)
      2'd0:    return {10'(ROW_Z),  10'(ROW_S), 10'(ROW_TA)};
      2'd1:    return {10'(ROW_Z),  10'(ROW_Z), 10'(ROW_TB)};
      2'd2:    return {10'(ROW_T3), 10'(ROW_Z), 10'(ROW_TA)};
      default: return {10'(ROW_T4), 10'(ROW_Z), 10'(ROW_TB)};
    endcase
  endfunction

  // rows realigned by the shifter: {row, down_group, kind}
  // kind: 0 = insert reference/query bit 0, 1 = bit 1, 2 = insert 0, 3 = hold
  typedef struct packed {
    logic [9:0] row;
    logic       down;
    logic [1:0] kind;
    logic       last;
  } shrow_t;

  function automatic shrow_t shift_row(int unsigned s, int unsigned p, logic init);
    shrow_t r;
    int unsigned nr;
    r = '0;
    nr = init ? 4 : (4 + 4*p + HW);
    if (s == 0)                 begin r.row = 10'(ROW_R0); r.kind = 2'd0; end
    else if (s == 1)            begin r.row = 10'(ROW_R1); r.kind = 2'd1; end
    else if (s == 2)            begin r.row = 10'(ROW_Q0); r.kind = 2'd0; r.down = 1'b1; end
    else if (s == 3)            begin r.row = 10'(ROW_Q1); r.kind = 2'd1; r.down = 1'b1; end
    else if (s < 4 + p)         begin r.row = 10'(ROW_V + s - 4);         r.kind = 2'd2; end
    else if (s < 4 + 2*p)       begin r.row = 10'(ROW_X + s - 4 - p);     r.kind = 2'd2; end
    else if (s < 4 + 3*p)       begin r.row = 10'(ROW_U + s - 4 - 2*p);   r.kind = 2'd2; r.down = 1'b1; end
    else if (s < 4 + 4*p)       begin r.row = 10'(ROW_Y + s - 4 - 3*p);   r.kind = 2'd2; r.down = 1'b1; end
    else                        begin r.row = 10'(ROW_H + s - 4 - 4*p);   r.kind = 2'd3; end
    r.last = (s + 1 >= nr);
    return r;
  endfunction

  function automatic logic [COLS-1:0] range_mask(int unsigned lo, int unsigned n);
    logic [COLS-1:0] ones;
    ones = '1;
    return (ones << lo) & ~((ones << lo) << n);
  endfunction

  // ------------------------------------------------------------------
  // combinational views
  // ------------------------------------------------------------------
  cm_cmd_t  pcmd;
  prog_e    pg_cur;
  always_comb begin
    unique case (ph)
      PH_PINIT:  pg_cur = PG_INIT;
      PH_PSCORE: pg_cur = PG_SCORE;
      PH_PFLAG:  pg_cur = PG_FLAG;
      PH_PUPD1:  pg_cur = PG_UPD1;
      default:   pg_cur = PG_UPD2;
    endcase
    pcmd = prog(pg_cur, int'(step), int'(cfg_prec));
  end

  logic   init_shift;
  shrow_t srow;
  assign init_shift = (ph == PH_SHIFTI);
  assign srow = shift_row(int'(step), int'(cfg_prec), init_shift);

  // column of the left / right cell of the current segment
  logic [CW-1:0] col_l, col_r;
  assign col_l = CW'(seg) * cfg_b;
  assign col_r = col_l + cfg_b - 1'b1;

  // masks of the shifter's output slice
  logic [SLW-1:0] osl;
  assign osl = (sl == 0) ? '0 : SLW'(sl - 1'b1);
  always_comb begin
    logic [COLS-1:0] mv, ins, iv;
    if (init_shift)  mv = m_act;
    else if (srow.down) mv = m_act & ~m_right & ~m_done;
    else             mv = m_act &  m_right & ~m_done;
    if (srow.kind == 2'd3) mv = mv & ~m_last;
    ins = srow.down ? m_first : m_last;
    unique case (srow.kind)
      2'd0:    iv = srow.down ? ins_q0 : ins_r0;
      2'd1:    iv = srow.down ? ins_q1 : ins_r1;
      default: iv = '0;
    endcase
    sh_mv      = mv[osl*SAW +: SAW];
    sh_ins     = ins[osl*SAW +: SAW];
    sh_ins_val = iv[osl*SAW +: SAW];
  end
  assign sh_from_prev = srow.down;

  logic tl_wr;      // traceback: writing the two code rows of a slice

  // strobes of the peripherals: all in the cycle a result is consumed
  logic consume;
  assign consume = idle && got;
  assign sh_in_valid = consume && (ph == PH_SHIFT || ph == PH_SHIFTI) && (sub == 2'd0);
  assign sh_start    = sh_in_valid && (sl == 0);
  assign sh_flush    = idle && !got && (ph == PH_SHIFT || ph == PH_SHIFTI) && (sl == (SLW+1)'(NSL)) && (sub == 2'd2);
  assign mf_load_a   = consume && (ph == PH_MAX) && (sub == 2'd0);
  assign mf_cmp      = consume && (ph == PH_MAX) && (sub == 2'd1);
  assign mf_first    = (bt == cfg_prec - 1'b1);
  assign tl_valid    = consume && (ph == PH_TB) && !tl_wr;
  assign tl_idx      = sub;
  assign dl_first    = (bt == 6'(HW - 1));

  logic all_done;
  always_comb begin
    all_done = 1'b1;
    for (int unsigned s = 0; s < KMAX; s++)
      if (s < cfg_k && !seg_done[s]) all_done = 1'b0;
  end


  logic same_sl;
  assign same_sl = (col_l[CW-1:$clog2(SAW)] == col_r[CW-1:$clog2(SAW)]);
  logic [$clog2(SAW)-1:0] bl, br;
  assign bl = col_l[$clog2(SAW)-1:0];
  assign br = col_r[$clog2(SAW)-1:0];
  assign dl_load_a = consume && (ph == PH_DIR) && (sub == 2'd0);
  assign dl_cmp    = (ph == PH_DIR) && ((consume && sub == 2'd1) || (idle && !got && sub == 2'd2));
  assign dl_bit    = (sub == 2'd0) ? sa_q[bl] : sa_q[br];


  // ------------------------------------------------------------------
  // main sequencer
  // ------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= PH_IDLE;
      pend <= 1'b0; wt <= 1'b0; got <= 1'b0;
      cmd_q <= '0; wdat_q <= '0; sa_q <= '0;
      step <= '0; seg <= '0; sl <= '0; bt <= '0; sub <= '0; mx <= '0;
      tinit <= '0; hacc <= '0;
      cfg_b <= CW'(11); cfg_k <= KW'(1); cfg_prec <= 6'd5;
      cfg_smatch <= 5'd10; cfg_smis <= 5'd4; cfg_o <= 5'd2; cfg_oe <= 32'd4;
      cfg_adapt <= 1'b1; cfg_tb <= 1'b1;
      seg_done <= '0; seg_right <= '0;
      m_act <= '0; m_first <= '0; m_last <= '0; m_right <= '0; m_done <= '0;
      ins_r0 <= '0; ins_r1 <= '0; ins_q0 <= '0; ins_q1 <= '0;
      cnt_iter <= '0; cnt_down <= '0; cnt_right <= '0; cnt_force <= '0; cnt_cyc <= '0;
      tb_ovf <= 1'b0; tb_ptr <= '0;
      tl_wr <= 1'b0;
      sb_rd_en <= 1'b0; sb_rd_base <= '0;
      tbw_en <= 1'b0; tbw_idx <= '0; tbw_row <= '0; tbw_slice <= '0; tbw_data <= '0;
      done <= 1'b0;
    end else begin
      sb_rd_en <= 1'b0;
      tbw_en   <= 1'b0;
      // handshake bookkeeping
      if (pend && cm_ready) begin
        pend <= 1'b0; wt <= 1'b1;
      end
      if (wt && cm_ready) begin
        wt <= 1'b0; got <= 1'b1;
      end
      // READ data comes one cycle after the command is taken, which may be
      // before the CM is ready again
      if (cm_rvalid) sa_q <= cm_rdata;
      if (ph != PH_IDLE && ph != PH_FIN) cnt_cyc <= cnt_cyc + 1'b1;

      // host register writes (ignored while a batch runs, except start)
      if (reg_we && ph == PH_IDLE && !reg_addr[15]) begin
        if (reg_addr == REG_BAND)   cfg_b      <= CW'(reg_wdata);
        if (reg_addr == REG_NSEG)   cfg_k      <= KW'(reg_wdata);
        if (reg_addr == REG_PREC)   cfg_prec   <= 6'(reg_wdata);
        if (reg_addr == REG_SMATCH) cfg_smatch <= 5'(reg_wdata);
        if (reg_addr == REG_SMIS)   cfg_smis   <= 5'(reg_wdata);
        if (reg_addr == REG_GAPO)   cfg_o      <= 5'(reg_wdata);
        if (reg_addr == REG_GAPOE)  cfg_oe     <= reg_wdata;
        if (reg_addr == REG_MODE)   {cfg_tb, cfg_adapt} <= reg_wdata[1:0];
        if (reg_addr[15:9] == REG_SEG[15:9] && 32'(reg_addr[8:2]) < KMAX) begin
          unique case (reg_addr[1:0])
            2'd0: seg_n [SIW'(reg_addr[8:2])] <= reg_wdata[13:0];
            2'd1: seg_m [SIW'(reg_addr[8:2])] <= reg_wdata[13:0];
            2'd2: seg_ra[SIW'(reg_addr[8:2])] <= SEQ_BAW'(reg_wdata);
            default: seg_qa[SIW'(reg_addr[8:2])] <= SEQ_BAW'(reg_wdata);
          endcase
        end
        if (reg_addr == REG_CTRL && reg_wdata[0]) begin
          ph <= PH_MASK; seg <= '0; done <= 1'b0;
          m_act <= '0; m_first <= '0; m_last <= '0; m_right <= '0; m_done <= '0;
          seg_done <= '0; cnt_iter <= '0; cnt_down <= '0; cnt_right <= '0;
          cnt_force <= '0; cnt_cyc <= '0; tb_ovf <= 1'b0; tb_ptr <= '0;
        end
      end

      unique case (ph)
        PH_IDLE, PH_FIN: ;

        PH_MASK: begin
          // columns of each segment; band starts at (ib, jb) = (B, 1)
          m_act   <= m_act   | range_mask(int'(col_l), int'(cfg_b));
          m_first <= m_first | range_mask(int'(col_l), 1);
          m_last  <= m_last  | range_mask(int'(col_r), 1);
          seg_ib[si] <= 14'(cfg_b);
          seg_jb[si] <= 14'd1;
          if (seg + 1'b1 >= cfg_k) begin
            ph <= PH_PINIT; step <= '0; seg <= '0;
          end else seg <= seg + 1'b1;
        end

        // ---------------- PIM programs ----------------
        PH_PINIT, PH_PSCORE, PH_PFLAG, PH_PUPD1, PH_PUPD2: if (idle) begin
          got <= 1'b0;
          if (pcmd.op != CM_NOP) begin
            cmd_q <= pcmd; pend <= 1'b1; step <= step + 1'b1;
          end else begin
            step <= '0; sl <= '0; bt <= 6'(cfg_prec - 1'b1); sub <= '0;
            unique case (ph)
              PH_PINIT:  begin ph <= PH_FETCHI; tinit <= '0; seg <= '0; end
              PH_PSCORE: begin ph <= PH_MAX; mx <= 2'd0; end
              PH_PFLAG:  begin ph <= PH_TB; end
              PH_PUPD1:  begin ph <= PH_MAX; mx <= 2'd2; end
              default:   begin ph <= PH_DIR; seg <= '0; bt <= 6'(HW - 1); hacc <= '0; end
            endcase
          end
        end

        // ---------------- max finder pass ----------------
        // per slice, per bit (MSB first): read a, read b, write max
        PH_MAX: if (idle) begin
          logic [29:0] r;
          r = max_rows(mx);
          got <= 1'b0;
          if (!got) begin
            cmd_q <= mk(sub == 2'd0 ? CM_READ : sub == 2'd1 ? CM_READ : CM_WRITE,
                        int'(r[29:20]) + int'(bt),
                        (sub == 2'd0 ? int'(r[19:10]) : int'(r[9:0])) + int'(bt), 0, 0, 0);
            cmd_q.slice <= 5'(sl);
            pend <= 1'b1;
          end else begin
            if (sub == 2'd1) wdat_q <= mf_max;
            if (sub != 2'd2) sub <= sub + 1'b1;
            else begin
              sub <= '0;
              if (bt != 0) bt <= bt - 1'b1;
              else begin
                bt <= 6'(cfg_prec - 1'b1);
                if (sl + 1'b1 < (SLW+1)'(NSL)) sl <= sl + 1'b1;
                else begin
                  sl <= '0;
                  unique case (mx)
                    2'd0: mx <= 2'd1;
                    2'd1: begin ph <= PH_PFLAG; step <= '0; end
                    2'd2: mx <= 2'd3;
                    default: begin ph <= PH_PUPD2; step <= '0; end
                  endcase
                end
              end
            end
          end
        end

        // ---------------- traceback ----------------
        PH_TB: if (idle) begin
          got <= 1'b0;
          if (!cfg_tb || tb_ovf) begin
            ph <= PH_PUPD1; step <= '0;
          end else if (tl_wr) begin
            // two code rows of slice sl: lo at tb_ptr, hi at tb_ptr+1
            tbw_en    <= 1'b1;
            tbw_idx   <= IW'((tb_ptr + 32'(sub[0])) / TBM_ROWS);
            tbw_row   <= TRW'((tb_ptr + 32'(sub[0])) % TBM_ROWS);
            tbw_slice <= SLW'(sl);
            tbw_data  <= sub[0] ? tl_hi : tl_lo;
            if (sub[0] == 1'b0) sub <= 2'd1;
            else begin
              tl_wr <= 1'b0; sub <= '0;
              if (sl + 1'b1 < (SLW+1)'(NSL)) sl <= sl + 1'b1;
              else begin
                sl <= '0; ph <= PH_PUPD1; step <= '0;
                if (tb_ptr + 2 >= 32'(NTBM * TBM_ROWS)) tb_ovf <= 1'b1;
                tb_ptr <= tb_ptr + 2;
              end
            end
          end else if (!got) begin
            cmd_q <= mk(CM_READ, 0, ROW_F0 + int'(sub), 0, 0, 0);
            cmd_q.slice <= 5'(sl);
            pend <= 1'b1;
          end else begin
            if (sub == 2'd3) begin
              tl_wr <= 1'b1; sub <= '0;
            end else sub <= sub + 1'b1;
          end
        end
        default: ;
      endcase


      unique case (ph)
        // ---------------- direction ----------------
        // per segment, per bit of H (MSB first): read left cell's slice,
        // read right cell's slice (or reuse it), compare in the lane
        PH_DIR: if (idle) begin
          got <= 1'b0;
          if (seg >= cfg_k) begin
            if (all_done || cnt_iter == 16'hFFFF)
              ph <= PH_FIN;
            else begin
              ph <= PH_FETCH; seg <= '0; sub <= '0;
            end
          end else if (seg_done[si]) begin
            seg <= seg + 1'b1;
          end else if (sub == 2'd3) begin
            // decision for this segment
            logic [13:0] ib, jb;
            logic cd, cr, right;
            ib = seg_ib[si]; jb = seg_jb[si];
            cd = ib < seg_n[si];
            cr = jb < seg_m[si];
            right = !cd ? 1'b1 : !cr ? 1'b0 : cfg_adapt ? dl_bgt : cnt_iter[0];
            if (!cd && !cr) begin
              seg_done[si] <= 1'b1;
              seg_sc[si]   <= hacc;
              m_done <= m_done | range_mask(int'(col_l), int'(cfg_b));
            end else begin
              seg_right[si] <= right;
              if (right) begin
                seg_jb[si] <= jb + 1'b1;
                m_right <= m_right | range_mask(int'(col_l), int'(cfg_b));
                cnt_right <= cnt_right + 1'b1;
              end else begin
                seg_ib[si] <= ib + 1'b1;
                m_right <= m_right & ~range_mask(int'(col_l), int'(cfg_b));
                cnt_down <= cnt_down + 1'b1;
              end
              if (!cd || !cr) cnt_force <= cnt_force + 1'b1;
            end
            sub <= '0; bt <= 6'(HW - 1); hacc <= '0;
            seg <= seg + 1'b1;
          end else if (sub == 2'd2) begin
            // right cell's bit reused from the same slice (dl_cmp now)
            sub <= '0;
            if (bt != 0) bt <= bt - 1'b1; else sub <= 2'd3;
          end else if (!got) begin
            cmd_q <= mk(CM_READ, 0, ROW_H + int'(bt), 0, 0, 0);
            cmd_q.slice <= 5'(sub == 2'd0 ? col_l[CW-1:$clog2(SAW)] : col_r[CW-1:$clog2(SAW)]);
            pend <= 1'b1;
          end else if (sub == 2'd0) begin
            hacc <= {hacc[30:0], sa_q[bl]};
            sub  <= same_sl ? 2'd2 : 2'd1;
          end else begin
            sub <= '0;
            if (bt != 0) bt <= bt - 1'b1; else sub <= 2'd3;
          end
        end

        // ---------------- fetch the next bases ----------------
        PH_FETCH, PH_FETCHI: begin
          // sub 0: issue the buffer read of segment seg; sub 1: take data
          if (sub == 2'd0) begin
            if (seg >= cfg_k) begin
              seg <= '0; step <= '0; sl <= '0; sub <= '0;
              ph  <= (ph == PH_FETCH) ? PH_SHIFT : PH_SHIFTI;
            end else if (ph == PH_FETCH && seg_done[si]) begin
              seg <= seg + 1'b1;
            end else begin
              sb_rd_en <= 1'b1;
              if (ph == PH_FETCHI) begin
                sb_rd_base <= seg_ra[si] + SEQ_BAW'(tinit);  // reference prefill
              end else if (seg_right[si]) begin
                sb_rd_base <= seg_ra[si] + SEQ_BAW'(seg_jb[si]) + SEQ_BAW'(cfg_b) - SEQ_BAW'(2);
              end else begin
                sb_rd_base <= seg_qa[si] + SEQ_BAW'(seg_ib[si]) - SEQ_BAW'(1);
              end
              sub <= 2'd1;
            end
          end else if (sub == 2'd1) begin
            sub <= 2'd2;   // buffer latency
          end else if (sub == 2'd2) begin
            logic [COLS-1:0] ml, mf;
            ml = range_mask(int'(col_r), 1);
            mf = range_mask(int'(col_l), 1);
            if (ph == PH_FETCHI) begin
              ins_r0 <= sb_rd_data[0] ? (ins_r0 | ml) : (ins_r0 & ~ml);
              ins_r1 <= sb_rd_data[1] ? (ins_r1 | ml) : (ins_r1 & ~ml);
              sb_rd_en   <= 1'b1;
              sb_rd_base <= seg_qa[si] + SEQ_BAW'(tinit);   // query prefill
              sub <= 2'd3;
            end else begin
              if (seg_right[si]) begin
                ins_r0 <= sb_rd_data[0] ? (ins_r0 | ml) : (ins_r0 & ~ml);
                ins_r1 <= sb_rd_data[1] ? (ins_r1 | ml) : (ins_r1 & ~ml);
              end else begin
                ins_q0 <= sb_rd_data[0] ? (ins_q0 | mf) : (ins_q0 & ~mf);
                ins_q1 <= sb_rd_data[1] ? (ins_q1 | mf) : (ins_q1 & ~mf);
              end
              sub <= 2'd0; seg <= seg + 1'b1;
            end
          end else begin
            // PH_FETCHI only: query prefill data (one extra latency cycle)
            if (!sb_rd_en) begin
              logic [COLS-1:0] mf;
              mf = range_mask(int'(col_l), 1);
              ins_q0 <= sb_rd_data[0] ? (ins_q0 | mf) : (ins_q0 & ~mf);
              ins_q1 <= sb_rd_data[1] ? (ins_q1 | mf) : (ins_q1 & ~mf);
              sub <= 2'd0; seg <= seg + 1'b1;
            end
          end
        end

        // ---------------- realign rows through the shifter ----------------
        // sub 0: read slice sl (sl == NSL: flush); sub 1: write slice sl-1
        PH_SHIFT, PH_SHIFTI: if (idle) begin
          got <= 1'b0;
          if (sub == 2'd0) begin
            if (!got) begin
              if (sl == (SLW+1)'(NSL)) sub <= 2'd2;
              else begin
                cmd_q <= mk(CM_READ, 0, int'(srow.row), 0, 0, 0);
                cmd_q.slice <= 5'(sl);
                pend <= 1'b1;
              end
            end else begin
              // sh_in_valid this cycle; shifter output is slice sl-1
              if (sl != 0) begin
                wdat_q <= sh_out; sub <= 2'd1;
              end else sl <= sl + 1'b1;
            end
          end else if (sub == 2'd2) begin
            // flush beat: last slice
            wdat_q <= sh_out; sub <= 2'd1;
          end else begin
            if (!got) begin
              cmd_q <= mk(CM_WRITE, int'(srow.row), 0, 0, 0, 0);
              cmd_q.slice <= 5'(osl);
              pend <= 1'b1;
            end else begin
              sub <= 2'd0;
              if (sl == (SLW+1)'(NSL)) begin
                sl <= '0;
                if (!srow.last) step <= step + 1'b1;
                else begin
                  step <= '0;
                  if (ph == PH_SHIFTI) begin
                    if (tinit + 1'b1 < cfg_b) begin
                      tinit <= tinit + 1'b1; ph <= PH_FETCHI; seg <= '0;
                    end else begin
                      ph <= PH_PSCORE;
                    end
                  end else begin
                    ph <= PH_PSCORE;
                    cnt_iter <= cnt_iter + 1'b1;
                  end
                end
              end else sl <= sl + 1'b1;
            end
          end
        end

        PH_FIN: begin
          done <= 1'b1;
          ph   <= PH_IDLE;
        end
        default: ;
      endcase
    end
  end

  assign busy = (ph != PH_IDLE);

  // ------------------------------------------------------------------
  // register reads
  // ------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (reg_re) begin
      reg_rdata <= '0;
      if (reg_addr == REG_CTRL)   reg_rdata <= {29'd0, tb_ovf, done, busy};
      if (reg_addr == REG_ITER)   reg_rdata <= {16'd0, cnt_iter};
      if (reg_addr == REG_CYC)    reg_rdata <= cnt_cyc;
      if (reg_addr == REG_NDOWN)  reg_rdata <= {16'd0, cnt_down};
      if (reg_addr == REG_NRIGHT) reg_rdata <= {16'd0, cnt_right};
      if (reg_addr == REG_NFORCE) reg_rdata <= {16'd0, cnt_force};
      if (reg_addr[15:9] == REG_SEG[15:9] && reg_addr[1:0] == 2'd0 && 32'(reg_addr[8:2]) < KMAX)
        reg_rdata <= seg_sc[SIW'(reg_addr[8:2])];
    end
  end

  // the shifter produces a slice on every beat after the first of a row
  a_shift_out: assert property (@(posedge clk) disable iff (!rst_n)
      (sh_in_valid && !sh_start) || sh_flush |-> sh_out_valid);
  // the traceback codes are ready when the controller starts writing them
  a_tb_ready: assert property (@(posedge clk) disable iff (!rst_n)
      $rose(tl_wr) |-> tl_out_valid);
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n) !(pend && wt));
  // the segment registers decode address bits [8:2]
  if (KMAX > 128) begin : g_kmax_check
    $error("KMAX above 128 does not fit the segment register map");
  end

endmodule

// rapidx_cm: behavioural model of the RAPIDx computation memory (CM).
//
// Behavioural model, not synthesizable logic: it stands for a ROWS x COLS
// ReRAM subarray with digital processing-in-memory, its word-line decoder
// and driver (WDD), sense amplifiers (SA) and the SAW-bit column MUX.
// Row-parallel PIM operations act on every column of the named rows at
// once, as the memristor-switching logic does; a multi-bit ADD or SUB walks
// the operand rows bit-serially (LSB first) with a carry row, one full-add
// per bit. Only the cycle counts are modelled, not the voltages.
//
// Interface: a command (rapidx_pkg::cm_cmd_t) is taken when cmd_valid and
// cmd_ready are both high. cmd_ready stays low for the command's latency.
// READ returns one SAW-bit slice of a row on rdata with rvalid one cycle
// after it is taken; WRITE stores wdata into one slice of a row (the WDD
// write path used by the peripheral circuits).
//
// Timing from the paper: XOR 2 cycles, 1-bit addition 6 cycles. NOR, OR,
// NOT, copy and row set take 1 cycle, AND 2 cycles (this model's choice,
// following the NOR-based construction of the other gates). A multi-input
// NOR (used to test a whole field for zero) takes 1 cycle.
module rapidx_cm
  import rapidx_pkg::*;
#(
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned COLS  = 1024,
  parameter int unsigned SAW   = 128,
  parameter int unsigned T_XOR = 2,
  parameter int unsigned T_ADD = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cmd_valid,
  output logic           cmd_ready,
  input  cm_cmd_t        cmd,
  input  logic [SAW-1:0] wdata,
  output logic [SAW-1:0] rdata,
  output logic           rvalid
);
  localparam int unsigned NSL = COLS / SAW;

  logic [COLS-1:0] mem [ROWS];

  // the fields of a multi-cycle command that are still needed
  typedef struct packed {
    cm_op_e     op;
    logic [9:0] dst, a, b;
    logic [5:0] na, nb;
  } cur_t;
  cur_t            cur;
  logic [15:0]     wait_cnt;
  logic [5:0]      bit_idx;
  logic [COLS-1:0] carry;
  logic            busy;

  assign cmd_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      rvalid   <= 1'b0;
      wait_cnt <= '0;
      bit_idx  <= '0;
      carry    <= '0;
      cur      <= '0;
      rdata    <= '0;
    end else begin
      rvalid <= 1'b0;
      if (!busy) begin
        if (cmd_valid) begin
          unique case (cmd.op)
            CM_READ: begin
              rdata  <= mem[cmd.a][cmd.slice*SAW +: SAW];
              rvalid <= 1'b1;
            end
            CM_WRITE:  mem[cmd.dst][cmd.slice*SAW +: SAW] <= wdata;
            CM_NOR:    mem[cmd.dst] <= ~(mem[cmd.a] | mem[cmd.b]);
            CM_OR:     mem[cmd.dst] <= mem[cmd.a] | mem[cmd.b];
            CM_NOT:    mem[cmd.dst] <= ~mem[cmd.a];
            CM_COPY:   mem[cmd.dst] <= mem[cmd.a];
            CM_SETROW: mem[cmd.dst] <= {COLS{cmd.imm}};
            CM_NORN: begin
              logic [COLS-1:0] acc;
              acc = '0;
              for (int unsigned r = 0; r < 32; r++)
                if (r < cmd.na) acc |= mem[cmd.a + 10'(r)];
              mem[cmd.dst] <= ~acc;
            end
            CM_AND, CM_XOR: begin
              cur      <= '{cmd.op, cmd.dst, cmd.a, cmd.b, cmd.na, cmd.nb};
              busy     <= 1'b1;
              wait_cnt <= 16'(T_XOR - 1);
            end
            CM_ADD, CM_SUB: begin
              cur      <= '{cmd.op, cmd.dst, cmd.a, cmd.b, cmd.na, cmd.nb};
              busy     <= 1'b1;
              wait_cnt <= 16'(T_ADD - 1);
              bit_idx  <= '0;
              carry    <= (cmd.op == CM_SUB) ? '1 : '0;
            end
            default: ;
          endcase
        end
      end else if (wait_cnt != 0) begin
        wait_cnt <= wait_cnt - 1'b1;
      end else begin
        // last cycle of the current (multi-cycle) operation or bit
        unique case (cur.op)
          CM_AND: begin
            mem[cur.dst] <= mem[cur.a] & mem[cur.b];
            busy <= 1'b0;
          end
          CM_XOR: begin
            mem[cur.dst] <= mem[cur.a] ^ mem[cur.b];
            busy <= 1'b0;
          end
          default: begin  // CM_ADD, CM_SUB: one full-add of bit bit_idx
            logic [COLS-1:0] av, bv;
            av = mem[cur.a + 10'(bit_idx)];
            bv = (bit_idx < cur.nb) ? mem[cur.b + 10'(bit_idx)] : '0;
            if (cur.op == CM_SUB) bv = ~bv;
            mem[cur.dst + 10'(bit_idx)] <= av ^ bv ^ carry;
            carry <= (av & bv) | (av & carry) | (bv & carry);
            if (bit_idx + 1'b1 >= cur.na) begin
              busy <= 1'b0;
            end else begin
              bit_idx  <= bit_idx + 1'b1;
              wait_cnt <= 16'(T_ADD - 1);
            end
          end
        endcase
      end
    end
  end

  // READ and WRITE address a slice that exists.
  a_slice_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      cmd_valid && cmd_ready && (cmd.op inside {CM_READ, CM_WRITE}) |-> 32'(cmd.slice) < NSL);

endmodule

// tb_rapidx_cm: checks the computation-memory model against a shadow copy.
//
// Rows are filled with random data through WRITE, then random row-parallel
// operations (NOR, OR, AND, XOR, NOT, COPY, multi-input NOR, SETROW and
// bit-serial ADD/SUB of random widths) are issued and every result row is
// read back slice by slice and compared with the shadow. It also measures
// how long cmd_ready stays low after each command: 2 cycles for XOR and
// AND, 6 cycles per bit for ADD/SUB (the paper's PIM XOR and 1-bit
// addition latencies), none for single-cycle ops. READ data must come
// with rvalid exactly one cycle after the command is taken.
module tb_rapidx_cm;
  import rapidx_pkg::*;
  localparam int unsigned ROWS = 1024, COLS = 256, SAW = 64, NSL = COLS / SAW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready, rvalid;
  cm_cmd_t cmd = '0;
  logic [SAW-1:0] wdata = '0, rdata;
  rapidx_cm #(.ROWS(ROWS), .COLS(COLS), .SAW(SAW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [COLS-1:0] sh [64];   // shadow of rows 0..63

  // issue one command, return the number of cycles cmd_ready stayed low
  task automatic issue(cm_cmd_t c, logic [SAW-1:0] wd, output int lat);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = c; wdata = wd;
    @(negedge clk); cmd_valid = 0;
    lat = 0;
    while (!cmd_ready) begin lat++; @(negedge clk); end
  endtask

  task automatic rd_row(int r, output logic [COLS-1:0] v);
    for (int s = 0; s < NSL; s++) begin
      cm_cmd_t c;
      c = '0; c.op = CM_READ; c.a = 10'(r); c.slice = 5'(s);
      @(negedge clk); cmd_valid = 1; cmd = c;
      @(negedge clk); cmd_valid = 0;
      check(rvalid, "rvalid one cycle after READ");
      v[s*SAW +: SAW] = rdata;
      #1;
      @(negedge clk) check(!rvalid, "rvalid is a pulse");
    end
  endtask

  function automatic cm_cmd_t op3(cm_op_e op, int d, int a, int b, int na, int nb);
    cm_cmd_t c;
    c = '0; c.op = op; c.dst = 10'(d); c.a = 10'(a); c.b = 10'(b); c.na = 6'(na); c.nb = 6'(nb);
    return c;
  endfunction

  initial begin
    int lat;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 64; r++) begin
      sh[r] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int s = 0; s < NSL; s++) begin
        cm_cmd_t c;
        c = '0; c.op = CM_WRITE; c.dst = 10'(r); c.slice = 5'(s);
        issue(c, sh[r][s*SAW +: SAW], lat);
        check(lat == 0, "WRITE takes one cycle");
      end
    end
    for (int t = 0; t < 300; t++) begin
      int d, a, b, na, nb, el;
      cm_op_e op;
      logic [COLS-1:0] exp, got;
      op = cm_op_e'($urandom_range(1, 10));
      d = int'($urandom_range(0, 63)); a = int'($urandom_range(0, 63)); b = int'($urandom_range(0, 63));
      na = int'($urandom_range(1, 8)); nb = int'($urandom_range(1, na));
      if (op inside {CM_ADD, CM_SUB, CM_NORN}) begin
        // keep the fields apart and inside the 64 shadowed rows
        a = int'($urandom_range(0, 7)); b = 16 + int'($urandom_range(0, 7)); d = 32 + int'($urandom_range(0, 23));
      end
      issue(op3(op, d, a, b, na, nb), '0, lat);
      el = 0;
      case (op)
        CM_NOR:    sh[d] = ~(sh[a] | sh[b]);
        CM_OR:     sh[d] = sh[a] | sh[b];
        CM_AND:    begin sh[d] = sh[a] & sh[b]; el = 2; end
        CM_XOR:    begin sh[d] = sh[a] ^ sh[b]; el = 2; end
        CM_NOT:    sh[d] = ~sh[a];
        CM_COPY:   sh[d] = sh[a];
        CM_SETROW: sh[d] = '0;
        CM_NORN:   begin
          logic [COLS-1:0] acc; acc = '0;
          for (int r = 0; r < na; r++) acc |= sh[a + r];
          sh[d] = ~acc;
        end
        CM_ADD, CM_SUB: begin
          logic [COLS-1:0] cy, av, bv, s0 [8];
          cy = (op == CM_SUB) ? '1 : '0;
          for (int k = 0; k < na; k++) begin
            av = sh[a + k]; bv = (k < nb) ? sh[b + k] : '0;
            if (op == CM_SUB) bv = ~bv;
            s0[k] = av ^ bv ^ cy;
            cy = (av & bv) | (av & cy) | (bv & cy);
          end
          for (int k = 0; k < na; k++) sh[d + k] = s0[k];
          el = 6 * na;
        end
        default: ;
      endcase
      check(lat == el, $sformatf("op %s latency %0d expected %0d", op.name(), lat, el));
      for (int r = d; r < d + ((op inside {CM_ADD, CM_SUB}) ? na : 1); r++) begin
        rd_row(r, got);
        check(got == sh[r], $sformatf("op %s row %0d", op.name(), r));
      end
    end
    // SETROW
    issue(op3(CM_SETROW, 5, 0, 0, 0, 0) | cm_cmd_t'(1), '0, lat);
    begin
      logic [COLS-1:0] got;
      rd_row(5, got); check(got == '1, "SETROW 1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

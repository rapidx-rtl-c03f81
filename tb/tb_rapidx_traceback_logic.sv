// tb_rapidx_traceback_logic: checks the traceback-code encoder.
//
// Random flag rows F0..F3 are presented in the order the controller reads
// them (F0, F1, F2, F3, one beat each). One cycle after the F3 beat the
// encoder must raise out_valid for exactly one cycle and give per column
// the 2-bit code of the highest-priority set flag: 00 for F0 (score),
// 01 for F1 (from above), 10 for F2 (from the left), 11 for none.
module tb_rapidx_traceback_logic;
  localparam int unsigned SAW = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flag_valid = 0, out_valid;
  logic [1:0] flag_idx = 0;
  logic [SAW-1:0] sa_bits = '0, tb_lo, tb_hi;
  rapidx_traceback_logic #(.SAW(SAW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      logic [SAW-1:0] f [4];
      for (int i = 0; i < 4; i++) f[i] = {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
      for (int c = 0; c < SAW; c++) f[3][c] = !(f[0][c] | f[1][c] | f[2][c]);
      for (int i = 0; i < 4; i++) begin
        @(negedge clk); flag_valid = 1; flag_idx = 2'(i); sa_bits = f[i];
        #1 check(!out_valid, "no output while flags load");
      end
      @(negedge clk); flag_valid = 0; sa_bits = '0;
      #1 check(out_valid, "out_valid one cycle after F3");
      for (int c = 0; c < SAW; c++) begin
        logic [1:0] e;
        e = f[0][c] ? 2'b00 : f[1][c] ? 2'b01 : f[2][c] ? 2'b10 : 2'b11;
        check({tb_hi[c], tb_lo[c]} == e, $sformatf("col %0d code %b expected %b", c, {tb_hi[c], tb_lo[c]}, e));
      end
      @(negedge clk);
      #1 check(!out_valid, "out_valid is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

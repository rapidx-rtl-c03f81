// tb_rapidx_max_finder: checks the interleaved bit-serial max finder.
//
// Each of the SAW lanes gets its own random pair of unsigned p-bit values
// (p = 3 or 5, the paper's two precisions). The operands are interleaved
// bit by bit, MSB first, as rows of the CM are read: a's bit row (load_a),
// then b's bit row (cmp). The max row produced in each cmp beat is
// collected and must equal the lane-wise max of the two vectors after
// exactly 2p beats.
module tb_rapidx_max_finder;
  localparam int unsigned SAW = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load_a = 0, cmp = 0, first = 0;
  logic [SAW-1:0] sa_bits = '0, max_bits;
  rapidx_max_finder #(.SAW(SAW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      int p, beats;
      logic [4:0] a [SAW], b [SAW], got [SAW];
      p = t[0] ? 5 : 3;
      for (int c = 0; c < SAW; c++) begin
        a[c] = 5'($urandom_range(0, (1 << p) - 1));
        b[c] = (c % 7 == 0) ? a[c] : 5'($urandom_range(0, (1 << p) - 1));
        got[c] = '0;
      end
      beats = 0;
      for (int i = p - 1; i >= 0; i--) begin
        @(negedge clk); load_a = 1; cmp = 0; first = (i == p - 1);
        for (int c = 0; c < SAW; c++) sa_bits[c] = a[c][i];
        beats++;
        @(negedge clk); load_a = 0; cmp = 1;
        for (int c = 0; c < SAW; c++) sa_bits[c] = b[c][i];
        beats++;
        #1 for (int c = 0; c < SAW; c++) got[c][i] = max_bits[c];
      end
      @(negedge clk); cmp = 0; first = 0;
      check(beats == 2 * p, "2p beats per max");
      for (int c = 0; c < SAW; c++)
        check(got[c] == ((a[c] > b[c]) ? a[c] : b[c]),
              $sformatf("lane %0d a=%0d b=%0d got %0d", c, a[c], b[c], got[c]));
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

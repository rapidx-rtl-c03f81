// tb_rapidx_tbm: checks one traceback memory.
//
// Random slices are written at random rows and slices, with random reads
// in between; the read data must appear one cycle after the read with
// the value of a shadow copy (a write in the same cycle as a read of the
// same place returns the old data).
module tb_rapidx_tbm;
  localparam int unsigned ROWS = 1024, COLS = 512, SAW = 128, NSL = COLS / SAW;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [9:0] wr_row = 0, rd_row = 0;
  logic [1:0] wr_slice = 0, rd_slice = 0;
  logic [SAW-1:0] wr_data = '0, rd_data;
  rapidx_tbm #(.ROWS(ROWS), .COLS(COLS), .SAW(SAW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [SAW-1:0] sh [64][NSL];
  initial begin
    // rows 0..63 written in full first so every read is defined
    for (int r = 0; r < 64; r++)
      for (int s = 0; s < NSL; s++) begin
        sh[r][s] = {$urandom, $urandom, $urandom, $urandom};
        @(negedge clk); wr_en = 1; wr_row = 10'(r * 16); wr_slice = 2'(s); wr_data = sh[r][s];
      end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 3000; t++) begin
      int r, s, wr, ws;
      logic [SAW-1:0] e;
      r = int'($urandom_range(0, 63)); s = int'($urandom_range(0, NSL - 1));
      wr = int'($urandom_range(0, 63)); ws = int'($urandom_range(0, NSL - 1));
      e = sh[r][s];
      @(negedge clk);
      rd_en = 1; rd_row = 10'(r * 16); rd_slice = 2'(s);
      wr_en = t[0]; wr_row = 10'(wr * 16); wr_slice = 2'(ws); wr_data = {$urandom, $urandom, $urandom, $urandom};
      if (wr_en) sh[wr][ws] = wr_data;
      @(negedge clk); rd_en = 0; wr_en = 0;
      check(rd_data == e, $sformatf("row %0d slice %0d", r * 16, s));
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

// tb_rapidx_seq_buffer: checks the 2 KB sequence buffer.
//
// All 2048 bytes are written with random data (four 2-bit bases per byte,
// base i of a byte in bits [2i+1:2i]), then random base addresses are
// read. The base must appear one cycle after the read (registered read)
// and stay unchanged while rd_en is low.
module tb_rapidx_seq_buffer;
  localparam int unsigned BYTES = 2048;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [10:0] wr_addr = 0;
  logic [7:0] wr_data = 0;
  logic [12:0] rd_base = 0;
  logic [1:0] rd_data;
  rapidx_seq_buffer #(.BYTES(BYTES)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [7:0] img [BYTES];
  initial begin
    for (int a = 0; a < BYTES; a++) begin
      img[a] = 8'($urandom);
      @(negedge clk); wr_en = 1; wr_addr = 11'(a); wr_data = img[a];
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 4000; t++) begin
      int b;
      logic [1:0] e;
      b = (t < 64) ? t : int'($urandom_range(0, 4 * BYTES - 1));
      e = img[b / 4][2 * (b % 4) +: 2];
      @(negedge clk); rd_en = 1; rd_base = 13'(b);
      @(negedge clk); rd_en = 0; rd_base = 13'($urandom);
      check(rd_data == e, $sformatf("base %0d got %0d expected %0d", b, rd_data, e));
      @(negedge clk);
      check(rd_data == e, "data held while rd_en is low");
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

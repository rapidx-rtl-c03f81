// tb_rapidx_shifter: checks the row shifter against a whole-row model.
//
// A random COLS-bit row is streamed through the shifter slice by slice
// (start on the first slice, flush after the last), with random move,
// insert and insert-value masks and both shift directions. The output
// slices are reassembled and compared with new[c] = mv ? (ins ? val :
// old[c-1 or c+1]) : old[c], where columns outside the row read 0. It
// also checks that each output slice appears in the cycle of the next
// input beat (one-slice latency) and after flush.
module tb_rapidx_shifter;
  localparam int unsigned SAW = 16, NSL = 4, COLS = SAW * NSL;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, in_valid = 0, flush = 0, from_prev = 0;
  logic [SAW-1:0] in_data = '0, mv = '0, ins = '0, ins_val = '0, out_data;
  logic out_valid;
  rapidx_shifter #(.SAW(SAW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [COLS-1:0] row, m, in, iv, exp, got;
      bit dir;
      int nout;
      row = {$urandom, $urandom}; m = {$urandom, $urandom};
      in = {$urandom, $urandom} & {$urandom, $urandom}; iv = {$urandom, $urandom};
      if (t % 4 == 0) m = '1;
      dir = t[0];
      for (int c = 0; c < COLS; c++) begin
        logic nb;
        if (dir) nb = (c == 0) ? 1'b0 : row[c-1];
        else     nb = (c == COLS - 1) ? 1'b0 : row[c+1];
        exp[c] = m[c] ? (in[c] ? iv[c] : nb) : row[c];
      end
      got = '0; nout = 0;
      for (int b = 0; b <= NSL; b++) begin
        int osl;
        @(negedge clk);
        from_prev = dir;
        osl = b - 1;
        if (osl >= 0) begin
          mv = m[osl*SAW +: SAW]; ins = in[osl*SAW +: SAW]; ins_val = iv[osl*SAW +: SAW];
        end
        if (b < NSL) begin
          in_valid = 1; start = (b == 0); flush = 0; in_data = row[b*SAW +: SAW];
        end else begin
          in_valid = 0; start = 0; flush = 1;
        end
        #1;
        check(out_valid == (b > 0), $sformatf("out_valid beat %0d", b));
        if (out_valid && osl >= 0) begin got[osl*SAW +: SAW] = out_data; nout++; end
      end
      @(negedge clk); in_valid = 0; flush = 0; start = 0;
      #1 check(!out_valid, "no output when idle");
      check(nout == NSL, "one output per slice");
      check(got == exp, $sformatf("row %0d dir %0d got %h exp %h", t, dir, got, exp));
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

// tb_rapidx_bs_max_lane: checks one bit-serial max lane.
//
// Random operand pairs of random width (1..32 bits) are fed MSB first:
// for each bit a load_a beat with a's bit, then a cmp beat with b's bit.
// The max bits collected in the cmp beats must form max(a, b) (unsigned,
// or two's complement with signed_msb), and b_gt must equal b > a both in
// the last cmp beat and while idle afterwards. Each bit costs exactly two
// beats, the latency of one operand bit pair.
module tb_rapidx_bs_max_lane;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load_a = 0, cmp = 0, first = 0, signed_msb = 0, bit_in = 0;
  logic max_bit, b_gt;
  rapidx_bs_max_lane dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int w;
      logic [31:0] a, b, mx, got;
      bit sg, bgt;
      w = int'($urandom_range(1, 32));
      sg = t[0];
      a = $urandom; b = $urandom;
      if (t % 5 == 0) b = a;
      if (w < 32) begin a &= (32'd1 << w) - 1; b &= (32'd1 << w) - 1; end
      if (sg) begin
        longint sa, sb;
        sa = (w < 32 && a[w-1]) ? longint'(a) - (longint'(1) << w) : longint'(signed'(a));
        sb = (w < 32 && b[w-1]) ? longint'(b) - (longint'(1) << w) : longint'(signed'(b));
        if (w == 32) begin sa = longint'(signed'(a)); sb = longint'(signed'(b)); end
        bgt = sb > sa;
      end else bgt = b > a;
      mx = bgt ? b : a;
      got = '0;
      signed_msb = sg;
      for (int i = w - 1; i >= 0; i--) begin
        @(negedge clk); load_a = 1; cmp = 0; first = (i == w - 1); bit_in = a[i];
        @(negedge clk); load_a = 0; cmp = 1; bit_in = b[i];
        #1 got[i] = max_bit;
        if (i == 0) check(b_gt == bgt, $sformatf("b_gt in cmp beat a=%h b=%h w=%0d s=%0d", a, b, w, sg));
      end
      @(negedge clk); cmp = 0; first = 0;
      #1 check(b_gt == bgt, "b_gt held");
      check(got == mx, $sformatf("max a=%h b=%h w=%0d s=%0d got %h", a, b, w, sg, got));
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

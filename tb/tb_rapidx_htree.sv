// tb_rapidx_htree: checks the H-tree demux/mux between the tile and its
// TBMs, with the paper's 15 TBMs.
//
// Writes must enable exactly the addressed TBM. Reads must enable exactly
// the addressed TBM and, one cycle later, return that TBM's data; the
// simple TBM models here return a pattern that names the TBM and the
// cycle.
module tb_rapidx_htree;
  localparam int unsigned NTBM = 15, SAW = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [3:0] wr_idx = 0, rd_idx = 0;
  logic [NTBM-1:0] tbm_wr_en, tbm_rd_en;
  logic [SAW-1:0] tbm_rd_data [NTBM], rd_data;
  rapidx_htree #(.NTBM(NTBM), .SAW(SAW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  // registered-read TBM stand-ins
  for (genvar t = 0; t < NTBM; t++) begin : g_m
    initial tbm_rd_data[t] = '0;
    always @(posedge clk) if (tbm_rd_en[t]) tbm_rd_data[t] <= {8'(t), 24'(cyc)};
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int w, r;
      int unsigned c0;
      w = int'($urandom_range(0, NTBM - 1)); r = int'($urandom_range(0, NTBM - 1));
      @(negedge clk);
      wr_en = 1'($urandom); wr_idx = 4'(w); rd_en = 1; rd_idx = 4'(r);
      c0 = cyc;
      #1;
      check(tbm_wr_en == (wr_en ? (NTBM'(1) << w) : '0), "one write enable");
      check(tbm_rd_en == (NTBM'(1) << r), "one read enable");
      @(negedge clk); rd_en = 0; wr_en = 0; rd_idx = 4'($urandom);
      #1 check(rd_data == {8'(r), 24'(c0)}, $sformatf("read TBM %0d", r));
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

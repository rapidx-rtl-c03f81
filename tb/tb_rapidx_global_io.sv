// tb_rapidx_global_io: checks the global I/O between the host and 64 tiles.
//
// Unicast writes must enable only the selected tile, broadcast writes all
// of them; reads and TBM reads enable only the selected tile and return
// its data with rvalid exactly two cycles after the request (one cycle in
// the tile, one in this block). all_done is the AND of the tiles' done.
// The tile stand-ins answer a read with a pattern naming the tile and the
// cycle of the request.
module tb_rapidx_global_io;
  localparam int unsigned NTILES = 64, SAW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic h_we = 0, h_re = 0, h_bcast = 0, h_tb_re = 0;
  logic [5:0] h_tile = 0;
  logic [15:0] h_addr = 0;
  logic [31:0] h_wdata = 0, h_rdata;
  logic h_rvalid, h_tb_rvalid, h_all_done;
  logic [SAW-1:0] h_tb_rdata;
  logic [NTILES-1:0] t_we, t_re, t_tb_re, t_done = '0;
  logic [15:0] t_addr;
  logic [31:0] t_wdata;
  logic [31:0] t_rdata [NTILES];
  logic [SAW-1:0] t_tb_rdata [NTILES];
  rapidx_global_io #(.NTILES(NTILES), .SAW(SAW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  for (genvar t = 0; t < NTILES; t++) begin : g_t
    initial begin t_rdata[t] = '0; t_tb_rdata[t] = '0; end
    always @(posedge clk) begin
      if (t_re[t])    t_rdata[t]    <= {8'(t), 24'(cyc)};
      if (t_tb_re[t]) t_tb_rdata[t] <= {8'(t + 100), 24'(cyc)};
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      int t;
      int unsigned c0;
      bit tbr;
      t = int'($urandom_range(0, NTILES - 1));
      // write
      @(negedge clk); h_we = 1; h_bcast = (i % 5 == 0); h_tile = 6'(t);
      h_addr = 16'($urandom); h_wdata = $urandom;
      #1 check(t_we == (h_bcast ? '1 : (64'd1 << t)), "write enables");
      check(t_addr == h_addr && t_wdata == h_wdata, "address and data passed on");
      // read
      tbr = i[0];
      @(negedge clk); h_we = 0; h_bcast = 0; h_re = !tbr; h_tb_re = tbr; c0 = cyc;
      #1 check((tbr ? t_tb_re : t_re) == (64'd1 << t) && (tbr ? t_re : t_tb_re) == '0, "read enables");
      @(negedge clk); h_re = 0; h_tb_re = 0; h_tile = 6'($urandom);
      #1 check(!h_rvalid && !h_tb_rvalid, "no data after one cycle");
      @(negedge clk);
      #1 if (tbr) check(h_tb_rvalid && h_tb_rdata == {8'(t + 100), 24'(c0)}, $sformatf("TBM read tile %0d", t));
      else        check(h_rvalid && h_rdata == {8'(t), 24'(c0)}, $sformatf("read tile %0d", t));
      @(negedge clk);
      #1 check(!h_rvalid && !h_tb_rvalid, "rvalid is a pulse");
      t_done = {$urandom, $urandom};
      if (i % 3 == 0) t_done = '1;
      #1 check(h_all_done == (t_done == '1), "all_done");
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

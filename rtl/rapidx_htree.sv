// rapidx_htree: H-tree connection between the CM peripherals and the TBMs.
//
// The paper names the H-tree as the low-latency, high-bandwidth path over
// which the CM reaches its 15 TBMs. This design models it as a
// demultiplexer of the write port (TBM index selects the target) and a
// multiplexer of the read port; the returned data is the selected TBM's
// registered read, so a read has one cycle of latency. No pipelining of
// the tree itself is modelled.
module rapidx_htree #(
  parameter int unsigned NTBM = 15,
  parameter int unsigned SAW  = 128,
  localparam int unsigned IW  = (NTBM > 1) ? $clog2(NTBM) : 1
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [IW-1:0]       wr_idx,
  output logic [NTBM-1:0]     tbm_wr_en,
  input  logic                rd_en,
  input  logic [IW-1:0]       rd_idx,
  output logic [NTBM-1:0]     tbm_rd_en,
  input  logic [SAW-1:0]      tbm_rd_data [NTBM],
  output logic [SAW-1:0]      rd_data
);
  logic [IW-1:0] rd_idx_q;
  always_comb begin
    for (int unsigned t = 0; t < NTBM; t++) begin
      tbm_wr_en[t] = wr_en && (wr_idx == IW'(t));
      tbm_rd_en[t] = rd_en && (rd_idx == IW'(t));
    end
  end
  always_ff @(posedge clk) if (rd_en) rd_idx_q <= rd_idx;
  assign rd_data = (32'(rd_idx_q) < NTBM) ? tbm_rd_data[rd_idx_q] : '0;
endmodule

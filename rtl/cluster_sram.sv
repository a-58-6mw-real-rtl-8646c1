// cluster_sram: the programmable codebook of 256 cluster centers, each a
// 143-bit feature (13 x 11 bits).
//
// It is shared: read port 0 feeds the three VQ engines (one center read per
// cycle serves all three), and read ports 1..N_RD-1 serve the de-quantization
// of stored codes in the SVM engines, which is a plain lookup. The 256
// programmable centers and the sharing follow the paper; the number of read
// ports is this design's own choice.
//
// Timing: one write port; synchronous reads, data one cycle after rd_en.
module cluster_sram
  import dpm_pkg::*;
#(
  parameter int N_RD = 3
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [CODEW-1:0]     wr_addr,
  input  feat_t                wr_data,
  input  logic [N_RD-1:0]      rd_en,
  input  logic [CODEW-1:0]     rd_addr [N_RD],
  output feat_t                rd_data [N_RD]
);
  feat_t mem [NCLUST];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    for (int p = 0; p < N_RD; p++)
      if (rd_en[p]) rd_data[p] <= mem[rd_addr[p]];
  end
endmodule

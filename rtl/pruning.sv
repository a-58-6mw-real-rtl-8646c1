// pruning: classification pruning of root windows.
//
// A root window becomes a candidate for parts classification only when its
// score A is greater than the programmable threshold B (A > B); all other
// roots are discarded. Raising the threshold prunes more roots and saves the
// parts work. The comparison and programmable threshold follow the paper; the
// kept/pruned counters are this design's own addition for monitoring.
//
// Interface: root_t stream in and out (valid/ready), combinational: a pruned
// root is consumed at once, a kept one waits for out_ready. Counters clear on
// cnt_clr.
module pruning
  import dpm_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  score_t       thresh,
  input  logic         cnt_clr,
  input  logic         in_valid,
  output logic         in_ready,
  input  root_t        in,
  output logic         out_valid,
  input  logic         out_ready,
  output root_t        out,
  output logic [31:0]  n_kept,
  output logic [31:0]  n_pruned
);
  logic keep;

  assign keep      = in.score > thresh;
  assign out       = in;
  assign out_valid = in_valid && keep;
  assign in_ready  = keep ? out_ready : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_kept <= '0; n_pruned <= '0;
    end else if (cnt_clr) begin
      n_kept <= '0; n_pruned <= '0;
    end else if (in_valid && in_ready) begin
      if (keep) n_kept   <= n_kept + 1'b1;
      else      n_pruned <= n_pruned + 1'b1;
    end
  end
endmodule

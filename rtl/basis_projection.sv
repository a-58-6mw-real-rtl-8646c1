// basis_projection: projects each 13-D HOG feature onto 13 programmable
// basis vectors so that the SVM weights in the new space are sparse.
//
// As drawn in the paper's projection figure, a multiplexer selects one of the
// 13 basis vectors per cycle, one 13-wide dot-product unit multiplies it with
// the held feature, and the result is steered into output register k. A
// feature therefore takes 13 cycles (plus one to hand over). The basis
// coefficients are 8-bit signed in Q7 (value/128); each result is shifted
// right by 7 and saturated to the 11-bit signed feature range. Coefficient
// width, scaling and saturation are this design's own choices.
//
// Interface: valid/ready streams of fbeat_t; basis vector k is written through
// cfg_we/cfg_k/cfg_row (13 x 8-bit coefficients, dimension j at bits 8j+7:8j).
// The paper instantiates three copies for three feature lanes; this module is
// one copy.
module basis_projection
  import dpm_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  logic [3:0]            cfg_k,
  input  logic [NDIM*BW-1:0]    cfg_row,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  fbeat_t                in,
  output logic                  out_valid,
  input  logic                  out_ready,
  output fbeat_t                out,
  output logic                  idle
);
  logic [NDIM*BW-1:0] basis [NDIM];
  fbeat_t             hold;
  feat_t              res;
  logic [3:0]         k;
  logic               busy;
  logic signed [31:0] dot;
  logic signed [31:0] sh;

  assign in_ready  = !busy && !out_valid;
  assign idle      = !busy && !out_valid;

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_k < 4'(NDIM)) basis[cfg_k] <= cfg_row;
  end

  // dot product of the held feature with basis vector k
  always_comb begin
    dot = '0;
    for (int j = 0; j < NDIM; j++)
      dot += 32'(hold.f[j]) * 32'($signed(basis[k][j*BW +: BW]));
    sh = dot >>> 7;
  end

  always_comb begin
    out   = hold;
    out.f = res;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold <= '0; res <= '0; k <= '0; busy <= 1'b0; out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        hold <= in;
        k    <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        if (sh > 32'sd1023)       res[k] <= fe_t'(1023);
        else if (sh < -32'sd1024) res[k] <= fe_t'(-1024);
        else                      res[k] <= fe_t'(sh);
        if (k == 4'(NDIM - 1)) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end
endmodule

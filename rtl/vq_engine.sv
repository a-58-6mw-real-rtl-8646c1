// vq_engine: vector quantization of projected features into 8-bit codes,
// with N_ENG engines sharing one codebook read port.
//
// Up to N_ENG features are gathered (fewer when a level's last feature comes
// first, or when flush is raised while no feature is offered: the top raises
// it when the classification engines hold the stream, so that the stored
// codes catch up with the candidates waiting for them). Then the 256 cluster centers are read from the shared cluster SRAM,
// one per cycle, and every engine compares the same center with its own
// feature, keeping the index with the smallest L1 distance (the lowest index
// wins a tie). After the sweep the codes leave in input order. Three engines
// and a shared center read follow the paper; the L1 metric and the exhaustive
// sweep are this design's own choices.
//
// Timing: a group takes 1 + 256 + 1 cycles of search after it is gathered,
// then one cycle per code at the output. Interface: valid/ready streams; the
// codebook port (cb_rd_en/cb_rd_addr -> cb_rd_data a cycle later) connects to
// cluster_sram.
module vq_engine
  import dpm_pkg::*;
#(
  parameter int N_ENG = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  fbeat_t            in,
  input  logic              flush,
  output logic              cb_rd_en,
  output logic [CODEW-1:0]  cb_rd_addr,
  input  feat_t             cb_rd_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [CODEW-1:0]  out_code,
  output logic [CW-1:0]     out_x,
  output logic [CW-1:0]     out_y,
  output logic              out_last,
  output logic              idle
);
  localparam int NW = $clog2(N_ENG + 1);
  typedef enum logic [1:0] {S_COLLECT, S_SEARCH, S_OUT} state_e;

  state_e            st;
  fbeat_t            buf_q  [N_ENG];
  logic [CODEW-1:0]  best   [N_ENG];
  logic [17:0]       bestd  [N_ENG];
  logic [NW-1:0]     n, o;
  logic [8:0]        ci;        // next center to read
  logic              cmp_v;     // cb_rd_data valid this cycle
  logic [CODEW-1:0]  cmp_idx;
  logic [17:0]       l1d   [N_ENG];

  assign in_ready   = (st == S_COLLECT);
  assign cb_rd_en   = (st == S_SEARCH) && !ci[8];
  assign cb_rd_addr = ci[7:0];
  assign idle       = (st == S_COLLECT) && (n == '0);

  always_comb begin
    for (int e = 0; e < N_ENG; e++) begin
      l1d[e] = '0;
      for (int k = 0; k < NDIM; k++) begin
        logic signed [FW:0] d;
        d = (FW+1)'(buf_q[e].f[k]) - (FW+1)'(cb_rd_data[k]);
        l1d[e] += 18'((d < 0) ? -d : d);
      end
    end
  end

  assign out_valid = (st == S_OUT);
  assign out_code  = best[o];
  assign out_x     = buf_q[o].x;
  assign out_y     = buf_q[o].y;
  assign out_last  = buf_q[o].last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_COLLECT; n <= '0; o <= '0; ci <= '0; cmp_v <= 1'b0; cmp_idx <= '0;
      for (int e = 0; e < N_ENG; e++) begin
        buf_q[e] <= '0; best[e] <= '0; bestd[e] <= '1;
      end
    end else begin
      case (st)
        S_COLLECT: if (in_valid) begin
          buf_q[n] <= in;
          if (n == NW'(N_ENG - 1) || in.last) begin
            n  <= n + 1'b1;
            st <= S_SEARCH;
            ci <= '0;
            cmp_v <= 1'b0;
          end else begin
            n <= n + 1'b1;
          end
        end else if (flush && n != '0) begin
          st <= S_SEARCH;
          ci <= '0;
          cmp_v <= 1'b0;
        end
        S_SEARCH: begin
          cmp_v   <= cb_rd_en;
          cmp_idx <= ci[7:0];
          if (!ci[8]) ci <= ci + 1'b1;
          if (cmp_v) begin
            for (int e = 0; e < N_ENG; e++) begin
              if (cmp_idx == '0 || l1d[e] < bestd[e]) begin
                bestd[e] <= l1d[e];
                best[e]  <= cmp_idx;
              end
            end
            if (cmp_idx == 8'(NCLUST - 1)) begin
              st <= S_OUT;
              o  <= '0;
            end
          end
        end
        S_OUT: if (out_ready) begin
          if (o == n - 1'b1) begin
            st <= S_COLLECT;
            n  <= '0;
          end else begin
            o <= o + 1'b1;
          end
        end
        default: st <= S_COLLECT;
      endcase
    end
  end
endmodule

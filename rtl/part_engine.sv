// part_engine: one of the 8 part processing engines of an SVM engine.
//
// It holds the weights of one part template (the part SVM weights buffer)
// and, for the candidate root being processed, a local copy of the features
// the part can reach: the part template area widened by 2 cells on every side
// for the 5x5 displacement search, i.e. (pw+4) x (ph+4) de-quantized features
// (the local feature SRAM). On start it computes the part score at
// displacement (dx, dy) in -2..2: the sum over the pw x ph template cells of
// the sparse dot product of weight (i,j) with local feature (dx+2+i, dy+2+j),
// one template cell per cycle. The paper gives the engine's three parts
// (weights buffer, local feature SRAM, part classifier) and the 5x5 search;
// the template size limit (6x6 cells) and the schedule are this design's own.
//
// Timing: done pulses pw*ph+1 cycles after start, with score valid then.
// Local features are written at index r*(PW_MAX+4)+c, weights at j*PW_MAX+i.
module part_engine
  import dpm_pkg::*;
#(
  parameter int PW_MAX = 6,
  parameter int PH_MAX = 6
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [7:0]                            pw,
  input  logic [7:0]                            ph,
  input  logic                                  w_we,
  input  logic [$clog2(PW_MAX*PH_MAX)-1:0]      w_addr,
  input  sw_t                                   w_data,
  input  logic                                  lf_we,
  input  logic [$clog2((PW_MAX+4)*(PH_MAX+4))-1:0] lf_addr,
  input  feat_t                                 lf_data,
  input  logic                                  start,
  input  disp_t                                 dx,
  input  disp_t                                 dy,
  output logic                                  busy,
  output logic                                  done,
  output score_t                                score
);
  localparam int LW = PW_MAX + 4;
  localparam int LA = $clog2(LW * (PH_MAX + 4));
  localparam int WA = $clog2(PW_MAX * PH_MAX);

  sw_t   wbuf [PW_MAX * PH_MAX];
  feat_t lmem [LW * (PH_MAX + 4)];

  logic [7:0]    i, j;
  logic [3:0]    ox, oy;     // dx+2, dy+2
  score_t        acc, pd;
  feat_t         fcur;
  sw_t           wcur;

  assign wcur = wbuf[WA'(j) * WA'(PW_MAX) + WA'(i)];
  assign fcur = lmem[(LA'(oy) + LA'(j)) * LA'(LW) + LA'(ox) + LA'(i)];

  sparse_dot u_dot (.f(fcur), .w(wcur), .y(pd));

  always_ff @(posedge clk) begin
    if (w_we)  wbuf[w_addr]  <= w_data;
    if (lf_we) lmem[lf_addr] <= lf_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; score <= '0; acc <= '0;
      i <= '0; j <= '0; ox <= '0; oy <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        acc  <= '0;
        i <= '0; j <= '0;
        ox <= 4'($signed({dx[2], dx}) + 4'sd2);
        oy <= 4'($signed({dy[2], dy}) + 4'sd2);
      end else if (busy) begin
        acc <= acc + pd;
        if (i == pw - 8'd1) begin
          i <= '0;
          if (j == ph - 8'd1) begin
            busy  <= 1'b0;
            done  <= 1'b1;
            score <= acc + pd;
          end else begin
            j <= j + 1'b1;
          end
        end else begin
          i <= i + 1'b1;
        end
      end
    end
  end
endmodule

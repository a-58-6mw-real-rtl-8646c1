// deform: finds, for each of the 8 parts, the best placement in its 5x5
// search region and sums the DPM score.
//
// For part p at displacement (dx,dy) the value is
//   PartScore_p(dx,dy) - (a1*dx^2 + a2*dx + a3*dy^2 + a4*dy)
// and the DPM score is RootScore + sum_p max over (dx,dy) of that value, as
// the paper's score formula states. The paper says only that a coarse-to-fine
// search speeds this up; this design's search is: 9 coarse steps over the
// grid {-2,0,2}x{-2,0,2}, then 4 fine steps at the horizontal and vertical
// neighbours of each part's best coarse point (a neighbour outside -2..2 is
// clamped, which re-evaluates a visited point). That is 13 evaluations
// instead of 25. Ties keep the earlier point.
//
// Each step starts all 8 part engines together (pe_start, per-part pe_dx and
// pe_dy) and waits until every engine has pulsed pe_done. Interface: start
// with root_score; done pulses with total and the chosen displacements.
// Coefficients are 8-bit signed, packed {a4,a3,a2,a1} per part.
module deform
  import dpm_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  score_t                    root_score,
  input  logic [NPARTS-1:0][31:0]   coef,
  output logic                      pe_start,
  output disp_t                     pe_dx [NPARTS],
  output disp_t                     pe_dy [NPARTS],
  input  logic [NPARTS-1:0]         pe_done,
  input  score_t                    pe_score [NPARTS],
  output logic                      busy,
  output logic                      done,
  output score_t                    total,
  output logic [NPARTS-1:0][2:0]    best_dx,
  output logic [NPARTS-1:0][2:0]    best_dy
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT, S_SUM} state_e;
  state_e            st;
  logic [3:0]        stp;
  logic [NPARTS-1:0] got;
  score_t            root_r;
  score_t            best [NPARTS];
  disp_t             cx [NPARTS], cy [NPARTS];   // best coarse point

  function automatic disp_t clamp2(logic signed [3:0] v);
    if (v > 4'sd2)  return 3'sd2;
    if (v < -4'sd2) return -3'sd2;
    return disp_t'(v);
  endfunction

  // displacement of step stp for part p
  always_comb begin
    for (int p = 0; p < NPARTS; p++) begin
      if (stp < 4'd9) begin
        pe_dx[p] = disp_t'(3'(stp % 4'd3) * 3'd2) - 3'sd2;
        pe_dy[p] = disp_t'(3'(stp / 4'd3) * 3'd2) - 3'sd2;
      end else begin
        case (stp)
          4'd9:    begin pe_dx[p] = clamp2(4'(cx[p]) + 4'sd1); pe_dy[p] = cy[p]; end
          4'd10:   begin pe_dx[p] = clamp2(4'(cx[p]) - 4'sd1); pe_dy[p] = cy[p]; end
          4'd11:   begin pe_dx[p] = cx[p]; pe_dy[p] = clamp2(4'(cy[p]) + 4'sd1); end
          default: begin pe_dx[p] = cx[p]; pe_dy[p] = clamp2(4'(cy[p]) - 4'sd1); end
        endcase
      end
    end
  end

  // value of the finished evaluation: score minus deformation cost
  function automatic score_t val(score_t s, disp_t dx, disp_t dy, logic [31:0] c);
    score_t ddx, ddy;
    ddx = score_t'(dx);
    ddy = score_t'(dy);
    return s - (score_t'($signed(c[7:0]))   * ddx * ddx
              + score_t'($signed(c[15:8]))  * ddx
              + score_t'($signed(c[23:16])) * ddy * ddy
              + score_t'($signed(c[31:24])) * ddy);
  endfunction

  assign pe_start = (st == S_ISSUE);
  assign busy     = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; stp <= '0; got <= '0; root_r <= '0; done <= 1'b0; total <= '0;
      best_dx <= '0; best_dy <= '0;
      for (int p = 0; p < NPARTS; p++) begin
        best[p] <= '0; cx[p] <= '0; cy[p] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          root_r <= root_score;
          stp    <= '0;
          st     <= S_ISSUE;
        end
        S_ISSUE: begin
          got <= '0;
          st  <= S_WAIT;
        end
        S_WAIT: begin
          for (int p = 0; p < NPARTS; p++) begin
            if (pe_done[p]) begin
              score_t v;
              v = val(pe_score[p], pe_dx[p], pe_dy[p], coef[p]);
              if (stp == 4'd0 || v > best[p]) begin
                best[p]    <= v;
                best_dx[p] <= pe_dx[p];
                best_dy[p] <= pe_dy[p];
                if (stp < 4'd9) begin
                  cx[p] <= pe_dx[p];
                  cy[p] <= pe_dy[p];
                end
              end
            end
          end
          if ((got | pe_done) == '1) begin
            if (stp == 4'd12) st <= S_SUM;
            else begin
              stp <= stp + 1'b1;
              st  <= S_ISSUE;
            end
          end
          got <= got | pe_done;
        end
        S_SUM: begin
          score_t t;
          t = root_r;
          for (int p = 0; p < NPARTS; p++) t += best[p];
          total <= t;
          done  <= 1'b1;
          st    <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule

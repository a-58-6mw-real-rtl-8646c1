// hog_normalize: turns the 13 raw sums of a cell into the 13-D HOG feature.
//
// The normalizer N is the cell's total gradient energy (the sum of its 9 bin
// sums). A restoring divider computes R = floor(2^24 / (N+1)) in 25 cycles;
// then every raw value r becomes min(1023, (r*R) >> 14), i.e. r/N scaled to
// 0..1023 (a nonnegative 11-bit feature). The paper gives the 13-D 11-bit
// feature and names a normalize stage; the per-cell L1 rule is this design's
// own choice.
//
// Interface: valid/ready streams; one cell is accepted, divided
// (25 cycles) and presented, so a cell takes 27 cycles. Position and last mark pass through.
module hog_normalize
  import dpm_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  rawvec_t       in_raw,
  input  logic [CW-1:0] in_x,
  input  logic [CW-1:0] in_y,
  input  logic          in_last,
  output logic          out_valid,
  input  logic          out_ready,
  output fbeat_t        out,
  output logic          idle
);
  typedef enum logic [1:0] {S_IDLE, S_DIV, S_OUT} state_e;
  state_e        st;
  rawvec_t       raw;
  logic [CW-1:0] x_r, y_r;
  logic          last_r;
  logic [4:0]    cnt;
  logic [16:0]   den;     // N+1
  logic [17:0]   rem;
  logic [24:0]   quo;
  logic [17:0]   rem_sh;
  logic [16:0]   nsum;

  always_comb begin
    nsum = '0;
    for (int k = 0; k < NBINS; k++) nsum += 17'(in_raw[k]);
  end

  assign in_ready  = (st == S_IDLE);
  assign out_valid = (st == S_OUT);
  assign idle      = (st == S_IDLE);

  // one restoring-division step: dividend is 1 followed by 24 zeros
  assign rem_sh = {rem[16:0], (cnt == 5'd24)};

  always_comb begin
    out.x    = x_r;
    out.y    = y_r;
    out.last = last_r;
    for (int k = 0; k < NDIM; k++) begin
      logic [39:0] p;
      p = 40'(raw[k]) * 40'(quo);
      p = p >> 14;
      out.f[k] = (p > 40'd1023) ? fe_t'(1023) : fe_t'(p[10:0]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; raw <= '0; x_r <= '0; y_r <= '0; last_r <= 1'b0;
      cnt <= '0; den <= '0; rem <= '0; quo <= '0;
    end else begin
      case (st)
        S_IDLE: if (in_valid) begin
          raw <= in_raw; x_r <= in_x; y_r <= in_y; last_r <= in_last;
          den <= nsum + 17'd1;
          rem <= '0; quo <= '0; cnt <= 5'd24;
          st  <= S_DIV;
        end
        S_DIV: begin
          // quotient bit for 2^(cnt-1)
          if (rem_sh >= {1'b0, den}) begin
            rem <= rem_sh - {1'b0, den};
            quo <= {quo[23:0], 1'b1};
          end else begin
            rem <= rem_sh;
            quo <= {quo[23:0], 1'b0};
          end
          cnt <= cnt - 1'b1;
          if (cnt == 5'd0) st <= S_OUT;
        end
        S_OUT: if (out_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule

// sync_fifo: small synchronous first-in first-out queue (helper).
//
// DEPTH entries of W bits, valid/ready on both sides, data shown at the head
// while out_valid is high. Registered array with read and write pointers.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic         empty
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [AW:0]   cnt;

  assign in_ready  = (cnt != (AW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign empty     = (cnt == '0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (out_valid && out_ready) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(in_valid && in_ready) - (AW+1)'(out_valid && out_ready);
    end
  end
endmodule

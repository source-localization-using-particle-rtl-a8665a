// sampling_block: propagates one particle through the motion model.
//
// X_t = X_{t-1} + PRN_x * std and Y_t = Y_{t-1} + PRN_y * std. PRN_x and
// PRN_y are taken as signed Q1.15 numbers (uniform in [-1,1) when they come
// from the LFSR), std is an unsigned Q8.8 number in position units, and the
// product is rounded down to Q8.8 before it is added. The sums saturate at
// the coordinate range. The update rule follows the design description; the
// number formats, the uniform noise and the saturation are this design's
// choices.
//
// Timing: one register stage; out_valid/x_out follow in_valid/x_in by one
// cycle. One particle per cycle.
module sampling_block
  import pf_pkg::*;
#(
  parameter logic [15:0] STD = 16'd256   // 1.0 position unit
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  particle_t x_in,
  input  logic [15:0] prn_x,
  input  logic [15:0] prn_y,
  output logic      out_valid,
  output particle_t x_out
);
  logic signed [32:0] px, py;        // Q1.15 * Q8.8 = Q9.23
  logic signed [DW+1:0] dx, dy, sx, sy;

  always_comb begin
    px = $signed(prn_x) * $signed({1'b0, STD});
    py = $signed(prn_y) * $signed({1'b0, STD});
    dx = (DW+2)'(px >>> 15);
    dy = (DW+2)'(py >>> 15);
    sx = $signed({{2{x_in.x[DW-1]}}, x_in.x}) + dx;
    sy = $signed({{2{x_in.y[DW-1]}}, x_in.y}) + dy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      x_out     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        x_out.x <= sat_coord(sx);
        x_out.y <= sat_coord(sy);
      end
    end
  end

endmodule

// cordic_atan2: pipelined four-quadrant arctangent (vectoring CORDIC).
//
// Computes theta = atan2(dy, dx) in [0, 2*pi) as a 12-bit angle where 4096 is
// one full turn. A first stage moves the vector into the right half plane
// (adding half a turn when dx < 0); ITER micro-rotation stages then drive y to
// zero, adding or subtracting atan(2^-i) to the angle accumulator. The angle
// is carried with 16 bits (65536 = one turn) and rounded to 12 bits at the
// output. The vector is scaled up by 2^G (G = 3 guard bits) to limit the
// rounding of the shifts. The CORDIC gain only scales x, which is not used.
//
// This module provides the function of the vendor CORDIC core named in the
// design description; its pipeline and widths are this design's choices.
//
// Interface: in_valid/dx/dy with a tag of TW bits that travels alongside.
// Timing: fully pipelined, one input per cycle, latency ITER + 1 cycles.
module cordic_atan2 #(
  parameter int unsigned IN_W = 17,
  parameter int unsigned ITER = 14,
  parameter int unsigned TW   = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] dx,
  input  logic signed [IN_W-1:0] dy,
  input  logic [TW-1:0]          tag_in,
  output logic                   out_valid,
  output logic [11:0]            theta,
  output logic [TW-1:0]          tag_out
);
  localparam int unsigned G  = 3;            // guard bits below the input LSB
  localparam int unsigned XW = IN_W + 3 + G;

  // atan(2^-i) in units of 2^-16 turn: round(atan(2^-i) / (2*pi) * 65536).
  localparam logic [15:0] ATAN [16] = '{
    16'd8192, 16'd4836, 16'd2555, 16'd1297, 16'd651, 16'd326, 16'd163, 16'd81,
    16'd41,   16'd20,   16'd10,   16'd5,    16'd3,   16'd1,   16'd1,   16'd0
  };

  logic signed [XW-1:0] xs [ITER+1];
  logic signed [XW-1:0] ys [ITER+1];
  logic [15:0]          zs [ITER+1];
  logic                 vs [ITER+1];
  logic [TW-1:0]        ts [ITER+1];

  // Stage 0: quadrant pre-rotation.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vs[0] <= 1'b0;
      xs[0] <= '0;
      ys[0] <= '0;
      zs[0] <= '0;
      ts[0] <= '0;
    end else begin
      vs[0] <= in_valid;
      ts[0] <= tag_in;
      if (dx < 0) begin
        xs[0] <= -(XW'(dx) <<< G);
        ys[0] <= -(XW'(dy) <<< G);
        zs[0] <= 16'd32768;
      end else begin
        xs[0] <= XW'(dx) <<< G;
        ys[0] <= XW'(dy) <<< G;
        zs[0] <= 16'd0;
      end
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vs[i+1] <= 1'b0;
        xs[i+1] <= '0;
        ys[i+1] <= '0;
        zs[i+1] <= '0;
        ts[i+1] <= '0;
      end else begin
        vs[i+1] <= vs[i];
        ts[i+1] <= ts[i];
        if (ys[i] >= 0) begin
          xs[i+1] <= xs[i] + (ys[i] >>> i);
          ys[i+1] <= ys[i] - (xs[i] >>> i);
          zs[i+1] <= zs[i] + ATAN[i];
        end else begin
          xs[i+1] <= xs[i] - (ys[i] >>> i);
          ys[i+1] <= ys[i] + (xs[i] >>> i);
          zs[i+1] <= zs[i] - ATAN[i];
        end
      end
    end
  end

  logic [15:0] z_round;
  assign z_round   = zs[ITER] + 16'd8;
  assign theta     = z_round[15:4];
  assign out_valid = vs[ITER];
  assign tag_out   = ts[ITER];

endmodule

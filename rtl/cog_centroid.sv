// cog_centroid: centre-of-gravity (CoG) slope of one subaperture.
//
// Input: the P*P pixels I[r][c] of a subaperture in row-major order.
// Output: the spot's offset from the subaperture centre, in pixels, as signed
// fixed point with FRAC_BITS = 8 fractional bits:
//
//   x = sum I[r][c]*(c - (P-1)/2) / sum I[r][c]
//   y = sum I[r][c]*(r - (P-1)/2) / sum I[r][c]
//
// The offsets are formed with doubled coordinates 2c-(P-1), which are whole
// numbers, and the denominator is doubled to match. Each magnitude is divided
// by repeated subtraction (restoring_divider), truncated toward zero, and the
// sign put back. An all-zero subaperture gives x = y = 0. The unit is purely
// combinational and meant to settle within one slow-clock cycle.
// CoG and its 8 fractional bits are the design's; taking the slope relative to
// the subaperture centre, the truncation and the zero-flux rule are this
// implementation's choices.
module cog_centroid
  import wpu_pkg::*;
#(
  parameter int unsigned P = DEF_P
) (
  input  pixel_t pix [P*P],
  output slope_t x_slope,
  output slope_t y_slope
);

  localparam int unsigned SUM_W = PIX_W + $clog2(P * P) + 1;            // 2*sum I
  localparam int unsigned NUM_W = PIX_W + $clog2(P * P) + $clog2(P) + 1; // |sum I*coord|
  localparam int unsigned DIV_W = NUM_W + FRAC_BITS;

  logic [SUM_W-1:0]       den;
  logic signed [NUM_W:0]  num_x, num_y;
  logic [NUM_W-1:0]       mag_x, mag_y;
  logic [DIV_W-1:0]       q_x, q_y;
  logic [SUM_W-1:0]       rem_x, rem_y;

  always_comb begin
    den   = '0;
    num_x = '0;
    num_y = '0;
    for (int r = 0; r < P; r++) begin
      for (int c = 0; c < P; c++) begin
        den   = den + SUM_W'(pix[r * P + c]);
        num_x = num_x + (NUM_W+1)'($signed({1'b0, (NUM_W)'(pix[r * P + c])}) * (2 * c - (int'(P) - 1)));
        num_y = num_y + (NUM_W+1)'($signed({1'b0, (NUM_W)'(pix[r * P + c])}) * (2 * r - (int'(P) - 1)));
      end
    end
    den   = den << 1;
    mag_x = num_x[NUM_W] ? NUM_W'(-num_x) : NUM_W'(num_x);
    mag_y = num_y[NUM_W] ? NUM_W'(-num_y) : NUM_W'(num_y);
  end

  restoring_divider #(.DW(DIV_W), .VW(SUM_W)) u_div_x (
    .dividend  ({mag_x, FRAC_BITS'(0)}),
    .divisor   (den),
    .quotient  (q_x),
    .remainder (rem_x)
  );

  restoring_divider #(.DW(DIV_W), .VW(SUM_W)) u_div_y (
    .dividend  ({mag_y, FRAC_BITS'(0)}),
    .divisor   (den),
    .quotient  (q_y),
    .remainder (rem_y)
  );

  // |offset| <= (P-1)/2 pixels, so the quotient fits in SLOPE_W-1 bits.
  always_comb begin
    if (den == '0) begin
      x_slope = '0;
      y_slope = '0;
    end else begin
      x_slope = num_x[NUM_W] ? -slope_t'(q_x) : slope_t'(q_x);
      y_slope = num_y[NUM_W] ? -slope_t'(q_y) : slope_t'(q_y);
    end
  end

endmodule

// sobel_threshold: Sobel post-processing, squared magnitude and threshold.
//
// Squares the two gradient components and adds them (G = Gx^2 + Gy^2); the
// square root is skipped and the threshold is set for the squared value
// instead. The pixel is an edge ('1') when G is strictly greater than
// THRESHOLD (22500, i.e. a gradient magnitude of 150), otherwise '0'.
// Purely combinational; the Sobel filter registers the result.
// Gx and Gy of 8-bit pixels lie in -1020..1020, so 11 signed bits suffice and
// G fits in 21 bits.
module sobel_threshold #(
  parameter int unsigned THRESHOLD = lane_pkg::SOBEL_THRESHOLD
) (
  input  logic signed [10:0] gx,
  input  logic signed [10:0] gy,
  output logic        [20:0] mag_sq,
  output logic               edge_bit
);
  logic signed [21:0] gx2, gy2;

  always_comb begin
    gx2      = gx * gx;
    gy2      = gy * gy;
    mag_sq   = 21'(gx2 + gy2);
    edge_bit = (mag_sq > 21'(THRESHOLD));
  end

endmodule

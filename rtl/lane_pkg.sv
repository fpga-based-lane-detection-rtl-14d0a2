// lane_pkg: constants and types shared by the lane-detection pipeline and
// the I2C-based control units.
//
// The frame size (416 x 416), the squared-gradient threshold (22500) and the
// lane gap threshold (40 pixels) are the numbers the design was published
// with. The RGB byte order, the fixed-point gray weights and the I2C sensor
// register defaults are this implementation's choices.
package lane_pkg;

  // Frame geometry
  localparam int unsigned IMG_W = 416;
  localparam int unsigned IMG_H = 416;

  // Sobel post-processing: a pixel is an edge when Gx^2 + Gy^2 > SOBEL_THRESHOLD
  localparam int unsigned SOBEL_THRESHOLD = 22500;

  // Decision block: minimum run of non-edge pixels between two edge clusters
  // for the space between them to count as a lane
  localparam int unsigned PIXEL_GAP_THRESHOLD = 40;

  // Gray conversion weights, Q0.8 (sum = 256):
  // round(0.2989*256)=77, round(0.587*256)=150, round(0.114*256)=29
  localparam logic [7:0] GRAY_WR = 8'd77;
  localparam logic [7:0] GRAY_WG = 8'd150;
  localparam logic [7:0] GRAY_WB = 8'd29;

  // Width of column / row indices and of the decision outputs
  localparam int unsigned COORD_W = 10;
  localparam int unsigned LANE_W  = 4;

  // Result of the decision block for one frame
  typedef struct packed {
    logic [LANE_W-1:0]  number_of_lanes;
    logic [LANE_W-1:0]  current_lane;     // 1-based from the left, 0 = not inside a lane
    logic [COORD_W-1:0] left_boundary;    // column of the edge left of the vehicle
    logic [COORD_W-1:0] right_boundary;   // column of the edge right of the vehicle
  } lane_result_t;

  // 3x3 window of 8-bit pixels: w[row][col], row 0 = top, col 0 = left
  typedef logic [2:0][2:0][7:0] win3x3_t;

endpackage

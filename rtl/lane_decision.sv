// lane_decision: lane identification ("decision") stage.
//
// Reads the binary edge image from the Sobel-to-decision FIFO one pixel per
// cycle while counting its column and row. Along each row, edge pixels form
// clusters (lane markings). Two consecutive edge pixels separated by at
// least GAP_TH non-edge pixels enclose a lane; a smaller gap is treated as
// part of the same marking. For every row the block counts the lanes and
// remembers the lane that contains the vehicle's position, taken to be the
// image column CENTER_COL (camera on the vehicle's axis): its 1-based index
// from the left and the columns of the edge pixels bounding it on the left
// and right.
// Which row is reported is this design's choice: at the end of each frame
// the block outputs the result of the lowest row (nearest the vehicle) in
// which at least one lane was found, or all zeros when no row had one.
//
// Interface: FIFO read port in, the lane_result_t fields out with a one-cycle
// out_valid pulse per frame. The lane count saturates at 15.
// Timing: out_valid rises two cycles after the last pixel of the frame has
// been read from the FIFO (one cycle FIFO read, one cycle output register).
module lane_decision #(
  parameter int unsigned W          = lane_pkg::IMG_W,
  parameter int unsigned H          = lane_pkg::IMG_H,
  parameter int unsigned GAP_TH     = lane_pkg::PIXEL_GAP_THRESHOLD,
  parameter int unsigned CENTER_COL = W / 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  output logic                          in_rd_en,
  input  logic                          in_rd_data,
  input  logic                          in_rd_ack,
  input  logic                          in_empty,
  output logic [lane_pkg::LANE_W-1:0]   number_of_lanes,
  output logic [lane_pkg::LANE_W-1:0]   current_lane,
  output logic [lane_pkg::COORD_W-1:0]  current_lane_left_boundary,
  output logic [lane_pkg::COORD_W-1:0]  current_lane_right_boundary,
  output logic                          decision_out_valid
);
  import lane_pkg::*;

  localparam int unsigned RW = $clog2(H);

  logic [COORD_W-1:0] col;
  logic [RW-1:0]      row;
  logic               have_edge;
  logic [COORD_W-1:0] last_edge;
  lane_result_t       line_res, line_nxt, frame_res;
  logic               frame_found;

  assign in_rd_en = !in_empty;

  logic line_end, frame_end, wide_gap;

  always_comb begin
    line_end  = (col == COORD_W'(W - 1));
    frame_end = line_end && (row == RW'(H - 1));
    wide_gap  = have_edge && ((col - last_edge - 1'b1) >= COORD_W'(GAP_TH));
    line_nxt  = line_res;
    if (in_rd_data && wide_gap) begin
      if (line_res.number_of_lanes != '1)
        line_nxt.number_of_lanes = line_res.number_of_lanes + 1'b1;
      if (last_edge < COORD_W'(CENTER_COL) && col >= COORD_W'(CENTER_COL)) begin
        line_nxt.current_lane   = line_nxt.number_of_lanes;
        line_nxt.left_boundary  = last_edge;
        line_nxt.right_boundary = col;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col <= '0; row <= '0;
      have_edge <= 1'b0; last_edge <= '0;
      line_res <= '0; frame_res <= '0; frame_found <= 1'b0;
      decision_out_valid <= 1'b0;
      number_of_lanes <= '0; current_lane <= '0;
      current_lane_left_boundary <= '0; current_lane_right_boundary <= '0;
    end else begin
      decision_out_valid <= 1'b0;
      if (in_rd_ack) begin
        if (line_end) begin
          col       <= '0;
          have_edge <= 1'b0;
          line_res  <= '0;
          row       <= frame_end ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
          line_res <= line_nxt;
          if (in_rd_data) begin
            have_edge <= 1'b1;
            last_edge <= col;
          end
        end
        if (frame_end) begin
          decision_out_valid <= 1'b1;
          if (line_nxt.number_of_lanes != '0) begin
            {number_of_lanes, current_lane, current_lane_left_boundary,
             current_lane_right_boundary} <= line_nxt;
          end else if (frame_found) begin
            {number_of_lanes, current_lane, current_lane_left_boundary,
             current_lane_right_boundary} <= frame_res;
          end else begin
            {number_of_lanes, current_lane, current_lane_left_boundary,
             current_lane_right_boundary} <= '0;
          end
          frame_found <= 1'b0;
          frame_res   <= '0;
        end else if (line_end && line_nxt.number_of_lanes != '0) begin
          frame_res   <= line_nxt;
          frame_found <= 1'b1;
        end
      end
    end
  end

endmodule

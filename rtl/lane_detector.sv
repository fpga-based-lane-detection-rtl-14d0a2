// lane_detector: the five-stage lane-detection pipeline.
//
//   AXI4-Stream RGB -> rgb2gray -> avg_filter -> [average-Sobel FIFO]
//   -> sobel_filter (Gx/Gy, Gx^2+Gy^2 > 22500) -> [Sobel-decision FIFO]
//   -> lane_decision -> lane count, current lane, its two boundaries, valid
//
// The two FIFOs decouple the stages: each filter writes into the FIFO after
// it and stops taking pixels when that FIFO is almost full, so back-pressure
// travels to the AXI4-Stream tready. The FIFO status signals are brought out
// for observation. Frames are W x H pixels in raster order with no
// side-band framing (tuser/tlast are not used): the first pixel after reset
// starts a frame and every W*H pixels form one frame.
// Timing: in steady state one pixel per cycle; one result per frame, about
// W*H + 2*(W+6) + W + small cycles after its first pixel.
// Lint may report rst_n as used both synchronously and asynchronously: the
// synchronous use is only the assertions' `disable iff`, not a flip-flop.
module lane_detector #(
  parameter int unsigned W          = lane_pkg::IMG_W,
  parameter int unsigned H          = lane_pkg::IMG_H,
  parameter int unsigned THRESHOLD  = lane_pkg::SOBEL_THRESHOLD,
  parameter int unsigned GAP_TH     = lane_pkg::PIXEL_GAP_THRESHOLD,
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Stream video in
  input  logic [23:0] s_axi_video_tdata,
  input  logic        s_axi_video_tvalid,
  output logic        s_axi_video_tready,
  // LKA-ACC interface
  output logic [lane_pkg::LANE_W-1:0]  number_of_lanes,
  output logic [lane_pkg::LANE_W-1:0]  current_lane,
  output logic [lane_pkg::COORD_W-1:0] current_lane_left_boundary,
  output logic [lane_pkg::COORD_W-1:0] current_lane_right_boundary,
  output logic                         decision_out_valid,
  // FIFO status, for observation
  output logic [$clog2(FIFO_DEPTH+1)-1:0] avr_sobel_fifo_data_count,
  output logic                            avr_sobel_fifo_full,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] decision_sobel_fifo_data_count,
  output logic                            decision_sobel_fifo_full
);

  // RGB -> gray
  logic [7:0] gray_data;
  logic       gray_valid, gray_ready;

  rgb2gray u_rgb2gray (
    .clk, .rst_n,
    .s_axis_tdata  (s_axi_video_tdata),
    .s_axis_tvalid (s_axi_video_tvalid),
    .s_axis_tready (s_axi_video_tready),
    .out_data      (gray_data),
    .out_valid     (gray_valid),
    .out_ready     (gray_ready)
  );

  // Average filter -> average/Sobel FIFO
  logic       avr_sobel_fifo_wr_en, avr_sobel_fifo_wr_ack, avr_sobel_fifo_afull;
  logic [7:0] avr_sobel_fifo_wr_data, avr_sobel_fifo_rd_data;
  logic       avr_sobel_fifo_rd_en, avr_sobel_fifo_rd_ack, avr_sobel_fifo_empty;

  avg_filter #(.W(W), .H(H)) u_avg (
    .clk, .rst_n,
    .in_data     (gray_data),
    .in_valid    (gray_valid),
    .in_ready    (gray_ready),
    .out_wr_en   (avr_sobel_fifo_wr_en),
    .out_wr_data (avr_sobel_fifo_wr_data),
    .out_afull   (avr_sobel_fifo_afull)
  );

  sync_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_avr_sobel_fifo (
    .clk, .rst_n,
    .wr_en       (avr_sobel_fifo_wr_en),
    .wr_data     (avr_sobel_fifo_wr_data),
    .wr_ack      (avr_sobel_fifo_wr_ack),
    .full        (avr_sobel_fifo_full),
    .almost_full (avr_sobel_fifo_afull),
    .rd_en       (avr_sobel_fifo_rd_en),
    .rd_data     (avr_sobel_fifo_rd_data),
    .rd_ack      (avr_sobel_fifo_rd_ack),
    .empty       (avr_sobel_fifo_empty),
    .data_count  (avr_sobel_fifo_data_count)
  );

  // Sobel filter + thresholding -> decision/Sobel FIFO
  logic decision_sobel_fifo_wr_en, decision_sobel_fifo_wr_data, decision_sobel_fifo_wr_ack;
  logic decision_sobel_fifo_afull, decision_sobel_fifo_rd_en, decision_sobel_fifo_rd_data;
  logic decision_sobel_fifo_rd_ack, decision_sobel_fifo_empty;

  sobel_filter #(.W(W), .H(H), .THRESHOLD(THRESHOLD)) u_sobel (
    .clk, .rst_n,
    .in_rd_en    (avr_sobel_fifo_rd_en),
    .in_rd_data  (avr_sobel_fifo_rd_data),
    .in_rd_ack   (avr_sobel_fifo_rd_ack),
    .in_empty    (avr_sobel_fifo_empty),
    .out_wr_en   (decision_sobel_fifo_wr_en),
    .out_wr_data (decision_sobel_fifo_wr_data),
    .out_afull   (decision_sobel_fifo_afull)
  );

  sync_fifo #(.WIDTH(1), .DEPTH(FIFO_DEPTH)) u_decision_sobel_fifo (
    .clk, .rst_n,
    .wr_en       (decision_sobel_fifo_wr_en),
    .wr_data     (decision_sobel_fifo_wr_data),
    .wr_ack      (decision_sobel_fifo_wr_ack),
    .full        (decision_sobel_fifo_full),
    .almost_full (decision_sobel_fifo_afull),
    .rd_en       (decision_sobel_fifo_rd_en),
    .rd_data     (decision_sobel_fifo_rd_data),
    .rd_ack      (decision_sobel_fifo_rd_ack),
    .empty       (decision_sobel_fifo_empty),
    .data_count  (decision_sobel_fifo_data_count)
  );

  lane_decision #(.W(W), .H(H), .GAP_TH(GAP_TH)) u_decision (
    .clk, .rst_n,
    .in_rd_en                    (decision_sobel_fifo_rd_en),
    .in_rd_data                  (decision_sobel_fifo_rd_data),
    .in_rd_ack                   (decision_sobel_fifo_rd_ack),
    .in_empty                    (decision_sobel_fifo_empty),
    .number_of_lanes             (number_of_lanes),
    .current_lane                (current_lane),
    .current_lane_left_boundary  (current_lane_left_boundary),
    .current_lane_right_boundary (current_lane_right_boundary),
    .decision_out_valid          (decision_out_valid)
  );

  // Every write the filters issue must be accepted by their FIFO
  a_avr_no_drop: assert property (@(posedge clk) disable iff (!rst_n)
    avr_sobel_fifo_wr_en |-> !avr_sobel_fifo_full);
  a_dec_no_drop: assert property (@(posedge clk) disable iff (!rst_n)
    decision_sobel_fifo_wr_en |-> !decision_sobel_fifo_full);

endmodule

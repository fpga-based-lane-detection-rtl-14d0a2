// ldv_top: lane-detector vehicle chip, the lane-detection pipeline together
// with the I2C-based light and temperature control units.
//
// The lane detector takes 416 x 416 RGB frames over AXI4-Stream and
// delivers, once per frame, the number of lanes, the index of the lane the
// vehicle is in and that lane's left and right boundary columns to the
// lane-keeping / adaptive cruise control unit (LKA-ACC, outside the chip).
// The light control unit reads an ambient-light sensor and drives the
// headlight ON/OFF and a 12-bit DAC code; the temperature control unit reads
// a temperature sensor and drives the air conditioner on/off, heat/cool and
// a 12-bit DAC code. All three share the system clock and the active-low
// reset; the two control units derive their I2C clocks internally. The
// I2C buses are open-drain: *_oe pulls a line low, *_i is its level.
// Parameters at their defaults give the published configuration
// (416 x 416 frames, threshold 22500, 40-pixel lane gap, 150 MHz clock with
// standard-mode I2C).
// Lint may report rst_n as used both synchronously and asynchronously: that
// comes from the assertions' `disable iff` inside lane_detector and sync_fifo.
module ldv_top #(
  parameter int unsigned W          = lane_pkg::IMG_W,
  parameter int unsigned H          = lane_pkg::IMG_H,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned CLK_DIV    = 376,
  parameter int unsigned POLL_TICKS = 40000
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
  // FIFO status
  output logic [$clog2(FIFO_DEPTH+1)-1:0] avr_sobel_fifo_data_count,
  output logic                            avr_sobel_fifo_full,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] decision_sobel_fifo_data_count,
  output logic                            decision_sobel_fifo_full,
  // Light control unit
  input  logic        ls_on,
  input  logic        ls_int_n,
  input  logic        ls_sda_i,
  output logic        ls_sda_oe,
  output logic        ls_scl_oe,
  output logic [11:0] light_dac_out,
  output logic        light_valid,
  output logic        light_on,
  output logic        light_off,
  output logic        ls_ack_error,
  // Temperature control unit
  input  logic        tcu_en,
  input  logic        ts_sda_i,
  output logic        ts_sda_oe,
  output logic        ts_scl_oe,
  output logic        ac_on_off,
  output logic        ac_data_valid,
  output logic [11:0] ac_control_out,
  output logic        ac_increase_decrease_temp,
  output logic        ts_ack_error
);

  lane_detector #(.W(W), .H(H), .FIFO_DEPTH(FIFO_DEPTH)) u_lane (
    .clk, .rst_n,
    .s_axi_video_tdata, .s_axi_video_tvalid, .s_axi_video_tready,
    .number_of_lanes, .current_lane,
    .current_lane_left_boundary, .current_lane_right_boundary,
    .decision_out_valid,
    .avr_sobel_fifo_data_count, .avr_sobel_fifo_full,
    .decision_sobel_fifo_data_count, .decision_sobel_fifo_full
  );

  light_control_unit #(.CLK_DIV(CLK_DIV), .POLL_TICKS(POLL_TICKS)) u_light (
    .Clk(clk), .rst_n, .LS_ON(ls_on), .INT(ls_int_n),
    .SDA_i(ls_sda_i), .SDA_oe(ls_sda_oe), .SCL_oe(ls_scl_oe),
    .DAC_out(light_dac_out), .valid(light_valid), .ON(light_on), .OFF(light_off),
    .ack_error(ls_ack_error)
  );

  tcu_wrapper #(.CLK_DIV(CLK_DIV), .POLL_TICKS(POLL_TICKS)) u_tcu (
    .CLK(clk), .rst_n, .en(tcu_en),
    .sda_i(ts_sda_i), .sda_oe(ts_sda_oe), .scl_oe(ts_scl_oe),
    .on_off(ac_on_off), .data_valid(ac_data_valid),
    .Control_unit_out(ac_control_out),
    .increase_decrease_temp(ac_increase_decrease_temp),
    .ack_error(ts_ack_error)
  );
endmodule

// tcu_wrapper: temperature control unit.
//
// An I2C controller (on a divided clock) reads the two-byte temperature
// register of a digital temperature sensor every POLL_TICKS controller
// cycles while `en` is high; temp_calc turns the reading into degrees
// Celsius and temp_controller decides on/off, heat/cool and the
// proportional DAC level (Control_unit_out) against the 25 C reference.
// data_valid pulses with every new decision.
// The I2C lines are open-drain (scl_oe/sda_oe pull low, sda_i reads SDA).
// The sensor defaults to a TMP102/LM75-style part at address 0x48 whose
// temperature register is 0x00 and which needs no configuration; these are
// this design's choices. The clock divider is shared with the light unit's
// design.
module tcu_wrapper #(
  parameter int unsigned CLK_DIV    = 376,
  parameter logic [6:0]  DEV_ADDR   = 7'h48,
  parameter logic [7:0]  TEMP_REG   = 8'h00,
  parameter int unsigned POLL_TICKS = 40000
) (
  input  logic        CLK,
  input  logic        rst_n,
  input  logic        en,
  input  logic        sda_i,
  output logic        sda_oe,
  output logic        scl_oe,
  output logic        on_off,
  output logic        data_valid,
  output logic [11:0] Control_unit_out,
  output logic        increase_decrease_temp,
  output logic        ack_error
);
  logic               i2c_clk;
  logic [15:0]        raw;
  logic               raw_valid;
  logic signed [19:0] temperature;
  logic               temp_valid;

  clk_divider #(.DIV(CLK_DIV)) u_div (.clk(CLK), .rst_n, .clk_out(i2c_clk));

  i2c_sensor_master #(
    .DEV_ADDR(DEV_ADDR), .INIT_EN(1'b0), .INIT_REG(8'h00), .INIT_DATA(16'h0000),
    .DATA_REG(TEMP_REG), .POLL_TICKS(POLL_TICKS)
  ) u_i2c (
    .clk(i2c_clk), .rst_n, .en, .int_n(1'b1),
    .sda_i, .scl_oe, .sda_oe,
    .p_out(raw), .valid(raw_valid), .ack_error
  );

  temp_calc u_calc (
    .clk(CLK), .rst_n, .raw, .raw_valid_slow(raw_valid), .temperature, .temp_valid
  );

  temp_controller u_ctrl (
    .clk(CLK), .rst_n, .temperature, .temp_valid,
    .on_off, .increase_decrease_temp, .Control_unit_out, .data_valid
  );
endmodule

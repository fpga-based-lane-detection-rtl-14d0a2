// light_control_unit: automatic light control.
//
// A clock divider derives the I2C controller clock from the system clock;
// the controller configures a digital light sensor and then reads its
// 16-bit brightness register periodically (and when the sensor raises its
// interrupt INT, active low); the comparator turns each reading into a
// 12-bit DAC code and an ON/OFF decision. LS_ON enables the controller.
// The I2C lines are open-drain: SCL_oe/SDA_oe pull SCL/SDA low, SDA_i is
// the level seen on SDA. The I/O pads are outside this block.
// The sensor's address and registers default to an OPT3001-style ambient
// light sensor (address 0x44, configuration register 0x01, result register
// 0x00); the published design does not name its sensor.
module light_control_unit #(
  parameter int unsigned CLK_DIV    = 376,
  parameter logic [6:0]  DEV_ADDR   = 7'h44,
  parameter logic [7:0]  CFG_REG    = 8'h01,
  parameter logic [15:0] CFG_DATA   = 16'hC410,
  parameter logic [7:0]  DATA_REG   = 8'h00,
  parameter int unsigned POLL_TICKS = 40000,
  parameter logic [11:0] THRESHOLD  = 12'd256
) (
  input  logic        Clk,
  input  logic        rst_n,
  input  logic        LS_ON,
  input  logic        INT,
  input  logic        SDA_i,
  output logic        SDA_oe,
  output logic        SCL_oe,
  output logic [11:0] DAC_out,
  output logic        valid,
  output logic        ON,
  output logic        OFF,
  output logic        ack_error
);
  logic        i2c_clk;
  logic [15:0] p_out;
  logic        p_valid;

  clk_divider #(.DIV(CLK_DIV)) u_div (.clk(Clk), .rst_n, .clk_out(i2c_clk));

  i2c_sensor_master #(
    .DEV_ADDR(DEV_ADDR), .INIT_EN(1'b1), .INIT_REG(CFG_REG), .INIT_DATA(CFG_DATA),
    .DATA_REG(DATA_REG), .POLL_TICKS(POLL_TICKS)
  ) u_i2c (
    .clk(i2c_clk), .rst_n, .en(LS_ON), .int_n(INT),
    .sda_i(SDA_i), .scl_oe(SCL_oe), .sda_oe(SDA_oe),
    .p_out, .valid(p_valid), .ack_error
  );

  light_comparator #(.THRESHOLD(THRESHOLD)) u_cmp (
    .clk(Clk), .rst_n, .p_out, .valid_slow(p_valid),
    .DAC_out, .valid, .ON, .OFF
  );
endmodule

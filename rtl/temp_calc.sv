// temp_calc: converts the raw temperature register to degrees Celsius.
//
// Implements Temperature = sensor_out * resolution_of_sensor. The two bytes
// read from the sensor hold a left-justified two's-complement reading of
// DATA_BITS bits (12 by default, as in TMP102/LM75-style sensors);
// sensor_out is that field and RESOLUTION is the sensor's step in degrees
// Celsius as an unsigned Q0.8 number (16 = 0.0625 C). The result is a
// signed Q12.8 temperature (8 fractional bits), so 25.0 C reads 6400.
// The register layout and the resolution are this design's defaults; the
// published design gives only the formula.
// Timing: the new temperature and temp_valid appear one system cycle after
// the synchronised strobe, i.e. three system clock edges after the edge that first samples
// raw_valid_slow high.
module temp_calc #(
  parameter int unsigned DATA_BITS  = 12,
  parameter logic [7:0]  RESOLUTION = 8'd16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [15:0]        raw,
  input  logic               raw_valid_slow,
  output logic signed [19:0] temperature,
  output logic               temp_valid
);
  logic strobe;
  logic signed [DATA_BITS-1:0] sensor_out;
  logic signed [19:0]          product;

  slow_valid_sync u_sync (.clk, .rst_n, .valid_slow(raw_valid_slow), .strobe);

  always_comb begin
    sensor_out = raw[15 -: DATA_BITS];
    product    = 20'(sensor_out * $signed({1'b0, RESOLUTION}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      temperature <= '0;
      temp_valid  <= 1'b0;
    end else begin
      temp_valid <= strobe;
      if (strobe) temperature <= product;
    end
  end
endmodule

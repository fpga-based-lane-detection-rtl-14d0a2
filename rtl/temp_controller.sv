// temp_controller: air-conditioner control from the measured temperature.
//
// Compares each new temperature (signed Q12.8 degrees Celsius) with the
// reference REF_TEMP (25.0 C). If the absolute deviation exceeds
// NOISE_TH the unit switches the air conditioner on (on_off = 1), selects
// heating when the room is colder than the reference
// (increase_decrease_temp = 1) or cooling when it is warmer (0), and drives
// Control_unit_out, a 12-bit DAC code proportional to the deviation
// (1 LSB per 1/256 C, saturating at 4095, i.e. at 16 C). Within the noise
// band the unit is off and the DAC code is 0.
// The 25 C reference follows the published design; the noise band
// (1.0 C), the direction encoding and the DAC gain are this design's
// choices.
// Timing: outputs and data_valid update one cycle after temp_valid.
module temp_controller #(
  parameter logic signed [19:0] REF_TEMP = 20'sd6400,   // 25.0 C in Q12.8
  parameter logic        [19:0] NOISE_TH = 20'd256      // 1.0 C
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic signed [19:0] temperature,
  input  logic               temp_valid,
  output logic               on_off,
  output logic               increase_decrease_temp,
  output logic [11:0]        Control_unit_out,
  output logic               data_valid
);
  logic signed [20:0] dev;
  logic        [20:0] mag;

  always_comb begin
    dev = 21'(temperature) - 21'(REF_TEMP);
    mag = dev[20] ? 21'(-dev) : 21'(dev);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      on_off                 <= 1'b0;
      increase_decrease_temp <= 1'b0;
      Control_unit_out       <= '0;
      data_valid             <= 1'b0;
    end else begin
      data_valid <= temp_valid;
      if (temp_valid) begin
        if (mag > 21'(NOISE_TH)) begin
          on_off                 <= 1'b1;
          increase_decrease_temp <= dev[20];
          Control_unit_out       <= (mag > 21'd4095) ? 12'hFFF : mag[11:0];
        end else begin
          on_off                 <= 1'b0;
          increase_decrease_temp <= 1'b0;
          Control_unit_out       <= '0;
        end
      end
    end
  end
endmodule

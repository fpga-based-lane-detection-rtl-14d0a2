// light_comparator: decides whether the vehicle lights must be switched on.
//
// When the I2C controller flags a new 16-bit brightness word, the word is
// scaled linearly to the 12-bit DAC range (the 12 most significant bits are
// kept, i.e. a division by 16) and compared with THRESHOLD. Below the
// threshold the light is switched ON, otherwise OFF; ON and OFF are
// complementary levels held until the next reading. DAC_out carries the
// scaled brightness code. valid pulses for one system cycle with each new
// result.
// The threshold value is this design's default; the published work only
// says that it is predefined.
// Timing: `valid_slow` comes from the slower I2C clock; the result appears
// three system clock edges after the edge that first samples it high (synchroniser plus one register).
module light_comparator #(
  parameter logic [11:0] THRESHOLD = 12'd256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] p_out,
  input  logic        valid_slow,
  output logic [11:0] DAC_out,
  output logic        valid,
  output logic        ON,
  output logic        OFF
);
  logic strobe;

  slow_valid_sync u_sync (.clk, .rst_n, .valid_slow, .strobe);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      DAC_out <= '0;
      valid   <= 1'b0;
      ON      <= 1'b0;
      OFF     <= 1'b1;
    end else begin
      valid <= strobe;
      if (strobe) begin
        DAC_out <= p_out[15:4];
        ON      <= (p_out[15:4] < THRESHOLD);
        OFF     <= !(p_out[15:4] < THRESHOLD);
      end
    end
  end
endmodule

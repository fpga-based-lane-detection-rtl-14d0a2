// clk_divider: parameterised clock divider for the I2C controllers.
//
// Produces clk_out = clk / DIV with a 50 % duty cycle by toggling a flip-flop
// every DIV/2 input cycles (DIV must be even and at least 2). The I2C
// controller spends four clk_out periods per SCL period, so the default
// DIV = 376 turns a 150 MHz system clock into a 398.9 kHz controller clock
// and a 99.7 kHz SCL (standard-mode I2C). The divided clock is used as a
// clock, as in the published architecture; clk_out is low during reset.
module clk_divider #(
  parameter int unsigned DIV = 376
) (
  input  logic clk,
  input  logic rst_n,
  output logic clk_out
);
  localparam int unsigned HALF = DIV / 2;
  localparam int unsigned CW   = (HALF > 1) ? $clog2(HALF) : 1;

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      clk_out <= 1'b0;
    end else if (cnt == CW'(HALF - 1)) begin
      cnt     <= '0;
      clk_out <= !clk_out;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  initial assert (DIV >= 2 && DIV % 2 == 0) else $error("clk_divider: DIV must be even and >= 2");
endmodule

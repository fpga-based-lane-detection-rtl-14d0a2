// slow_valid_sync: brings a valid flag from the divided I2C controller clock
// into the system clock domain.
//
// The flag is passed through two flip-flops and its rising edge gives a
// one-cycle pulse `strobe` in the system clock domain. The data that goes
// with the flag is held by the controller until its next transaction, many
// system cycles later, so it can be sampled on the strobe without a
// synchroniser of its own. Latency: strobe is high in the cycle after the
// second system clock edge that samples the flag high.
module slow_valid_sync (
  input  logic clk,
  input  logic rst_n,
  input  logic valid_slow,
  output logic strobe
);
  logic [2:0] sync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync <= '0;
    else        sync <= {sync[1:0], valid_slow};
  end

  assign strobe = sync[1] && !sync[2];
endmodule

// tb_tcu_wrapper: the temperature control unit against a behavioural
// temperature sensor at address 0x48 returning 12-bit readings in
// 0.0625 C steps. A sequence of room temperatures (cold, comfortable,
// hot, extreme) must produce, for every completed read, the on/off,
// heat/cool and DAC decisions of the control law, and nothing while en is
// low. Reduced clock divider and poll period keep the run short.
module tb_tcu_wrapper;
  localparam int DIV = 4, POLL = 60;
  logic clk = 1'b0, fclk = 1'b0, rst_n = 1'b1;   // dropped at 1 ns: asynchronous reset from time zero
  logic en, sda_oe, scl_oe, s_pull, on_off, data_valid, incdec, ack_error;
  logic [11:0] ctrl;
  logic [15:0] reading;
  logic [7:0] ptr;
  logic [15:0] cfg;
  int ncfg, nrd, nst, nst0;
  wire scl = !scl_oe;
  wire sda = !(sda_oe || s_pull);
  int checks = 0, failures = 0, nvalid = 0, n_heat = 0, n_cool = 0, n_off = 0;

  tcu_wrapper #(.CLK_DIV(DIV), .POLL_TICKS(POLL)) dut (
    .CLK(clk), .rst_n, .en, .sda_i(sda), .sda_oe, .scl_oe, .on_off, .data_valid,
    .Control_unit_out(ctrl), .increase_decrease_temp(incdec), .ack_error);

  i2c_slave_model #(.ADDR(7'h48)) sensor (
    .clk(fclk), .scl, .sda, .sda_pull(s_pull), .rd_value(reading), .ptr, .cfg_value(cfg),
    .n_cfg_writes(ncfg), .n_reads(nrd), .n_starts(nst));

  always #5 clk = !clk;
  always #1 fclk = !fclk;

  logic [15:0] sent[$];
  int nrd_prev = 0;
  always @(posedge clk) begin
    if (nrd != nrd_prev) begin sent.push_back(reading); nrd_prev = nrd; end
    if (rst_n && data_valid) begin
      logic [15:0] r;
      real t;
      int dev, mag;
      bit e_on;
      nvalid++;
      r = sent.pop_front();
      t = real'($signed(r[15:4])) * 0.0625;         // degrees C
      dev = int'((t - 25.0) * 256.0);
      mag = dev < 0 ? -dev : dev;
      e_on = mag > 256;
      checks++;
      if (on_off != e_on || incdec != (e_on && dev < 0) ||
          ctrl != (!e_on ? 0 : (mag > 4095 ? 4095 : mag))) begin
        failures++;
        $display("ERROR: %f C -> on=%b inc=%b ctrl=%0d", t, on_off, incdec, ctrl);
      end
      if (!e_on) n_off++; else if (dev < 0) n_heat++; else n_cool++;
    end
  end

  function automatic logic [15:0] deg(input real c);
    return {12'($rtoi(c / 0.0625)), 4'h0};
  endfunction

  initial #1 rst_n = 1'b0;

  initial begin
    real temps[8] = '{25.0, 18.5, 25.9, 26.0625, 31.0, -5.0, 45.0, 24.0};
    en = 0; reading = deg(25.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    nst0 = nst;
    repeat (100) @(posedge clk);
    checks++;
    if (nst != nst0) begin failures++; $display("ERROR: bus traffic while disabled"); end
    en = 1;
    foreach (temps[i]) begin
      reading = deg(temps[i]);
      wait (nvalid == i + 1);
    end
    en = 0;
    repeat (1000) @(posedge clk);
    checks++;
    if (nvalid != 8 || ack_error) begin failures++; $display("ERROR: %0d results, ack_error=%b", nvalid, ack_error); end
    checks++;
    if (n_heat == 0 || n_cool == 0 || n_off == 0) begin failures++; $display("ERROR: a case was not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

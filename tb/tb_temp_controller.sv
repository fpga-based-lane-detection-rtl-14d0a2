// tb_temp_controller: temperatures around 25 C. Inside the 1 C noise band
// the unit must be off with a zero DAC code; outside it, on, heating when
// colder and cooling when warmer, with a DAC code equal to the deviation in
// 1/256 C saturated at 4095. Outputs follow temp_valid by one cycle.
module tb_temp_controller;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [19:0] temperature;
  logic temp_valid, on_off, incdec, data_valid;
  logic [11:0] ctrl;
  int checks = 0, failures = 0, n_heat = 0, n_cool = 0, n_off = 0, n_sat = 0;

  temp_controller dut (.clk, .rst_n, .temperature, .temp_valid, .on_off,
                       .increase_decrease_temp(incdec), .Control_unit_out(ctrl), .data_valid);

  always #5 clk = !clk;

  task automatic apply(input int t_q8);
    int dev, mag, e_ctrl;
    bit e_on, e_inc;
    @(negedge clk);
    temperature = 20'(t_q8); temp_valid = 1;
    @(negedge clk);
    temp_valid = 0;
    dev = t_q8 - 25 * 256;
    mag = dev < 0 ? -dev : dev;
    e_on = mag > 256;
    e_inc = e_on && dev < 0;
    e_ctrl = !e_on ? 0 : (mag > 4095 ? 4095 : mag);
    checks++;
    if (!data_valid || on_off != e_on || incdec != e_inc || ctrl != e_ctrl) begin
      failures++;
      $display("ERROR: T=%0d/256 -> valid=%b on=%b inc=%b ctrl=%0d, expected %b %b %0d",
               t_q8, data_valid, on_off, incdec, ctrl, e_on, e_inc, e_ctrl);
    end
    if (!e_on) n_off++; else if (e_inc) n_heat++; else n_cool++;
    if (e_ctrl == 4095) n_sat++;
    @(negedge clk);
    checks++;
    if (data_valid) begin failures++; $display("ERROR: data_valid longer than one cycle"); end
  endtask

  initial begin
    temperature = 0; temp_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    apply(6400); apply(6656); apply(6657); apply(6144); apply(6143);
    apply(0); apply(-10 * 256); apply(60 * 256); apply(41 * 256 - 1);
    for (int i = 0; i < 500; i++) apply(int'($urandom % (40 * 256)) - 5 * 256);
    checks++;
    if (n_heat == 0 || n_cool == 0 || n_off == 0 || n_sat == 0) begin
      failures++; $display("ERROR: a case was not reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

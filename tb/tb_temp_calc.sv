// tb_temp_calc: raw 12-bit two's-complement readings (left-justified in two
// bytes) are converted with a resolution of 0.0625 C; the Q12.8 result must
// equal reading * 0.0625 * 256, including negative temperatures, and come
// three clock edges after the valid flag rises.
module tb_temp_calc;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [15:0] raw;
  logic raw_valid_slow, temp_valid;
  logic signed [19:0] temperature;
  int checks = 0, failures = 0, cycle = 0, t_flag = 0, nvalid = 0;
  int exp_q8;

  temp_calc dut (.clk, .rst_n, .raw, .raw_valid_slow, .temperature, .temp_valid);

  always #5 clk = !clk;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n && temp_valid) begin
    nvalid++;
    checks++;
    if (temperature != exp_q8 || cycle - t_flag != 3) begin
      failures++;
      $display("ERROR: raw %h -> %0d (expected %0d), latency %0d", raw, temperature, exp_q8, cycle - t_flag);
    end
  end

  // degrees C * 256 from a reading in sixteenths of a degree
  task automatic send_deg16(input int deg16);
    @(negedge clk);
    raw = 16'(deg16 << 4);
    exp_q8 = int'(real'(deg16) * 0.0625 * 256.0);
    raw_valid_slow = 1; t_flag = cycle;
    repeat (6) @(negedge clk);
    raw_valid_slow = 0;
    repeat (6) @(negedge clk);
  endtask

  initial begin
    raw = 0; raw_valid_slow = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_deg16(400);    // 25.0 C
    send_deg16(0);
    send_deg16(-400);   // -25.0 C
    send_deg16(2047);   // 127.9375 C
    send_deg16(-2048);  // -128 C
    for (int i = 0; i < 100; i++) send_deg16(int'($urandom % 4096) - 2048);
    checks++;
    if (nvalid != 105) begin failures++; $display("ERROR: %0d results", nvalid); end
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

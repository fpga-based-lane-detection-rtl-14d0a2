// tb_sobel_threshold: the squared magnitude and the strict comparison with
// 22500 on the corner cases around the threshold and on random gradients
// over the full range of 8-bit Sobel outputs.
module tb_sobel_threshold;
  logic signed [10:0] gx, gy;
  logic [20:0] mag_sq;
  logic edge_bit;
  int checks = 0, failures = 0;

  sobel_threshold dut (.gx, .gy, .mag_sq, .edge_bit);

  task automatic try(input int x, input int y);
    int m = x * x + y * y;
    gx = 11'(x); gy = 11'(y);
    #1;
    checks++;
    if (mag_sq != m || edge_bit != (m > 22500)) begin
      failures++;
      $display("ERROR: gx=%0d gy=%0d mag=%0d edge=%0b", x, y, mag_sq, edge_bit);
    end
  endtask

  initial begin
    try(150, 0); try(0, -150); try(150, 1); try(-1, 150); try(0, 0);
    try(90, 120); try(90, 121); try(-1020, -1020); try(1020, 0);
    for (int i = 0; i < 5000; i++)
      try(int'($urandom % 2041) - 1020, int'($urandom % 2041) - 1020);
    for (int i = 0; i < 2000; i++)
      try(int'($urandom % 301) - 150, int'($urandom % 301) - 150);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

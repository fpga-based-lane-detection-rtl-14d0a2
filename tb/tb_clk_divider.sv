// tb_clk_divider: measures the period and the high time of the divided
// clock, in input clock cycles, for the divide ratio under test.
module tb_clk_divider;
  localparam int DIV = 10;
  logic clk = 1'b0, rst_n = 1'b0, clk_out;
  int checks = 0, failures = 0, cycle = 0, last_rise = -1, last_fall = -1, rises = 0;

  clk_divider #(.DIV(DIV)) dut (.clk, .rst_n, .clk_out);

  always #5 clk = !clk;
  always @(posedge clk) cycle <= cycle + 1;

  logic prev = 0;
  always @(posedge clk) begin
    if (rst_n && clk_out && !prev) begin
      if (last_rise >= 0) begin
        checks++;
        if (cycle - last_rise != DIV) begin failures++; $display("ERROR: period %0d", cycle - last_rise); end
      end
      last_rise = cycle; rises++;
    end
    if (rst_n && !clk_out && prev) begin
      checks++;
      if (cycle - last_rise != DIV / 2) begin failures++; $display("ERROR: high time %0d", cycle - last_rise); end
    end
    prev <= clk_out;
  end

  initial begin
    repeat (3) @(posedge clk);
    checks++;
    if (clk_out !== 1'b0) begin failures++; $display("ERROR: clk_out not low in reset"); end
    rst_n = 1;
    repeat (20 * DIV) @(posedge clk);
    checks++;
    if (rises < 15) begin failures++; $display("ERROR: only %0d rising edges", rises); end
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

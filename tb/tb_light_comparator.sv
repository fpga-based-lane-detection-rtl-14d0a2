// tb_light_comparator: brightness words arrive with a valid flag held high
// for several system cycles (as from the slower I2C clock). Each must give
// exactly one output valid, DAC_out = word/16, ON when that is below the
// threshold and OFF otherwise, three clock edges after the flag rises; words
// around the threshold are included.
module tb_light_comparator;
  localparam logic [11:0] THR = 12'd256;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [15:0] p_out;
  logic valid_slow, valid, ON, OFF;
  logic [11:0] DAC_out;
  int checks = 0, failures = 0, cycle = 0, nvalid = 0, t_flag = 0, n_on = 0, n_off = 0;

  light_comparator #(.THRESHOLD(THR)) dut (.clk, .rst_n, .p_out, .valid_slow, .DAC_out, .valid, .ON, .OFF);

  always #5 clk = !clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("ERROR: %s", m); end
  endtask

  always @(posedge clk) if (rst_n && valid) begin
    nvalid++;
    chk(cycle - t_flag == 3, $sformatf("latency %0d", cycle - t_flag));
    chk(DAC_out == p_out >> 4, $sformatf("DAC %h for %h", DAC_out, p_out));
    chk(ON == ((p_out >> 4) < THR) && OFF == !ON, $sformatf("ON/OFF for %h", p_out));
    if (ON) n_on++; else n_off++;
  end

  task automatic send(input logic [15:0] w);
    @(negedge clk);
    p_out = w; valid_slow = 1; t_flag = cycle;
    repeat (8) @(negedge clk);
    valid_slow = 0;
    repeat (8) @(negedge clk);
  endtask

  initial begin
    p_out = 0; valid_slow = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    chk(!ON && OFF && DAC_out == 0, "reset state");
    send(16'h0FFF); send(16'h1000); send(16'h100F); send(16'h0000); send(16'hFFFF);
    for (int i = 0; i < 200; i++) send($urandom % 2 ? 16'($urandom) : 16'($urandom % 8192));
    chk(nvalid == 205, $sformatf("%0d results for 205 words", nvalid));
    chk(n_on > 0 && n_off > 0, "both decisions seen");
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

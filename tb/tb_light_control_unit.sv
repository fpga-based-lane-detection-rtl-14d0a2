// tb_light_control_unit: the light control unit (divided clock, I2C
// controller, comparator) against a behavioural light sensor. The sensor is
// configured once, then the brightness it reports is swept from bright to
// dark and back; every result must carry the brightness of a completed
// sensor read, scaled to 12 bits, with ON below the threshold. The
// interrupt line must trigger an early read. Reduced clock divider and poll
// period keep the run short.
module tb_light_control_unit;
  localparam int DIV = 4, POLL = 60;
  localparam logic [11:0] THR = 12'd256;
  logic clk = 1'b0, fclk = 1'b0, rst_n = 1'b1;   // dropped at 1 ns: asynchronous reset from time zero
  logic ls_on, int_n, sda_oe, scl_oe, s_pull, valid, ON, OFF, ack_error;
  logic [11:0] dac;
  logic [15:0] bright;
  logic [7:0] ptr;
  logic [15:0] cfg;
  int ncfg, nrd, nst, nst0;
  wire scl = !scl_oe;
  wire sda = !(sda_oe || s_pull);
  int checks = 0, failures = 0, nvalid = 0, n_on = 0, n_off = 0;

  light_control_unit #(.CLK_DIV(DIV), .POLL_TICKS(POLL), .THRESHOLD(THR)) dut (
    .Clk(clk), .rst_n, .LS_ON(ls_on), .INT(int_n), .SDA_i(sda), .SDA_oe(sda_oe),
    .SCL_oe(scl_oe), .DAC_out(dac), .valid, .ON, .OFF, .ack_error);

  i2c_slave_model #(.ADDR(7'h44)) sensor (
    .clk(fclk), .scl, .sda, .sda_pull(s_pull), .rd_value(bright), .ptr, .cfg_value(cfg),
    .n_cfg_writes(ncfg), .n_reads(nrd), .n_starts(nst));

  always #5 clk = !clk;
  always #1 fclk = !fclk;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("ERROR: %s", m); end
  endtask

  // brightness that each completed read returned
  logic [15:0] sent[$];
  int nrd_prev = 0;
  always @(posedge clk) begin
    if (nrd != nrd_prev) begin sent.push_back(bright); nrd_prev = nrd; end
    if (rst_n && valid) begin
      logic [15:0] b;
      nvalid++;
      b = sent.pop_front();
      chk(dac == b[15:4], $sformatf("DAC %h for brightness %h", dac, b));
      chk(ON == (b[15:4] < THR) && OFF == !ON, $sformatf("ON=%b for %h", ON, b));
      if (ON) n_on++; else n_off++;
    end
  end

  initial #1 rst_n = 1'b0;

  initial begin
    ls_on = 0; int_n = 1; bright = 16'hF000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    nst0 = nst;
    repeat (50) @(posedge clk);
    chk(nst == nst0, "no bus traffic while LS_ON is low");
    ls_on = 1;
    for (int i = 0; i < 16; i++) begin
      bright = 16'(16'hF000 - i * 16'h0F00);
      wait (nvalid == i + 1);
    end
    chk(ncfg == 1 && cfg == 16'hC410 && ptr == 8'h00, "sensor configured once");
    // early read on interrupt
    bright = 16'h0100;
    @(negedge clk); int_n = 0;
    repeat (2 * DIV) @(negedge clk);
    int_n = 1;
    wait (nvalid == 17);
    chk(ON, "dark after interrupt read");
    chk(!ack_error, "no acknowledge error");
    chk(n_on > 0 && n_off > 0, "light switched both ways");
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

// tb_i2c_sensor_master: the I2C controller against a behavioural sensor on
// an open-drain bus. Checks the configuration write (register pointer and
// 16-bit word), that each read returns the sensor's value on p_out with
// one valid pulse, the poll period between reads, an immediate read on the
// interrupt, the number of START conditions per transaction, and that a
// sensor at another address gives ack_error and no valid.
module tb_i2c_sensor_master;
  localparam int POLL = 300;
  logic clk = 1'b0, rst_n = 1'b1;   // dropped at 1 ns: asynchronous reset from time zero
  logic en, int_n, scl_oe, sda_oe, valid, ack_error, s_pull, s2_pull;
  logic [15:0] p_out, rd_value;
  logic [7:0] ptr, ptr2;
  logic [15:0] cfg, cfg2;
  int ncfg, nrd, nst, ncfg2, nrd2, nst2;
  wire scl = !scl_oe;
  wire sda = !(sda_oe || s_pull || s2_pull);
  int checks = 0, failures = 0, cycle = 0;

  i2c_sensor_master #(.DEV_ADDR(7'h44), .INIT_EN(1'b1), .INIT_REG(8'h01),
                      .INIT_DATA(16'hC410), .DATA_REG(8'h00), .POLL_TICKS(POLL)) dut (
    .clk, .rst_n, .en, .int_n, .sda_i(sda), .scl_oe, .sda_oe, .p_out, .valid, .ack_error);

  i2c_slave_model #(.ADDR(7'h44)) sensor (
    .clk(fclk), .scl, .sda, .sda_pull(s_pull), .rd_value, .ptr, .cfg_value(cfg),
    .n_cfg_writes(ncfg), .n_reads(nrd), .n_starts(nst));

  // a second device at another address must stay silent
  i2c_slave_model #(.ADDR(7'h10)) other (
    .clk(fclk), .scl, .sda, .sda_pull(s2_pull), .rd_value(16'hFFFF), .ptr(ptr2), .cfg_value(cfg2),
    .n_cfg_writes(ncfg2), .n_reads(nrd2), .n_starts(nst2));

  logic fclk = 1'b0;
  // a controller addressing a device that is not on its bus
  logic scl2_oe, sda2_oe, valid2, err2;
  logic [15:0] p2;
  int nvalid2 = 0;
  i2c_sensor_master #(.DEV_ADDR(7'h22), .INIT_EN(1'b0), .POLL_TICKS(POLL)) dut_absent (
    .clk, .rst_n, .en, .int_n(1'b1), .sda_i(!sda2_oe), .scl_oe(scl2_oe), .sda_oe(sda2_oe),
    .p_out(p2), .valid(valid2), .ack_error(err2));
  always @(posedge clk) if (rst_n && valid2) nvalid2++;

  always #5 clk = !clk;
  always #1 fclk = !fclk;   // bus oversampling clock of the sensor models
  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("ERROR: %s", m); end
  endtask

  int nvalid = 0, vcycle[$];
  always @(posedge clk) if (rst_n && valid) begin
    nvalid++; vcycle.push_back(cycle);
    chk(p_out == rd_value, $sformatf("p_out %h expected %h", p_out, rd_value));
  end

  initial #1 rst_n = 1'b0;

  initial begin
    en = 0; int_n = 1; rd_value = 16'hA5C3;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    chk(nst == 0 && scl === 1'b1 && sda === 1'b1, "bus idle while disabled");
    en = 1;
    wait (nvalid == 1);
    chk(ncfg == 1 && cfg == 16'hC410, $sformatf("config write %0d %h", ncfg, cfg));
    chk(ptr == 8'h00, "pointer set to the data register");
    chk(nst == 3, $sformatf("%0d START conditions for config + read", nst));
    rd_value = 16'h1234;
    wait (nvalid == 3);
    chk(vcycle[2] - vcycle[1] > POLL && vcycle[2] - vcycle[1] < POLL + 200,
        $sformatf("poll period %0d", vcycle[2] - vcycle[1]));
    chk(nrd == 3 && !ack_error, "three reads without error");
    // interrupt: the next read starts at once
    @(negedge clk); int_n = 0;
    @(negedge clk); int_n = 1;
    wait (nvalid == 4);
    chk(vcycle[3] - vcycle[2] < 200, $sformatf("interrupt read after %0d cycles", vcycle[3] - vcycle[2]));
    chk(ncfg2 == 0 && nrd2 == 0, "other device untouched");
    en = 0;
    repeat (2 * POLL) @(posedge clk);
    chk(nvalid == 4, "no reads while disabled");
    chk(nrd == nvalid, "sensor saw every read complete");
    chk(err2 && nvalid2 == 0, "absent device: ack_error and no valid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

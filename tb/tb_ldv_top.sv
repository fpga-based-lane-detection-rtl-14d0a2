// tb_ldv_top: end-to-end test of the whole chip at reduced size (200 x 10
// frames, I2C clock divider 4, poll period 100). Road frames stream in over
// AXI4-Stream with random gaps while a behavioural light sensor and a
// behavioural temperature sensor answer on the two I2C buses. Checks:
// every frame's lane decision against the reference pipeline; every light
// result and every air-conditioning decision against the sensor value of
// the read that produced it. Each mechanism of the design must occur at
// least once: input stall during a line-buffer flush, lanes found, vehicle
// inside a lane, light ON and OFF, interrupt-triggered light read, heating,
// cooling and the noise band (AC off).
module tb_ldv_top;
  import tb_ref_pkg::*;
  localparam int W = 200, H = 10, FRAMES = 6, DIV = 4, POLL = 100;

  logic clk = 1'b0, fclk = 1'b0, rst_n = 1'b1;   // dropped at 1 ns
  logic [23:0] tdata;
  logic tvalid, tready, dvalid;
  logic [3:0] nl, cl;
  logic [9:0] lb, rb;
  logic [9:0] cnt_a, cnt_d;
  logic full_a, full_d;
  logic ls_on, ls_int_n, ls_sda_oe, ls_scl_oe, l_valid, l_on, l_off, l_err;
  logic [11:0] l_dac;
  logic tcu_en, ts_sda_oe, ts_scl_oe, ac_on, ac_valid, ac_inc, t_err;
  logic [11:0] ac_ctrl;
  logic ls_pull, ts_pull;
  wire ls_scl = !ls_scl_oe, ls_sda = !(ls_sda_oe || ls_pull);
  wire ts_scl = !ts_scl_oe, ts_sda = !(ts_sda_oe || ts_pull);
  logic [15:0] bright, reading;
  logic [7:0] lptr, tptr;
  logic [15:0] lcfg, tcfg;
  int lncfg, lnrd, lnst, tncfg, tnrd, tnst;
  int checks = 0, failures = 0, cycle = 0;

  ldv_top #(.W(W), .H(H), .CLK_DIV(DIV), .POLL_TICKS(POLL)) dut (
    .clk, .rst_n,
    .s_axi_video_tdata(tdata), .s_axi_video_tvalid(tvalid), .s_axi_video_tready(tready),
    .number_of_lanes(nl), .current_lane(cl),
    .current_lane_left_boundary(lb), .current_lane_right_boundary(rb),
    .decision_out_valid(dvalid),
    .avr_sobel_fifo_data_count(cnt_a), .avr_sobel_fifo_full(full_a),
    .decision_sobel_fifo_data_count(cnt_d), .decision_sobel_fifo_full(full_d),
    .ls_on, .ls_int_n, .ls_sda_i(ls_sda), .ls_sda_oe, .ls_scl_oe,
    .light_dac_out(l_dac), .light_valid(l_valid), .light_on(l_on), .light_off(l_off),
    .ls_ack_error(l_err),
    .tcu_en, .ts_sda_i(ts_sda), .ts_sda_oe, .ts_scl_oe,
    .ac_on_off(ac_on), .ac_data_valid(ac_valid), .ac_control_out(ac_ctrl),
    .ac_increase_decrease_temp(ac_inc), .ts_ack_error(t_err));

  i2c_slave_model #(.ADDR(7'h44)) light_sensor (
    .clk(fclk), .scl(ls_scl), .sda(ls_sda), .sda_pull(ls_pull), .rd_value(bright),
    .ptr(lptr), .cfg_value(lcfg), .n_cfg_writes(lncfg), .n_reads(lnrd), .n_starts(lnst));
  i2c_slave_model #(.ADDR(7'h48)) temp_sensor (
    .clk(fclk), .scl(ts_scl), .sda(ts_sda), .sda_pull(ts_pull), .rd_value(reading),
    .ptr(tptr), .cfg_value(tcfg), .n_cfg_writes(tncfg), .n_reads(tnrd), .n_starts(tnst));

  initial #1 rst_n = 1'b0;
  always #5 clk = !clk;

  // AXI4-Stream handshake as seen at the clock edge
  logic hs = 1'b0;
  always @(posedge clk) hs <= tvalid && tready;
  always #1 fclk = !fclk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("ERROR: %s", m); end
  endtask

  // mechanism counters
  int n_stall = 0, n_lanes = 0, n_inlane = 0, n_lon = 0, n_loff = 0, n_int = 0;
  int n_heat = 0, n_cool = 0, n_acoff = 0, nres = 0;
  img_t frames[FRAMES];
  lane_t expect_res[FRAMES];
  logic [15:0] lsent[$], tsent[$];

  // a light read started by the interrupt before the poll period ran out
  // (counted when the read begins within 4 controller ticks of INT, far
  // sooner than the 100-tick poll period would start it)
  int int_ticks = 0;
  always @(posedge dut.u_light.i2c_clk) if (!ls_int_n) int_ticks <= int_ticks + 1;

  always @(posedge clk) if (rst_n) begin
    if (tvalid && !tready) n_stall++;
    if (dvalid) begin
      chk(nres < FRAMES && nl == expect_res[nres].lanes && cl == expect_res[nres].cur &&
          lb == expect_res[nres].lb && rb == expect_res[nres].rb,
          $sformatf("frame %0d decision %0d/%0d/%0d/%0d", nres, nl, cl, lb, rb));
      if (nl != 0) n_lanes++;
      if (cl != 0) n_inlane++;
      nres++;
    end
    if (l_valid) begin
      logic [15:0] b;
      b = lsent.pop_front();
      chk(l_dac == b[15:4] && l_on == (b[15:4] < 12'd256) && l_off == !l_on,
          $sformatf("light result %h/%b for %h", l_dac, l_on, b));
      if (l_on) n_lon++; else n_loff++;
    end
    if (ac_valid) begin
      logic [15:0] r;
      int dev, mag;
      bit e_on;
      r = tsent.pop_front();
      dev = (int'($signed(r[15:4])) * 16) - 6400;
      mag = dev < 0 ? -dev : dev;
      e_on = mag > 256;
      chk(ac_on == e_on && ac_inc == (e_on && dev < 0) &&
          ac_ctrl == (!e_on ? 0 : (mag > 4095 ? 4095 : mag)),
          $sformatf("AC result %b/%b/%0d for %h", ac_on, ac_inc, ac_ctrl, r));
      if (!e_on) n_acoff++; else if (dev < 0) n_heat++; else n_cool++;
    end
  end

  // sensors: brightness and temperature change after every read
  initial begin
    int lseen, tseen;
    lseen = 0; tseen = 0;
    bright = 16'h8000; reading = {12'd400, 4'h0};
    forever begin
      @(negedge clk);
      if (lnrd != lseen) lsent.push_back(bright);   // value of the completed read
      if (tnrd != tseen) tsent.push_back(reading);
      if (lnrd != lseen) bright = 16'((lnrd % 4 < 2) ? 16'h0800 + 16'(lnrd * 16'h0100) : 16'hC000 - 16'(lnrd * 16'h0100));
      if (tnrd != tseen) case (tnrd % 3)
        0: reading = {12'd400 + 12'(tnrd % 16), 4'h0};   // within 1 C of 25 C
        1: reading = {12'd240, 4'h0};                     // 15 C
        default: reading = {12'd560, 4'h0};               // 35 C
      endcase
      lseen = lnrd;
      tseen = tnrd;
    end
  end

  initial begin
    frames[0] = make_road(W, H, 4, 10, 60, 4, 0, 0, 100);
    frames[1] = make_road(W, H, 3, 30, 70, 5, 16, 0, 100);
    frames[2] = make_road(W, H, 4, 5, 50, 3, 0, 4, 60);
    frames[3] = make_road(W, H, 0, 0, 0, 0, 0, 0, 100);
    frames[4] = make_road(W, H, 2, 20, 45, 4, 0, 0, 100);
    frames[5] = make_road(W, H, 4, 0, 66, 4, -8, 0, 100);
    foreach (frames[f]) expect_res[f] = ref_pipeline(frames[f], W, H, 22500, 40, W / 2);
    tvalid = 0; tdata = 0; ls_on = 0; ls_int_n = 1; tcu_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ls_on = 1; tcu_en = 1;
    foreach (frames[f]) begin
      int i;
      i = 0;
      while (i < W * H) begin
        @(negedge clk);
        if (hs) i++;
        if (i >= W * H) tvalid = 0;
        else if (!tvalid || hs) begin
          tvalid = ($urandom % 10 != 0);
          tdata  = 24'(frames[f][i]);
        end
      end
      if (f == 2) begin                      // sensor interrupt, held until a read starts
        while (dut.u_light.u_i2c.state != 0 || dut.u_light.u_i2c.poll_cnt < 20) @(negedge clk);
        ls_int_n = 0;
        while (dut.u_light.u_i2c.state == 0) @(negedge clk);
        ls_int_n = 1;
        if (int_ticks <= 4) n_int++;
      end
    end
    @(negedge clk); tvalid = 0;
    while ((nres < FRAMES || n_heat == 0 || n_cool == 0 || n_acoff == 0) && cycle < 200000)
      @(posedge clk);
    repeat (20) @(posedge clk);
    chk(nres == FRAMES, $sformatf("%0d frame results", nres));
    chk(lncfg == 1 && lcfg == 16'hC410, "light sensor configured");
    chk(!l_err && !t_err, "no I2C acknowledge error");
    $display("mechanisms: stall=%0d lanes=%0d in_lane=%0d light_on=%0d light_off=%0d int_read=%0d heat=%0d cool=%0d ac_off=%0d",
             n_stall, n_lanes, n_inlane, n_lon, n_loff, n_int, n_heat, n_cool, n_acoff);
    chk(n_stall > 0, "input stall");
    chk(n_lanes > 0, "lanes found");
    chk(n_inlane > 0, "vehicle inside a lane");
    chk(n_lon > 0, "light switched on");
    chk(n_loff > 0, "light switched off");
    chk(n_int > 0, "interrupt-triggered read");
    chk(n_heat > 0, "heating");
    chk(n_cool > 0, "cooling");
    chk(n_acoff > 0, "AC off inside the noise band");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

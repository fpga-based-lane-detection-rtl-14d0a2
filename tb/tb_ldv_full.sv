// tb_ldv_full: the whole chip at its default parameters (416 x 416 frames,
// 150 MHz system clock, standard-mode I2C, 40000-tick poll period). One
// full road frame is streamed over AXI4-Stream; the decision is checked
// against the reference pipeline, and the time from the first pixel to the
// first decision is reported (the frame period at 150 MHz follows from it).
// Meanwhile the light and temperature sensors are configured and read once
// each, and those results are checked too.
`timescale 1ns / 1ps
module tb_ldv_full;
  import tb_ref_pkg::*;
  localparam int W = 416, H = 416, FRAMES = 1;

  logic clk = 1'b0, rst_n = 1'b1;   // dropped at 1 ns
  logic [23:0] tdata;
  logic tvalid, tready, dvalid;
  logic [3:0] nl, cl;
  logic [9:0] lb, rb;
  logic [9:0] cnt_a, cnt_d;
  logic full_a, full_d;
  logic ls_sda_oe, ls_scl_oe, l_valid, l_on, l_off, l_err;
  logic [11:0] l_dac;
  logic ts_sda_oe, ts_scl_oe, ac_on, ac_valid, ac_inc, t_err;
  logic [11:0] ac_ctrl;
  logic ls_pull, ts_pull;
  wire ls_scl = !ls_scl_oe, ls_sda = !(ls_sda_oe || ls_pull);
  wire ts_scl = !ts_scl_oe, ts_sda = !(ts_sda_oe || ts_pull);
  logic [7:0] lptr, tptr;
  logic [15:0] lcfg, tcfg;
  int lncfg, lnrd, lnst, tncfg, tnrd, tnst;
  int checks = 0, failures = 0, cycle = 0;

  ldv_top dut (
    .clk, .rst_n,
    .s_axi_video_tdata(tdata), .s_axi_video_tvalid(tvalid), .s_axi_video_tready(tready),
    .number_of_lanes(nl), .current_lane(cl),
    .current_lane_left_boundary(lb), .current_lane_right_boundary(rb),
    .decision_out_valid(dvalid),
    .avr_sobel_fifo_data_count(cnt_a), .avr_sobel_fifo_full(full_a),
    .decision_sobel_fifo_data_count(cnt_d), .decision_sobel_fifo_full(full_d),
    .ls_on(1'b1), .ls_int_n(1'b1), .ls_sda_i(ls_sda), .ls_sda_oe, .ls_scl_oe,
    .light_dac_out(l_dac), .light_valid(l_valid), .light_on(l_on), .light_off(l_off),
    .ls_ack_error(l_err),
    .tcu_en(1'b1), .ts_sda_i(ts_sda), .ts_sda_oe, .ts_scl_oe,
    .ac_on_off(ac_on), .ac_data_valid(ac_valid), .ac_control_out(ac_ctrl),
    .ac_increase_decrease_temp(ac_inc), .ts_ack_error(t_err));

  // dusk: brightness 0x0C80 -> 12-bit 200, below the threshold 256; room at 28.5 C
  i2c_slave_model #(.ADDR(7'h44)) light_sensor (
    .clk, .scl(ls_scl), .sda(ls_sda), .sda_pull(ls_pull), .rd_value(16'h0C80),
    .ptr(lptr), .cfg_value(lcfg), .n_cfg_writes(lncfg), .n_reads(lnrd), .n_starts(lnst));
  i2c_slave_model #(.ADDR(7'h48)) temp_sensor (
    .clk, .scl(ts_scl), .sda(ts_sda), .sda_pull(ts_pull), .rd_value({12'd456, 4'h0}),
    .ptr(tptr), .cfg_value(tcfg), .n_cfg_writes(tncfg), .n_reads(tnrd), .n_starts(tnst));

  initial #1 rst_n = 1'b0;
  always #3.333 clk = !clk;               // 150 MHz
  always @(posedge clk) cycle <= cycle + 1;

  logic hs = 1'b0;
  always @(posedge clk) hs <= tvalid && tready;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("ERROR: %s", m); end
  endtask

  img_t frames[FRAMES];
  lane_t expect_res[FRAMES];
  int nres = 0, nlight = 0, nac = 0, first_pix = -1, first_res = -1;

  always @(posedge clk) if (rst_n) begin
    if (tvalid && tready && first_pix < 0) first_pix = cycle;
    if (dvalid) begin
      if (first_res < 0) first_res = cycle;
      chk(nres < FRAMES && nl == expect_res[nres].lanes && cl == expect_res[nres].cur &&
          lb == expect_res[nres].lb && rb == expect_res[nres].rb,
          $sformatf("frame %0d decision %0d/%0d/%0d/%0d", nres, nl, cl, lb, rb));
      $display("frame %0d: lanes=%0d current=%0d left=%0d right=%0d at cycle %0d",
               nres, nl, cl, lb, rb, cycle);
      nres++;
    end
    if (l_valid) begin
      nlight++;
      chk(l_dac == 12'd200 && l_on && !l_off, $sformatf("light %0d/%b", l_dac, l_on));
    end
    if (ac_valid) begin
      nac++;   // 28.5 C: cool, 3.5 C * 256 = 896
      chk(ac_on && !ac_inc && ac_ctrl == 12'd896, $sformatf("AC %b/%b/%0d", ac_on, ac_inc, ac_ctrl));
    end
  end

  initial begin
    frames[0] = make_road(W, H, 5, 10, 95, 5, 4, 30, 90);
    foreach (frames[f]) begin
      expect_res[f] = ref_pipeline(frames[f], W, H, 22500, 40, W / 2);
      $display("expected %0d: lanes=%0d current=%0d left=%0d right=%0d", f,
               expect_res[f].lanes, expect_res[f].cur, expect_res[f].lb, expect_res[f].rb);
    end
    chk(expect_res[0].lanes == 3 && expect_res[0].cur == 2, "reference sees three lanes around the vehicle");
    tvalid = 0; tdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (frames[f]) begin
      int i;
      i = 0;
      while (i < W * H) begin
        @(negedge clk);
        if (hs) i++;
        if (i >= W * H) tvalid = 0;
        else begin
          tvalid = 1'b1;
          tdata  = 24'(frames[f][i]);
        end
      end
    end
    @(negedge clk); tvalid = 0;
    while ((nres < FRAMES || nlight == 0 || nac == 0) && cycle < 1000000) @(posedge clk);
    repeat (20) @(posedge clk);
    chk(nres == FRAMES, $sformatf("%0d frame results", nres));
    chk(nlight > 0 && nac > 0, "light and AC results");
    chk(lncfg == 1 && !l_err && !t_err, "sensors configured, no I2C error");
    // the quoted rate: one decision per 1.17 ms at 150 MHz = 175500 cycles
    chk(first_res - first_pix <= 175500, "frame decision within 1.17 ms");
    $display("first pixel to first decision: %0d cycles = %0.3f ms at 150 MHz",
             first_res - first_pix, real'(first_res - first_pix) / 150.0e3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;   // 10 ms
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_lane_many: the many-lanes workload. A synthetic road 416 pixels wide
// with 14 markings 31 columns apart (13 lanes, the largest count in the
// published evaluation) is sent through two lane-detection pipelines side
// by side: one with the default lane gap of 40 pixels and one with the gap
// lowered to 20. Each decision is compared with the reference chain. The
// test shows that 13 lanes of about 29 free pixels cannot be counted with
// the default gap (they are narrower than it) and are all counted with the
// smaller one. Frames are 416 x 6 to keep the run short; the decision only
// depends on the row content.
module tb_lane_many;
  import tb_ref_pkg::*;
  localparam int W = 416, H = 6, SMALL_GAP = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [23:0] tdata;
  logic tvalid, rdy_a, rdy_b, dv_a, dv_b;
  logic [3:0] nl_a, cl_a, nl_b, cl_b;
  logic [9:0] lb_a, rb_a, lb_b, rb_b;
  logic [9:0] c0, c1, c2, c3;
  logic f0, f1, f2, f3;
  int checks = 0, failures = 0;

  lane_detector #(.W(W), .H(H)) dut_default (
    .clk, .rst_n, .s_axi_video_tdata(tdata), .s_axi_video_tvalid(tvalid),
    .s_axi_video_tready(rdy_a), .number_of_lanes(nl_a), .current_lane(cl_a),
    .current_lane_left_boundary(lb_a), .current_lane_right_boundary(rb_a),
    .decision_out_valid(dv_a),
    .avr_sobel_fifo_data_count(c0), .avr_sobel_fifo_full(f0),
    .decision_sobel_fifo_data_count(c1), .decision_sobel_fifo_full(f1));
  lane_detector #(.W(W), .H(H), .GAP_TH(SMALL_GAP)) dut_small_gap (
    .clk, .rst_n, .s_axi_video_tdata(tdata), .s_axi_video_tvalid(tvalid),
    .s_axi_video_tready(rdy_b), .number_of_lanes(nl_b), .current_lane(cl_b),
    .current_lane_left_boundary(lb_b), .current_lane_right_boundary(rb_b),
    .decision_out_valid(dv_b),
    .avr_sobel_fifo_data_count(c2), .avr_sobel_fifo_full(f2),
    .decision_sobel_fifo_data_count(c3), .decision_sobel_fifo_full(f3));

  always #5 clk = !clk;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("ERROR: %s", m); end
  endtask

  img_t road;
  lane_t exp_a, exp_b;
  int n_a = 0, n_b = 0;

  // the two pipelines differ only in their last stage, so they must accept
  // the shared stream in lockstep
  always @(posedge clk) if (rst_n && rdy_a != rdy_b) begin
    failures++;
    $display("ERROR: pipelines out of step");
  end

  always @(posedge clk) if (rst_n) begin
    if (dv_a) begin
      n_a++;
      chk(nl_a == exp_a.lanes && cl_a == exp_a.cur && lb_a == exp_a.lb && rb_a == exp_a.rb,
          $sformatf("default gap: %0d/%0d/%0d/%0d", nl_a, cl_a, lb_a, rb_a));
    end
    if (dv_b) begin
      n_b++;
      chk(nl_b == exp_b.lanes && cl_b == exp_b.cur && lb_b == exp_b.lb && rb_b == exp_b.rb,
          $sformatf("gap %0d: %0d/%0d/%0d/%0d", SMALL_GAP, nl_b, cl_b, lb_b, rb_b));
      $display("gap %0d: lanes=%0d current=%0d left=%0d right=%0d", SMALL_GAP, nl_b, cl_b, lb_b, rb_b);
    end
  end

  initial begin
    int i;
    road  = make_road(W, H, 14, 5 + int'($urandom % 3), 31, 2, 0, 0, 60 + int'($urandom % 80));
    exp_a = ref_pipeline(road, W, H, 22500, 40, W / 2);
    exp_b = ref_pipeline(road, W, H, 22500, SMALL_GAP, W / 2);
    chk(exp_b.lanes == 13, $sformatf("reference sees %0d lanes with the small gap", exp_b.lanes));
    chk(exp_a.lanes == 0, $sformatf("reference sees %0d lanes with the default gap", exp_a.lanes));
    tvalid = 0; tdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    i = 0;
    // a pixel moves when the (common) tready is high
    while (i < W * H) begin
      @(negedge clk);
      tvalid = 1'b1;
      tdata  = 24'(road[i]);
      @(posedge clk);
      if (rdy_a && rdy_b) i++;
      else begin @(negedge clk); tvalid = 0; wait (rdy_a && rdy_b); end
    end
    @(negedge clk); tvalid = 0;
    repeat (4 * W) @(posedge clk);
    chk(n_a == 1 && n_b == 1, $sformatf("decisions %0d/%0d", n_a, n_b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

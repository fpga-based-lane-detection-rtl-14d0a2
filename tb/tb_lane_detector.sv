// tb_lane_detector: end-to-end run of the lane-detection pipeline on
// synthetic road frames (200 x 10) sent over AXI4-Stream with random gaps
// in tvalid. Each frame's decision is compared with the reference chain
// (gray, 3x3 mean, Sobel with threshold 22500, row scan with a 40-pixel lane
// gap). Frames: three lanes with the vehicle in the middle lane, slanted
// markings, markings missing in the lowest rows, and a frame without
// markings. The input must see stalls (tready low while the filters flush
// their line buffers between frames) and the first FIFO must hold data.
module tb_lane_detector;
  import tb_ref_pkg::*;
  localparam int W = 200, H = 10, FRAMES = 4, DEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [23:0] tdata;
  logic tvalid, tready, dvalid, afull_a, afull_d;
  logic [3:0] nl, cl;
  logic [9:0] lb, rb;
  logic [4:0] cnt_a, cnt_d;
  int checks = 0, failures = 0, cycle = 0;

  lane_detector #(.W(W), .H(H), .FIFO_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .s_axi_video_tdata(tdata), .s_axi_video_tvalid(tvalid),
    .s_axi_video_tready(tready), .number_of_lanes(nl), .current_lane(cl),
    .current_lane_left_boundary(lb), .current_lane_right_boundary(rb),
    .decision_out_valid(dvalid),
    .avr_sobel_fifo_data_count(cnt_a), .avr_sobel_fifo_full(afull_a),
    .decision_sobel_fifo_data_count(cnt_d), .decision_sobel_fifo_full(afull_d));

  always #5 clk = !clk;

  // AXI4-Stream handshake as seen at the clock edge
  logic hs = 1'b0;
  always @(posedge clk) hs <= tvalid && tready;
  always @(posedge clk) cycle <= cycle + 1;

  img_t frames[FRAMES];
  lane_t expect_res[FRAMES];
  int nres = 0, stalls = 0, maxcnt = 0;

  always @(posedge clk) if (rst_n) begin
    if (tvalid && !tready) stalls++;
    if (int'(cnt_a) > maxcnt) maxcnt = cnt_a;
    if (dvalid) begin
      checks++;
      if (nres >= FRAMES || nl != expect_res[nres].lanes || cl != expect_res[nres].cur ||
          lb != expect_res[nres].lb || rb != expect_res[nres].rb) begin
        failures++;
        $display("ERROR: frame %0d got %0d/%0d/%0d/%0d", nres, nl, cl, lb, rb);
      end
      $display("frame %0d: lanes=%0d current=%0d left=%0d right=%0d", nres, nl, cl, lb, rb);
      nres++;
    end
  end

  initial begin
    frames[0] = make_road(W, H, 4, 10, 60, 4, 0, 0, 100);
    frames[1] = make_road(W, H, 3, 30, 70, 5, 16, 0, 100);
    frames[2] = make_road(W, H, 4, 5, 50, 3, 0, 4, 100);
    frames[3] = make_road(W, H, 0, 0, 0, 0, 0, 0, 100);
    foreach (frames[f]) begin
      expect_res[f] = ref_pipeline(frames[f], W, H, 22500, 40, W / 2);
      $display("expected %0d: lanes=%0d current=%0d left=%0d right=%0d",
               f, expect_res[f].lanes, expect_res[f].cur, expect_res[f].lb, expect_res[f].rb);
    end
    checks++;
    if (expect_res[0].lanes != 3 || expect_res[0].cur != 2 || expect_res[3].lanes != 0) begin
      failures++; $display("ERROR: reference does not see the drawn lanes");
    end
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
        else if (!tvalid || hs) begin
          tvalid = ($urandom % 8 != 0);
          tdata  = 24'(frames[f][i]);
        end
      end
    end
    @(negedge clk); tvalid = 0;
    while (nres < FRAMES && cycle < 100000) @(posedge clk);
    repeat (20) @(posedge clk);
    checks++;
    if (nres != FRAMES) begin failures++; $display("ERROR: %0d results", nres); end
    checks++;
    if (stalls == 0 || maxcnt == 0) begin failures++; $display("ERROR: stalls %0d FIFO use %0d", stalls, maxcnt); end
    $display("input stalls %0d, highest average-Sobel FIFO occupancy %0d", stalls, maxcnt);
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

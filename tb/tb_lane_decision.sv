// tb_lane_decision: binary frames (160 x 4, lane gap 40, vehicle at column
// 80) read through a modelled FIFO into the decision block. Hand-made frames
// cover three lanes with the vehicle in the middle one, markings whose gap
// is one pixel short of a lane, a frame whose lower rows are empty (result
// taken from a higher row), an empty frame, and a vehicle outside every
// lane; random frames follow. Each frame's result is compared with the
// reference scan, and out_valid must come once per frame, two cycles after
// the frame's last pixel was read.
module tb_lane_decision;
  import tb_ref_pkg::*;
  localparam int W = 160, H = 4, GAP = 40, CEN = 80, FRAMES = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_rd_en, in_rd_data, in_rd_ack, in_empty, valid;
  logic [3:0] nl, cl;
  logic [9:0] lb, rb;
  int checks = 0, failures = 0, cycle = 0;

  lane_decision #(.W(W), .H(H)) dut (
    .clk, .rst_n, .in_rd_en, .in_rd_data, .in_rd_ack, .in_empty,
    .number_of_lanes(nl), .current_lane(cl),
    .current_lane_left_boundary(lb), .current_lane_right_boundary(rb),
    .decision_out_valid(valid));

  always #5 clk = !clk;
  always @(posedge clk) cycle <= cycle + 1;

  img_t frames[FRAMES];
  lane_t expect_res[FRAMES];
  int unsigned src[$];
  int src_idx = 0, avail = 0, nres = 0, last_read_cycle = 0;

  assign in_empty = (src_idx >= avail);

  always @(posedge clk) begin
    if (!rst_n) in_rd_ack <= 1'b0;
    else begin
      in_rd_ack <= in_rd_en && !in_empty;
      if (in_rd_en && !in_empty) begin
        in_rd_data <= src[src_idx][0];
        src_idx++;
        if (src_idx % (W * H) == 0) last_read_cycle = cycle;
      end
      if (avail < src.size() && $urandom % 4 != 0) avail++;
      if (valid) begin
        checks++;
        if (nres >= FRAMES) begin
          failures++; $display("ERROR: extra result");
        end else begin
          lane_t e;
          e = expect_res[nres];
          if (nl != e.lanes || cl != e.cur || lb != e.lb || rb != e.rb) begin
            failures++;
            $display("ERROR: frame %0d got lanes=%0d cur=%0d lb=%0d rb=%0d, expected %0d %0d %0d %0d",
                     nres, nl, cl, lb, rb, e.lanes, e.cur, e.lb, e.rb);
          end
          checks++;
          if (cycle - last_read_cycle != 2) begin
            failures++; $display("ERROR: result %0d cycles after last read", cycle - last_read_cycle);
          end
        end
        nres++;
      end
    end
  end

  task automatic mark(input int f, input int r, input int c0, input int width);
    for (int c = c0; c < c0 + width && c < W; c++) frames[f][r * W + c] = 1;
  endtask

  initial begin
    for (int f = 0; f < FRAMES; f++) begin
      frames[f] = new[W * H];
      foreach (frames[f][i]) frames[f][i] = 0;
    end
    // 0: markings at 0-2, 50-52, 100-102, 150-152 in every row -> 3 lanes, vehicle in lane 2
    for (int r = 0; r < H; r++) begin
      mark(0, r, 0, 3); mark(0, r, 50, 3); mark(0, r, 100, 3); mark(0, r, 150, 3);
    end
    // 1: gaps of 39 (one short) and 40 -> only the second is a lane
    for (int r = 0; r < H; r++) begin mark(1, r, 10, 2); mark(1, r, 51, 2); mark(1, r, 93, 2); end
    // 2: only row 1 has markings
    mark(2, 1, 20, 4); mark(2, 1, 90, 4); mark(2, 1, 140, 4);
    // 3: empty frame (frame 3 stays zero)
    // 4: vehicle outside every lane: lanes 0..45 and 46..? left of centre only
    for (int r = 0; r < H; r++) begin mark(4, r, 0, 1); mark(4, r, 45, 1); mark(4, r, 60, 1); end
    // 5: edges exactly at the centre column
    for (int r = 0; r < H; r++) begin mark(5, r, 30, 2); mark(5, r, 80, 1); mark(5, r, 125, 3); end
    for (int f = 6; f < FRAMES; f++)
      foreach (frames[f][i]) frames[f][i] = ($urandom % 25 == 0);
    for (int f = 0; f < FRAMES; f++) begin
      expect_res[f] = ref_frame(frames[f], W, H, GAP, CEN);
      foreach (frames[f][i]) src.push_back(frames[f][i]);
    end
    checks++;
    if (expect_res[0].lanes != 3 || expect_res[0].cur != 2 || expect_res[0].lb != 52 || expect_res[0].rb != 100) begin
      failures++; $display("ERROR: reference for frame 0");
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (nres < FRAMES && cycle < 20000) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (nres != FRAMES) begin failures++; $display("ERROR: %0d results, expected %0d", nres, FRAMES); end
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

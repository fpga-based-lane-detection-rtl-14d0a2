// tb_avg_filter: three random frames through the averaging filter at a
// reduced size (12 x 7). Every output pixel is compared with the 3x3 mean
// (floor(sum/9), edge replication) computed on the whole frame. The first
// frame streams without gaps and the first-output latency must be W+6
// cycles; the later frames use random input gaps and random almost-full
// back-pressure from the downstream FIFO.
module tb_avg_filter;
  import tb_ref_pkg::*;
  localparam int W = 12, H = 7, FRAMES = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] in_data, out_wr_data;
  logic in_valid, in_ready, out_wr_en, out_afull;
  int checks = 0, failures = 0, cycle = 0;

  avg_filter #(.W(W), .H(H)) dut (.clk, .rst_n, .in_data, .in_valid, .in_ready,
                                  .out_wr_en, .out_wr_data, .out_afull);

  always #5 clk = !clk;

  // handshake as seen at the clock edge
  logic hs = 1'b0;
  always @(posedge clk) hs <= in_valid && in_ready;
  always @(posedge clk) cycle <= cycle + 1;

  img_t frames[FRAMES], expect_img[FRAMES];
  int out_idx = 0, first_in = -1, first_out = -1, stalls = 0;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready && first_in < 0) first_in = cycle;
    if (in_valid && !in_ready) stalls++;
    if (out_wr_en) begin
      int f, p;
      if (first_out < 0) first_out = cycle;
      f = out_idx / (W * H);
      p = out_idx % (W * H);
      checks++;
      if (f >= FRAMES) begin
        failures++; $display("ERROR: extra output");
      end else if (out_wr_data != expect_img[f][p][7:0]) begin
        failures++;
        $display("ERROR: frame %0d pixel (%0d,%0d) got %0d expected %0d",
                 f, p / W, p % W, out_wr_data, expect_img[f][p]);
      end
      out_idx++;
    end
  end

  initial begin
    in_valid = 0; in_data = 0; out_afull = 0;
    for (int f = 0; f < FRAMES; f++) begin
      frames[f] = new[W * H];
      foreach (frames[f][i]) frames[f][i] = (f == 0) ? ($urandom % 256) : ($urandom % 2 ? 200 : $urandom % 60);
      expect_img[f] = ref_avg(frames[f], W, H);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      int i;
      i = 0;
      while (i < W * H) begin
        @(negedge clk);
        if (hs) i++;                          // previous beat taken
        if (f > 0) out_afull = ($urandom % 5 == 0);
        if (i < W * H) begin
          in_valid = (f == 0) ? 1'b1 : ($urandom % 3 != 0);
          in_data  = frames[f][i][7:0];
        end else in_valid = 0;
      end
    end
    @(negedge clk); in_valid = 0; out_afull = 0;
    repeat (3 * W + 20) @(posedge clk);
    checks++;
    if (out_idx != FRAMES * W * H) begin
      failures++; $display("ERROR: %0d outputs, expected %0d", out_idx, FRAMES * W * H);
    end
    checks++;
    if (first_out - first_in != W + 6) begin
      failures++; $display("ERROR: latency %0d, expected %0d", first_out - first_in, W + 6);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("ERROR: input never stalled"); end
    $display("latency %0d cycles (W+6 = %0d), stalled beats %0d", first_out - first_in, W + 6, stalls);
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

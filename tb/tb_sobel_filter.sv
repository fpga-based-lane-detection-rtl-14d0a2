// tb_sobel_filter: three frames (16 x 9) read through a modelled FIFO into
// the Sobel filter. Each output bit is compared with Gx^2+Gy^2 > 22500
// computed on the whole frame with edge replication. Frame 0 is a dark
// field with a bright vertical bar and a bright horizontal bar (known
// edges), frames 1 and 2 are random. The first frame is served without
// gaps and the latency from the first pixel returned by the FIFO to the
// first output bit must be W+6; later frames have random empty periods and
// random almost-full back-pressure.
module tb_sobel_filter;
  import tb_ref_pkg::*;
  localparam int W = 16, H = 9, FRAMES = 3, THR = 22500;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_rd_en, in_rd_ack, in_empty, out_wr_en, out_wr_data, out_afull;
  logic [7:0] in_rd_data;
  int checks = 0, failures = 0, cycle = 0;

  sobel_filter #(.W(W), .H(H)) dut (.clk, .rst_n, .in_rd_en, .in_rd_data, .in_rd_ack,
                                    .in_empty, .out_wr_en, .out_wr_data, .out_afull);

  always #5 clk = !clk;
  always @(posedge clk) cycle <= cycle + 1;

  img_t frames[FRAMES], expect_img[FRAMES];
  int unsigned src[$];           // whole input stream
  int src_idx = 0, avail = 0;    // pixels the modelled FIFO holds: src[src_idx .. avail-1]
  int out_idx = 0, first_in = -1, first_out = -1, ones = 0;
  bit gaps = 0;

  assign in_empty = (src_idx >= avail);

  always @(posedge clk) begin
    if (!rst_n) begin
      in_rd_ack <= 1'b0;
    end else begin
      in_rd_ack <= in_rd_en && !in_empty;
      if (in_rd_en && !in_empty) begin
        in_rd_data <= src[src_idx][7:0];
        src_idx++;
      end
      if (in_rd_ack && first_in < 0) first_in = cycle;
      // the FIFO is refilled by an upstream producer
      if (avail < src.size() && (!gaps || $urandom % 3 != 0)) avail++;
      if (out_wr_en) begin
        int f, p;
        if (first_out < 0) first_out = cycle;
        f = out_idx / (W * H);
        p = out_idx % (W * H);
        checks++;
        if (out_wr_data) ones++;
        if (f >= FRAMES || out_wr_data != expect_img[f][p][0]) begin
          failures++;
          $display("ERROR: frame %0d pixel (%0d,%0d) got %0b", f, p / W, p % W, out_wr_data);
        end
        out_idx++;
      end
    end
  end

  initial begin
    out_afull = 0;
    for (int f = 0; f < FRAMES; f++) begin
      frames[f] = new[W * H];
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          if (f == 0) frames[f][r * W + c] = (c >= 6 && c <= 8) || r == 4 ? 220 : 30;
          else        frames[f][r * W + c] = ($urandom % 4 == 0) ? 180 + $urandom % 70 : $urandom % 90;
      expect_img[f] = ref_sobel(frames[f], W, H, THR);
      foreach (frames[f][i]) src.push_back(frames[f][i]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // frame 0: FIFO already holds the frame and is never empty
    avail = W * H;
    wait (src_idx >= W * H);
    gaps = 1;
    while (out_idx < FRAMES * W * H && cycle < 20000) begin
      @(negedge clk);
      out_afull = ($urandom % 6 == 0);
    end
    @(negedge clk); out_afull = 0;
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
    if (ones == 0 || ones == out_idx) begin failures++; $display("ERROR: no variety in edges"); end
    $display("latency %0d cycles (W+6 = %0d), edge pixels %0d of %0d", first_out - first_in, W + 6, ones, out_idx);
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

// sobel_filter: Sobel edge detector with binarisation (stages 3 and 4).
//
// Reads averaged pixels from the average-to-Sobel FIFO into its own line
// buffers and 3x3 window (window3x3), convolves each window with
//   Gx = [-1 0 1; -2 0 2; -1 0 1]   and   Gy = [-1 -2 -1; 0 0 0; 1 2 1],
// and passes both gradients to sobel_threshold, which sets the output bit
// when Gx^2 + Gy^2 > 22500. The one-bit pixels are written to the
// Sobel-to-decision FIFO. Border handling (edge replication) is this
// design's choice, so a uniform frame produces no edges at its border.
//
// Interface: FIFO read port in (rd_en out; rd_data/rd_ack/empty in), FIFO
// write port out (wr_en/wr_data), out_afull from the downstream FIFO.
// Timing: a FIFO read returns its pixel one cycle later; the first output
// bit is written W+6 cycles after the first pixel comes back from the FIFO
// (422 for W = 416), then one bit per cycle.
module sobel_filter #(
  parameter int unsigned W         = lane_pkg::IMG_W,
  parameter int unsigned H         = lane_pkg::IMG_H,
  parameter int unsigned THRESHOLD = lane_pkg::SOBEL_THRESHOLD
) (
  input  logic       clk,
  input  logic       rst_n,
  output logic       in_rd_en,
  input  logic [7:0] in_rd_data,
  input  logic       in_rd_ack,
  input  logic       in_empty,
  output logic       out_wr_en,
  output logic       out_wr_data,
  input  logic       out_afull
);
  import lane_pkg::*;

  win3x3_t win;
  logic    win_valid, can_take;

  assign in_rd_en = can_take && !in_empty;

  window3x3 #(.W(W), .H(H)) u_win (
    .clk, .rst_n,
    .room      (!out_afull),
    .take      (in_rd_en),
    .can_take  (can_take),
    .pix_valid (in_rd_ack),
    .pix_data  (in_rd_data),
    .win       (win),
    .win_valid (win_valid)
  );

  logic signed [10:0] gx, gy;
  logic        [20:0] mag_sq;
  logic               edge_bit;

  function automatic logic signed [10:0] px(input logic [7:0] p);
    return 11'($unsigned(p));
  endfunction

  always_comb begin
    gx = (px(win[0][2]) - px(win[0][0]))
       + ((px(win[1][2]) - px(win[1][0])) <<< 1)
       + (px(win[2][2]) - px(win[2][0]));
    gy = (px(win[2][0]) - px(win[0][0]))
       + ((px(win[2][1]) - px(win[0][1])) <<< 1)
       + (px(win[2][2]) - px(win[0][2]));
  end

  sobel_threshold #(.THRESHOLD(THRESHOLD)) u_thr (
    .gx(gx), .gy(gy), .mag_sq(mag_sq), .edge_bit(edge_bit)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_wr_en   <= 1'b0;
      out_wr_data <= 1'b0;
    end else begin
      out_wr_en <= win_valid;
      if (win_valid) out_wr_data <= edge_bit;
    end
  end

endmodule

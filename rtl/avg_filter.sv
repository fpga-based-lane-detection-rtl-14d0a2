// avg_filter: 3x3 averaging (mean) filter, the noise-reduction stage.
//
// Every gray pixel is replaced by the mean of the 3x3 neighbourhood centred
// on it (all nine weights 1/9, stride 1), which suppresses isolated noise
// peaks before edge detection. The window comes from window3x3 (two line
// buffers plus a shift-register window, edge replication at the frame
// border). The division by 9 is a multiplication by 7282/65536, which gives
// floor(sum/9) exactly for every sum of nine 8-bit pixels (0..2295).
//
// Interface: valid/ready gray stream in (from the RGB converter), FIFO write
// port out (wr_en/wr_data) towards the average-to-Sobel FIFO; out_afull is
// that FIFO's almost-full flag and stops the filter taking pixels.
// Timing: the first averaged pixel leaves W+6 cycles after the first pixel
// is accepted (422 for W = 416); afterwards one pixel per cycle. Between
// frames the filter spends W+1 cycles flushing its line buffers.
module avg_filter #(
  parameter int unsigned W = lane_pkg::IMG_W,
  parameter int unsigned H = lane_pkg::IMG_H
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] in_data,
  input  logic       in_valid,
  output logic       in_ready,
  output logic       out_wr_en,
  output logic [7:0] out_wr_data,
  input  logic       out_afull
);
  import lane_pkg::*;

  win3x3_t win;
  logic    win_valid, can_take, take;

  assign in_ready = can_take;
  assign take     = in_valid && can_take;

  window3x3 #(.W(W), .H(H)) u_win (
    .clk, .rst_n,
    .room      (!out_afull),
    .take      (take),
    .can_take  (can_take),
    .pix_valid (take),
    .pix_data  (in_data),
    .win       (win),
    .win_valid (win_valid)
  );

  logic [11:0] sum;
  logic [25:0] scaled;

  always_comb begin
    sum = '0;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        sum = sum + 12'(win[r][c]);
    scaled = sum * 14'd7282;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_wr_en   <= 1'b0;
      out_wr_data <= '0;
    end else begin
      out_wr_en <= win_valid;
      if (win_valid) out_wr_data <= scaled[23:16];
    end
  end

endmodule

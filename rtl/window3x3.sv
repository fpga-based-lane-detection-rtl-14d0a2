// window3x3: line buffers and 3x3 sliding window shared by the average and
// Sobel filters.
//
// Pixels arrive in raster order, W per row and H rows per frame. Two line
// buffers, each one row long, delay the stream by one and two rows; together
// with the newest pixel they give one column of three vertically adjacent
// pixels per arrival, which is shifted into a 3x3 register window. The window
// centred on pixel (r,c) is complete once pixel (r+1,c+1) has arrived, so
// the output stream lags the input by W+1 pixels and every input pixel gets
// a window (stride 1, same-size output). At the frame border the missing
// row or column is replaced by a copy of the centre row or column (edge
// replication), which is this design's choice. After the last pixel of a
// frame the block inserts W+1 padding pixels of its own to push out the last
// windows, and takes no new input meanwhile.
//
// Handshake: the parent asserts `take` when it commits to delivering a pixel
// (only while `can_take` is high); the pixel itself arrives on
// pix_valid/pix_data either in the same cycle or later, in order. `room`
// says the consumer downstream can absorb everything in flight; the block
// neither takes nor inserts a pixel without it. The pipeline never stalls.
// Timing: arrival -> input register -> line-buffer read -> column shift ->
// bordered window, so win_valid follows the arrival of pixel (r+1,c+1) by
// four cycles. With a parent that adds one compute stage this gives the
// published filter latency of W+6 cycles from the first pixel in to the
// first pixel out.
module window3x3 #(
  parameter int unsigned W = 416,
  parameter int unsigned H = 416
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             room,
  input  logic             take,
  output logic             can_take,
  input  logic             pix_valid,
  input  logic [7:0]       pix_data,
  output lane_pkg::win3x3_t win,
  output logic             win_valid
);
  import lane_pkg::*;

  localparam int unsigned CW = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned RW = $clog2(H + 2);
  localparam int unsigned NW = $clog2(W * H + 1);

  typedef enum logic {S_RUN, S_FLUSH} state_t;
  state_t state;

  logic [NW-1:0]  taken;       // pixels committed in the current frame
  logic [CW:0]    flush_left;  // padding pixels still to insert

  // ---------------- input side ----------------
  logic       inject, arr;
  logic [7:0] arr_data;

  assign can_take = (state == S_RUN) && room;
  assign inject   = (state == S_FLUSH) && room && !pix_valid && (flush_left != '0);
  assign arr      = pix_valid || inject;
  assign arr_data = pix_valid ? pix_data : 8'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_RUN;
      taken      <= '0;
      flush_left <= '0;
    end else begin
      case (state)
        S_RUN: if (take) begin
          if (taken == NW'(W*H - 1)) begin
            taken      <= '0;
            state      <= S_FLUSH;
            flush_left <= (CW+1)'(W + 1);
          end else begin
            taken <= taken + 1'b1;
          end
        end
        S_FLUSH: begin
          if (inject) flush_left <= flush_left - 1'b1;
          if (flush_left == '0) state <= S_RUN;
        end
        default: state <= S_RUN;
      endcase
    end
  end

  // Arrival position and the centre pixel whose window it completes
  logic [CW-1:0] arr_col, ctr_col;
  logic [RW-1:0] arr_row, ctr_row;
  logic          emit;

  assign emit = arr && ((arr_row > RW'(1)) || (arr_row == RW'(1) && arr_col != '0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arr_col <= '0; arr_row <= '0;
      ctr_col <= '0; ctr_row <= '0;
    end else begin
      if (arr) begin
        if (arr_row == RW'(H + 1)) begin          // last padding pixel
          arr_col <= '0; arr_row <= '0;
        end else if (arr_col == CW'(W - 1)) begin
          arr_col <= '0; arr_row <= arr_row + 1'b1;
        end else begin
          arr_col <= arr_col + 1'b1;
        end
      end
      if (emit) begin
        if (ctr_col == CW'(W - 1)) begin
          ctr_col <= '0;
          ctr_row <= (ctr_row == RW'(H - 1)) ? '0 : ctr_row + 1'b1;
        end else begin
          ctr_col <= ctr_col + 1'b1;
        end
      end
    end
  end

  // ---------------- stage 1: input register ----------------
  logic          s1_v, s1_emit;
  logic [7:0]    s1_pix;
  logic [CW-1:0] s1_col, s1_ccol;
  logic [RW-1:0] s1_crow;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_emit <= 1'b0;
      s1_pix <= '0; s1_col <= '0; s1_ccol <= '0; s1_crow <= '0;
    end else begin
      s1_v    <= arr;
      s1_emit <= emit;
      if (arr) begin
        s1_pix  <= arr_data;
        s1_col  <= arr_col;
        s1_ccol <= ctr_col;
        s1_crow <= ctr_row;
      end
    end
  end

  // ---------------- stage 2: line buffers ----------------
  // lb1 holds the previous row, lb2 the row before it (read before write)
  logic [7:0] lb1 [W];
  logic [7:0] lb2 [W];
  logic [7:0] s2_top, s2_mid, s2_bot;
  logic       s2_v, s2_emit;
  logic [CW-1:0] s2_ccol;
  logic [RW-1:0] s2_crow;

  always_ff @(posedge clk) begin
    if (s1_v) begin
      s2_top       <= lb2[s1_col];
      s2_mid       <= lb1[s1_col];
      lb2[s1_col]  <= lb1[s1_col];
      lb1[s1_col]  <= s1_pix;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_emit <= 1'b0; s2_bot <= '0; s2_ccol <= '0; s2_crow <= '0;
    end else begin
      s2_v    <= s1_v;
      s2_emit <= s1_emit;
      if (s1_v) begin
        s2_bot  <= s1_pix;
        s2_ccol <= s1_ccol;
        s2_crow <= s1_crow;
      end
    end
  end

  // ---------------- stage 3: column shift register ----------------
  win3x3_t       raw;
  logic          s3_emit;
  logic [CW-1:0] s3_ccol;
  logic [RW-1:0] s3_crow;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      raw <= '0; s3_emit <= 1'b0; s3_ccol <= '0; s3_crow <= '0;
    end else begin
      s3_emit <= s2_v && s2_emit;
      if (s2_v) begin
        for (int r = 0; r < 3; r++) begin
          raw[r][0] <= raw[r][1];
          raw[r][1] <= raw[r][2];
        end
        raw[0][2] <= s2_top;
        raw[1][2] <= s2_mid;
        raw[2][2] <= s2_bot;
        s3_ccol <= s2_ccol;
        s3_crow <= s2_crow;
      end
    end
  end

  // ---------------- stage 4: border replication ----------------
  win3x3_t rows_fixed, bordered;

  always_comb begin
    rows_fixed = raw;
    if (s3_crow == '0)          rows_fixed[0] = raw[1];
    if (s3_crow == RW'(H - 1))  rows_fixed[2] = raw[1];
    bordered = rows_fixed;
    for (int r = 0; r < 3; r++) begin
      if (s3_ccol == '0)         bordered[r][0] = rows_fixed[r][1];
      if (s3_ccol == CW'(W - 1)) bordered[r][2] = rows_fixed[r][1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win <= '0; win_valid <= 1'b0;
    end else begin
      win_valid <= s3_emit;
      if (s3_emit) win <= bordered;
    end
  end

endmodule

// rgb2gray: AXI4-Stream RGB to 8-bit gray converter (first pipeline stage).
//
// Each accepted 24-bit pixel is converted with the luma weights
// 0.2989 R + 0.587 G + 0.114 B, held as 8-bit fixed-point fractions
// (77, 150, 29 out of 256), and the 8-bit result is registered. The weights
// sum to 256, so a gray input (R=G=B) comes out unchanged.
//
// Interface: AXI4-Stream slave (s_axis_tdata/tvalid/tready) in, a
// valid/ready stream of gray pixels out. Byte order of tdata is this
// design's choice: R in [23:16], G in [15:8], B in [7:0].
// Timing: one clock cycle from an accepted input beat to out_valid, one
// pixel per cycle. tready is high whenever the output register is empty or
// being drained, so the stage stalls only when the next stage does.
module rgb2gray (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [23:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  output logic [7:0]  out_data,
  output logic        out_valid,
  input  logic        out_ready
);
  import lane_pkg::*;

  logic [17:0] acc;

  always_comb begin
    acc = GRAY_WR * s_axis_tdata[23:16]
        + GRAY_WG * s_axis_tdata[15:8]
        + GRAY_WB * s_axis_tdata[7:0];
  end

  assign s_axis_tready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (s_axis_tready) begin
      out_valid <= s_axis_tvalid;
      if (s_axis_tvalid) out_data <= acc[15:8];
    end
  end

endmodule

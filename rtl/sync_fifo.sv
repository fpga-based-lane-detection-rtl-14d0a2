// sync_fifo: single-clock FIFO used as the "global" buffer between pipeline
// stages (average -> Sobel with 8-bit pixels, Sobel -> decision with 1-bit
// pixels).
//
// Storage is a circular array with read and write pointers and an occupancy
// counter. The port names follow the signals visible in the system
// waveform: wr_en/wr_data/full/wr_ack on the write side,
// rd_en/rd_data/empty/rd_ack on the read side, and data_count.
// Timing: a write with wr_en high and the FIFO not full is stored at the
// clock edge and acknowledged by wr_ack in the next cycle. A read with rd_en
// high and the FIFO not empty returns rd_data one cycle later, flagged by
// rd_ack. A write to a full FIFO or a read from an empty one is ignored.
// almost_full rises when fewer than AFULL_MARGIN entries are free, so that a
// producer with a pipeline can stop issuing early.
// Lint may report rst_n as used both synchronously and asynchronously: the
// synchronous use is only the assertions' `disable iff`, not a flip-flop.
module sync_fifo #(
  parameter int unsigned WIDTH        = 8,
  parameter int unsigned DEPTH        = 512,
  parameter int unsigned AFULL_MARGIN = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [WIDTH-1:0]           wr_data,
  output logic                       wr_ack,
  output logic                       full,
  output logic                       almost_full,
  input  logic                       rd_en,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       rd_ack,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] data_count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  assign full        = (data_count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty       = (data_count == '0);
  assign almost_full = (data_count >= ($clog2(DEPTH+1))'(DEPTH - AFULL_MARGIN));
  assign do_wr       = wr_en && !full;
  assign do_rd       = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
    if (do_rd) rd_data <= mem[rd_ptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      data_count <= '0;
      wr_ack     <= 1'b0;
      rd_ack     <= 1'b0;
    end else begin
      wr_ack <= do_wr;
      rd_ack <= do_rd;
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      case ({do_wr, do_rd})
        2'b10:   data_count <= data_count + 1'b1;
        2'b01:   data_count <= data_count - 1'b1;
        default: data_count <= data_count;
      endcase
    end
  end

  // A pointer never runs past the occupancy it tracks
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) 32'(data_count) <= DEPTH);
endmodule

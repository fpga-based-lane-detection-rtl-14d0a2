// tb_sync_fifo: random writes and reads against a queue model, including
// writes to a full FIFO and reads from an empty one (both must be ignored).
// Checks read data and order, rd_ack/wr_ack, full, empty, almost_full and
// data_count every cycle.
module tb_sync_fifo;
  localparam int DEPTH = 16, MARGIN = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en, rd_en, wr_ack, rd_ack, full, afull, empty;
  logic [7:0] wr_data, rd_data;
  logic [4:0] data_count;
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(8), .DEPTH(DEPTH), .AFULL_MARGIN(MARGIN)) dut (
    .clk, .rst_n, .wr_en, .wr_data, .wr_ack, .full, .almost_full(afull),
    .rd_en, .rd_data, .rd_ack, .empty, .data_count);

  always #5 clk = !clk;

  logic [7:0] model[$];
  bit exp_rd_ack, exp_wr_ack;
  logic [7:0] exp_rd;
  int nfull = 0, nempty_rd = 0;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("ERROR: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    // outputs of the previous cycle's operations
    chk(rd_ack == exp_rd_ack, "rd_ack");
    chk(wr_ack == exp_wr_ack, "wr_ack");
    if (exp_rd_ack) chk(rd_data == exp_rd, $sformatf("rd_data %h exp %h", rd_data, exp_rd));
    chk(data_count == model.size(), $sformatf("count %0d exp %0d", data_count, model.size()));
    chk(full == (model.size() == DEPTH), "full");
    chk(empty == (model.size() == 0), "empty");
    chk(afull == (model.size() >= DEPTH - MARGIN), "almost_full");
    // this cycle's operations
    exp_rd_ack = rd_en && model.size() != 0;
    exp_wr_ack = wr_en && model.size() != DEPTH;
    if (wr_en && model.size() == DEPTH) nfull++;
    if (rd_en && model.size() == 0) nempty_rd++;
    if (exp_rd_ack) exp_rd = model.pop_front();
    if (exp_wr_ack) model.push_back(wr_data);
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_data = 0;
    exp_rd_ack = 0; exp_wr_ack = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      // phases biased towards filling and towards draining
      wr_en   = ((i / 500) % 2 == 0) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      rd_en   = ((i / 500) % 2 == 0) ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
      wr_data = $urandom;
    end
    @(negedge clk); wr_en = 0; rd_en = 0;
    repeat (2) @(posedge clk);
    chk(nfull > 0 && nempty_rd > 0, "full and empty both reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rgb2gray: random RGB beats with random tvalid and random downstream
// back-pressure. Each gray output is compared in order with the reference
// conversion, and with a ready consumer the one-cycle latency is checked.
module tb_rgb2gray;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [23:0] tdata;
  logic tvalid, tready, out_valid, out_ready;
  logic [7:0] out_data;
  int checks = 0, failures = 0, cycle = 0;

  rgb2gray dut (.clk, .rst_n, .s_axis_tdata(tdata), .s_axis_tvalid(tvalid),
                .s_axis_tready(tready), .out_data, .out_valid, .out_ready);

  always #5 clk = !clk;

  // handshake as seen at the clock edge
  logic hs = 1'b0;
  always @(posedge clk) hs <= tvalid && tready;
  always @(posedge clk) cycle <= cycle + 1;

  int unsigned expq[$];
  int acc_cycle[$];
  bit stall_phase;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      int unsigned e;
      int ac;
      e  = expq.pop_front();
      ac = acc_cycle.pop_front();
      checks++;
      if (out_data != e[7:0]) begin
        failures++;
        $display("ERROR: gray %0d expected %0d", out_data, e);
      end
      if (!stall_phase) begin
        checks++;
        if (cycle - ac != 1) begin
          failures++;
          $display("ERROR: latency %0d cycles, expected 1", cycle - ac);
        end
      end
    end
    if (tvalid && tready) begin
      expq.push_back(ref_gray(tdata));
      acc_cycle.push_back(cycle);
    end
  end

  initial begin
    tvalid = 0; tdata = 0; out_ready = 1; stall_phase = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fixed points: pure gray is unchanged, white and black
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      if (i == 1000) stall_phase = 1;
      if (i < 4) tdata = (i == 0) ? 24'h323232 : (i == 1) ? 24'hFFFFFF : (i == 2) ? 24'h000000 : 24'hFF0000;
      else if (!tvalid || hs) tdata = $urandom;
      if (!tvalid || hs) tvalid = (i < 1000) ? 1'b1 : ($urandom % 3 != 0);
      out_ready = (i < 1000) ? 1'b1 : ($urandom % 4 != 0);
    end
    @(negedge clk); tvalid = 0; out_ready = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("ERROR: %0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// i2c_slave_model: behavioural I2C sensor for the testbenches (not
// synthesizable). It answers at address ADDR, keeps a register pointer,
// stores a two-byte register write (the configuration word) and returns
// rd_value, MSB first, on a read. It watches the open-drain bus lines and
// pulls SDA low through sda_pull. Counters report how many configuration
// writes, pointer writes and completed reads it has seen, and the bit-level
// The bus is oversampled on `clk`, which must be several times faster than
// SCL, so that START, STOP and the SCL edges are seen in order.
module i2c_slave_model #(
  parameter logic [6:0] ADDR = 7'h44
) (
  input  logic        clk,
  input  logic        scl,
  input  logic        sda,
  output logic        sda_pull,
  input  logic [15:0] rd_value,
  output logic [7:0]  ptr,
  output logic [15:0] cfg_value,
  output int          n_cfg_writes,
  output int          n_reads,
  output int          n_starts
);
  typedef enum {IDLE, ADR, REGP, WDATA, RDATA} st_t;
  st_t st = IDLE;
  logic [7:0] sh = 0, tx = 0;
  int bitcnt = 0, wbytes = 0, rbyte = 0;
  bit ack_phase = 0, sending = 0, master_ack = 0;

  initial begin
    sda_pull = 0; ptr = 0; cfg_value = 0;
    n_cfg_writes = 0; n_reads = 0; n_starts = 0;
  end

  logic scl_d = 1, sda_d = 1;
  always @(posedge clk) begin
    scl_d <= scl;
    sda_d <= sda;
    if (scl && scl_d && sda_d && !sda) do_start();
    else if (scl && scl_d && !sda_d && sda) do_stop();
    else if (scl && !scl_d) do_rise();
    else if (!scl && scl_d) do_fall();
  end

  task automatic do_start();                   // START / repeated START
    st = ADR; bitcnt = 0; ack_phase = 0; sending = 0; sda_pull = 0;
    n_starts++;
  endtask

  task automatic do_stop();                    // STOP
    if (st == WDATA && wbytes == 2) n_cfg_writes++;
    st = IDLE; sda_pull = 0;
  endtask

  task automatic do_rise();
    if (st != IDLE) begin
      if (ack_phase) begin
        if (st == RDATA && sending) master_ack = !sda;
      end else if (st == RDATA) begin
        bitcnt++;
      end else begin
        sh = {sh[6:0], sda};
        bitcnt++;
      end
    end
  endtask

  task automatic do_fall();
    if (st == IDLE) begin
      sda_pull = 0;
    end else if (ack_phase) begin
      ack_phase = 0;
      bitcnt = 0;
      sda_pull = 0;
      if (st == RDATA) begin
        if (!sending) begin
          sending = 1; rbyte = 0; tx = rd_value[15:8];
          sda_pull = !tx[7];
        end else if (master_ack) begin
          rbyte = 1; tx = rd_value[7:0];
          sda_pull = !tx[7];
        end else begin
          n_reads++;
          st = IDLE;
        end
      end
    end else if (bitcnt == 8) begin
      ack_phase = 1;
      case (st)
        ADR: if (sh[7:1] == ADDR) begin
               sda_pull = 1;
               st = sh[0] ? RDATA : REGP;
             end else begin
               st = IDLE; ack_phase = 0;
             end
        REGP: begin ptr = sh; sda_pull = 1; st = WDATA; wbytes = 0; end
        WDATA: begin
               if (wbytes == 0) cfg_value[15:8] = sh; else cfg_value[7:0] = sh;
               wbytes++;
               sda_pull = 1;
             end
        RDATA: sda_pull = 0;                    // release for the master's ACK/NACK
        default: ;
      endcase
    end else if (st == RDATA && sending) begin
      sda_pull = !tx[7 - bitcnt];
    end
  endtask
endmodule

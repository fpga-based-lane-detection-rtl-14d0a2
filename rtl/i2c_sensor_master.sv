// i2c_sensor_master: I2C master that configures a sensor once and then reads
// a 16-bit register from it periodically.
//
// After reset, and while `en` is high, the controller (optionally) writes
// INIT_DATA to the sensor's configuration register INIT_REG, then reads the
// two bytes of DATA_REG (write the register pointer, repeated START, read
// MSB with ACK, LSB with NACK, STOP). The 16-bit word is presented on p_out
// with a one-cycle `valid`. The next read follows POLL_TICKS controller
// cycles later, or at once when the sensor's active-low interrupt int_n is
// asserted. A missing ACK sets ack_error for that transaction and
// suppresses `valid`.
//
// Timing: the controller runs on the divided clock; one SCL period takes
// four controller cycles (quarter-period phasing), so a read transaction
// lasts about 4*(2 + 4*9 + 2) = 160 cycles. SCL and SDA are open-drain: the
// *_oe outputs pull the line low when high and release it otherwise. The
// pads and pull-ups are outside this block. Clock stretching by the slave
// and multi-master arbitration are not supported.
// The sensor address, registers, configuration word and poll period are
// defaults of this design, not values from the published work.
module i2c_sensor_master #(
  parameter logic [6:0]  DEV_ADDR   = 7'h44,
  parameter bit          INIT_EN    = 1'b1,
  parameter logic [7:0]  INIT_REG   = 8'h01,
  parameter logic [15:0] INIT_DATA  = 16'hC410,
  parameter logic [7:0]  DATA_REG   = 8'h00,
  parameter int unsigned POLL_TICKS = 40000
) (
  input  logic        clk,        // divided controller clock
  input  logic        rst_n,
  input  logic        en,
  input  logic        int_n,
  input  logic        sda_i,
  output logic        scl_oe,
  output logic        sda_oe,
  output logic [15:0] p_out,
  output logic        valid,
  output logic        ack_error
);
  typedef enum logic [1:0] {OP_START, OP_TX, OP_RX, OP_STOP} op_t;
  typedef enum logic [1:0] {M_IDLE, M_RUN} mstate_t;

  localparam int unsigned PW = $clog2(POLL_TICKS + 1);

  mstate_t     state;
  logic        in_init;          // running the configuration write
  logic        init_done;
  logic [2:0]  step;
  logic [3:0]  bitn;             // 0..7 data bits, 8 = acknowledge
  logic [1:0]  q;                // quarter of the SCL period
  logic [7:0]  tx_byte;
  logic [15:0] rx_shift;
  logic        err;
  logic [PW-1:0] poll_cnt;

  op_t  op;
  logic last_step;
  logic rx_ack;                  // acknowledge a received byte (not the last)

  // Transaction programs
  always_comb begin
    tx_byte   = 8'h00;
    rx_ack    = 1'b0;
    op        = OP_STOP;
    last_step = 1'b0;
    if (in_init) begin
      case (step)
        3'd0: op = OP_START;
        3'd1: begin op = OP_TX; tx_byte = {DEV_ADDR, 1'b0}; end
        3'd2: begin op = OP_TX; tx_byte = INIT_REG; end
        3'd3: begin op = OP_TX; tx_byte = INIT_DATA[15:8]; end
        3'd4: begin op = OP_TX; tx_byte = INIT_DATA[7:0]; end
        default: begin op = OP_STOP; last_step = 1'b1; end
      endcase
    end else begin
      case (step)
        3'd0: op = OP_START;
        3'd1: begin op = OP_TX; tx_byte = {DEV_ADDR, 1'b0}; end
        3'd2: begin op = OP_TX; tx_byte = DATA_REG; end
        3'd3: op = OP_START;                       // repeated START
        3'd4: begin op = OP_TX; tx_byte = {DEV_ADDR, 1'b1}; end
        3'd5: begin op = OP_RX; rx_ack = 1'b1; end
        3'd6: begin op = OP_RX; rx_ack = 1'b0; end
        default: begin op = OP_STOP; last_step = 1'b1; end
      endcase
    end
  end

  logic op_end;
  assign op_end = (q == 2'd3) && ((op == OP_START || op == OP_STOP) || bitn == 4'd8);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= M_IDLE;
      in_init   <= 1'b0;
      init_done <= 1'b0;
      step      <= '0;
      bitn      <= '0;
      q         <= '0;
      scl_oe    <= 1'b0;
      sda_oe    <= 1'b0;
      rx_shift  <= '0;
      p_out     <= '0;
      valid     <= 1'b0;
      err       <= 1'b0;
      ack_error <= 1'b0;
      poll_cnt  <= '0;
    end else begin
      valid <= 1'b0;
      case (state)
        M_IDLE: begin
          scl_oe <= 1'b0;
          sda_oe <= 1'b0;
          if (poll_cnt != '0) poll_cnt <= poll_cnt - 1'b1;
          if (en && INIT_EN && !init_done) begin
            state <= M_RUN; in_init <= 1'b1;
            step <= '0; bitn <= '0; q <= '0; err <= 1'b0;
          end else if (en && (poll_cnt == '0 || !int_n)) begin
            state <= M_RUN; in_init <= 1'b0;
            step <= '0; bitn <= '0; q <= '0; err <= 1'b0;
          end
        end

        M_RUN: begin
          q <= q + 1'b1;
          case (op)
            OP_START: case (q)
              2'd0: begin scl_oe <= 1'b1; sda_oe <= 1'b0; end
              2'd1: scl_oe <= 1'b0;
              2'd2: sda_oe <= 1'b1;
              default: scl_oe <= 1'b1;
            endcase
            OP_STOP: case (q)
              2'd0: begin scl_oe <= 1'b1; sda_oe <= 1'b1; end
              2'd1: scl_oe <= 1'b0;
              2'd2: sda_oe <= 1'b0;
              default: ;
            endcase
            OP_TX: case (q)
              2'd0: begin
                scl_oe <= 1'b1;
                sda_oe <= (bitn == 4'd8) ? 1'b0 : !tx_byte[3'd7 - bitn[2:0]];
              end
              2'd1: scl_oe <= 1'b0;
              2'd2: if (bitn == 4'd8 && sda_i) err <= 1'b1;   // no ACK
              default: scl_oe <= 1'b1;
            endcase
            default: case (q)                                  // OP_RX
              2'd0: begin
                scl_oe <= 1'b1;
                sda_oe <= (bitn == 4'd8) ? rx_ack : 1'b0;
              end
              2'd1: scl_oe <= 1'b0;
              2'd2: if (bitn != 4'd8) rx_shift <= {rx_shift[14:0], sda_i};
              default: scl_oe <= 1'b1;
            endcase
          endcase

          if (q == 2'd3 && (op == OP_TX || op == OP_RX)) bitn <= (bitn == 4'd8) ? '0 : bitn + 1'b1;

          if (op_end) begin
            if (last_step) begin
              state     <= M_IDLE;
              ack_error <= err;
              if (in_init) begin
                init_done <= !err;
              end else begin
                poll_cnt <= PW'(POLL_TICKS);
                if (!err) begin
                  p_out <= rx_shift;
                  valid <= 1'b1;
                end
              end
            end else begin
              step <= step + 1'b1;
            end
          end
        end

        default: state <= M_IDLE;
      endcase
    end
  end

endmodule

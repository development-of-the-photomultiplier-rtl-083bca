// i2c_sensor_reader: reads temperature and humidity from an I2C sensor.
//
// On `req` the reader runs one I2C transaction: START, the 7-bit address
// DEV_ADDR with the read bit, then four data bytes (temperature high/low,
// humidity high/low) acknowledged by the master except the last, then
// STOP. Each bit takes four phases of QDIV clocks: SCL low while SDA is
// set up, SCL high, SDA sampled in the middle of the high time, SCL low
// again. SDA is open drain: `sda_oe` high pulls it low. SCL is driven
// (no clock stretching). At STOP the readings are stored and `valid`
// pulses; `nack` records a missing address acknowledge. The paper names
// the sensor and its I2C interface; the byte layout and timing are assumed.
module i2c_sensor_reader #(
  parameter logic [6:0] DEV_ADDR = 7'h40,
  parameter int         QDIV     = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  output logic        scl,
  output logic        sda_oe,
  input  logic        sda_i,
  output logic [15:0] temperature,
  output logic [15:0] humidity,
  output logic        valid,
  output logic        nack,
  output logic        busy
);
  typedef enum logic [1:0] {I_IDLE, I_START, I_BITS, I_STOP} istate_t;
  istate_t st;
  localparam int QW = $clog2(QDIV);

  logic [QW-1:0] qd;
  logic [1:0]    q;       // phase within a bit
  logic [2:0]    byten;   // 0 address, 1..4 data
  logic [3:0]    pos;     // 0..7 data bits, 8 acknowledge
  logic [31:0]   data;
  logic          qend, drive_low, ack_bit, nack_q;
  logic [7:0]    addr_byte;

  assign addr_byte = {DEV_ADDR, 1'b1};

  assign qend = (qd == QW'(QDIV - 1));
  assign busy = (st != I_IDLE);

  // what SDA carries in the current bit slot (1 = pulled low)
  always_comb begin
    if (byten == 3'd0) drive_low = (pos < 4'd8) ? !addr_byte[3'd7 - pos[2:0]] : 1'b0;
    else               drive_low = (pos == 4'd8) && (byten != 3'd4);
  end
  assign ack_bit = (pos == 4'd8);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st          <= I_IDLE;
      qd          <= '0;
      q           <= '0;
      byten       <= '0;
      pos         <= '0;
      data        <= '0;
      scl         <= 1'b1;
      sda_oe      <= 1'b0;
      temperature <= '0;
      humidity    <= '0;
      valid       <= 1'b0;
      nack        <= 1'b0;
      nack_q      <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (st != I_IDLE) qd <= qend ? '0 : qd + 1'b1;
      if (st != I_IDLE && qend) q <= q + 1'b1;
      unique case (st)
        I_IDLE: begin
          scl    <= 1'b1;
          sda_oe <= 1'b0;
          if (req) begin
            st     <= I_START;
            qd     <= '0;
            q      <= '0;
            byten  <= '0;
            pos    <= '0;
            nack_q <= 1'b0;
          end
        end
        I_START: if (qend) begin
          // SDA falls while SCL is high, then SCL falls
          if (q == 2'd1) sda_oe <= 1'b1;
          if (q == 2'd3) begin
            scl <= 1'b0;
            st  <= I_BITS;
          end
        end
        I_BITS: if (qend) begin
          unique case (q)
            2'd0: sda_oe <= drive_low;
            2'd1: scl    <= 1'b1;
            2'd2: begin
              if (byten == 3'd0 && ack_bit) nack_q <= sda_i;
              if (byten != 3'd0 && !ack_bit) data <= {data[30:0], sda_i};
            end
            default: begin
              scl <= 1'b0;
              if (pos == 4'd8) begin
                pos <= '0;
                if (byten == 3'd4) st <= I_STOP;
                byten <= byten + 1'b1;
              end else begin
                pos <= pos + 1'b1;
              end
            end
          endcase
        end
        I_STOP: if (qend) begin
          // SDA rises while SCL is high
          unique case (q)
            2'd0: sda_oe <= 1'b1;
            2'd1: scl    <= 1'b1;
            2'd2: sda_oe <= 1'b0;
            default: begin
              st          <= I_IDLE;
              valid       <= 1'b1;
              nack        <= nack_q;
              temperature <= data[31:16];
              humidity    <= data[15:0];
            end
          endcase
        end
        default: st <= I_IDLE;
      endcase
    end
  end
endmodule

// i2c_sensor_model: behavioural model of the I2C temperature/humidity sensor.
//
// Not synthesizable logic: a test model of the off-board sensor. It watches
// the open-drain bus (`sda` is the wired-AND level), recognises START and
// STOP, acknowledges a read addressed to ADDR, then sends the bytes of
// TEMP and HUM, high bytes first, for as long as the master acknowledges.
// It changes SDA only after falling SCL edges. Edges are seen on the system
// clock. `n_reads` counts transactions addressed to it.
module i2c_sensor_model #(
  parameter logic [6:0]  ADDR = 7'h40,
  parameter logic [15:0] TEMP = 16'h6A3C,
  parameter logic [15:0] HUM  = 16'h5E21
) (
  input  logic clk,
  input  logic scl,
  input  logic sda,
  output logic sda_oe,
  output int   n_reads
);
  typedef enum {M_IDLE, M_ADDR, M_READ} mode_t;
  mode_t mode = M_IDLE;
  logic scl_q = 1, sda_q = 1, macked = 0, match = 0, rose = 0;
  logic [7:0] sh = '0;
  logic [31:0] data;
  int bit_i = 0, byte_i = 0;
  assign data = {TEMP, HUM};
  initial begin
    sda_oe  = 1'b0;
    n_reads = 0;
  end
  function automatic logic dbit(int by, int bi);
    return data[31 - 8*by - bi];
  endfunction
  always @(posedge clk) begin
    scl_q <= scl;
    sda_q <= sda;
    if (scl && scl_q && sda_q && !sda) begin          // START
      mode <= M_ADDR; bit_i <= 0; sda_oe <= 1'b0; rose <= 1'b0;
    end else if (scl && scl_q && !sda_q && sda) begin // STOP
      mode <= M_IDLE; sda_oe <= 1'b0;
    end else if (scl && !scl_q) begin                 // rising SCL
      rose <= 1'b1;
      if (mode == M_ADDR && bit_i < 8) sh <= {sh[6:0], sda};
      if (mode == M_READ && bit_i == 8) macked <= !sda;
    end else if (!scl && scl_q && rose) begin         // falling SCL after a bit
      rose <= 1'b0;
      unique case (mode)
        M_ADDR: begin
          if (bit_i == 7) begin
            match  <= (sh == {ADDR, 1'b1});
            sda_oe <= (sh == {ADDR, 1'b1});
            bit_i  <= 8;
            if (sh == {ADDR, 1'b1}) n_reads <= n_reads + 1;
          end else if (bit_i == 8) begin
            if (match) begin
              mode <= M_READ; byte_i <= 0; bit_i <= 0; sda_oe <= !dbit(0, 0);
            end else begin
              mode <= M_IDLE; sda_oe <= 1'b0;
            end
          end else begin
            bit_i <= bit_i + 1;
          end
        end
        M_READ: begin
          if (bit_i < 7) begin
            bit_i <= bit_i + 1; sda_oe <= !dbit(byte_i, bit_i + 1);
          end else if (bit_i == 7) begin
            bit_i <= 8; sda_oe <= 1'b0;
          end else if (macked && byte_i < 3) begin
            byte_i <= byte_i + 1; bit_i <= 0; sda_oe <= !dbit(byte_i + 1, 0);
          end else begin
            mode <= M_IDLE; sda_oe <= 1'b0;
          end
        end
        default: ;
      endcase
    end
  end
endmodule

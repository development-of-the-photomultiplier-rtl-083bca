// slow_control_cpld: logic of the CPLD on the slow-control board.
//
// The slow-control board sits between the PMT cluster and the readout
// board and carries a test-pulse generator, a temperature and humidity
// sensor on I2C, a DAC setting the Cockcroft-Walton high voltage and an
// ADC monitoring that voltage and the DC anode currents. The CPLD runs
// these devices and answers the FPGA over the serial link of
// sc_link_slave. Each command {write, addr[6:0], data[15:0]} gets the reply
// {status[7:0], data[15:0]}; status is 8'h00 for a known address and 8'hFF
// otherwise. Register map (this design's own):
//
//   0x00-0x07  RW  HV DAC channel values
//   0x08       W   load all HV DAC channels (queued while the DAC is busy)
//   0x10       W   fire one test pulse
//   0x11       RW  test-pulse period in clocks, 0 = no periodic pulses
//   0x20-0x27  R   latest monitor ADC reading of channel 0..7
//   0x30, 0x31 R   temperature, humidity from the last sensor read
//   0x32       W   start a sensor read
//   0x33       R   sensor status {new reading, busy, address not acknowledged}
//   0x34       R   monitor frames completed (16-bit, wraps)
//   0x3F       R   identifier 16'h5C01
//
// Writes reply with the data written. `tp_out` is a TP_WIDTH-clock pulse
// that starts the external test-pulse generator. The paper lists the
// devices and says the CPLD controls them; everything about the link,
// the map and the device protocols is assumed.
module slow_control_cpld #(
  parameter int DAC_DIV    = 4,
  parameter int ADC_DIV    = 8,
  parameter int I2C_QDIV   = 32,
  parameter int TP_WIDTH   = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // link from the FPGA
  input  logic       sc_sclk,
  input  logic       sc_mosi,
  input  logic       sc_cs_n,
  output logic       sc_miso,
  // HV DAC
  output logic       hv_sclk,
  output logic       hv_mosi,
  output logic       hv_cs_n,
  // monitor ADC
  output logic       mon_sclk,
  output logic       mon_mosi,
  output logic       mon_cs_n,
  input  logic       mon_miso,
  // temperature / humidity sensor
  output logic       i2c_scl,
  output logic       i2c_sda_oe,
  input  logic       i2c_sda_i,
  // test pulse generator
  output logic       tp_out
);
  logic        cmd_valid;
  logic [23:0] cmd, rsp;
  logic        wr;
  logic [6:0]  addr;
  logic [15:0] wdata;

  logic [7:0][15:0]  hv_val;
  logic              hv_pending, hv_busy, hv_update;
  logic [7:0][11:0]  mon;
  logic [15:0]       mon_scans;
  logic [15:0]       temp, hum;
  logic              sens_req, sens_nack, sens_busy, sens_valid, sens_fresh;
  logic [15:0]       tp_period, tp_cnt;
  logic [7:0]        tp_w;
  logic              tp_fire, tp_tick;

  assign wr    = cmd[23];
  assign addr  = cmd[22:16];
  assign wdata = cmd[15:0];

  sc_link_slave u_link (
    .clk, .rst_n, .sc_sclk, .sc_mosi, .sc_cs_n, .sc_miso,
    .cmd_valid, .cmd, .rsp
  );

  // reply to the command in the cycle it arrives
  always_comb begin
    rsp = {8'h00, wr ? wdata : 16'h0000};
    if (!wr) begin
      unique casez (addr)
        7'b000_0???: rsp[15:0] = hv_val[addr[2:0]];
        7'h11:       rsp[15:0] = tp_period;
        7'b010_0???: rsp[15:0] = {4'h0, mon[addr[2:0]]};
        7'h30:       rsp[15:0] = temp;
        7'h31:       rsp[15:0] = hum;
        7'h33:       rsp[15:0] = {13'h0, sens_fresh, sens_busy, sens_nack};
        7'h34:       rsp[15:0] = mon_scans;
        7'h3F:       rsp[15:0] = 16'h5C01;
        default:     rsp[23:16] = 8'hFF;
      endcase
    end else begin
      unique casez (addr)
        7'b000_0???, 7'h08, 7'h10, 7'h11, 7'h32: ;
        default: rsp[23:16] = 8'hFF;
      endcase
    end
  end

  assign hv_update = hv_pending && !hv_busy;
  assign tp_tick   = (tp_period != '0) && (tp_cnt >= tp_period - 1'b1);
  assign tp_fire   = (cmd_valid && wr && addr == 7'h10) || tp_tick;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hv_val     <= '0;
      hv_pending <= 1'b0;
      tp_period  <= '0;
      tp_cnt     <= '0;
      tp_w       <= '0;
      tp_out     <= 1'b0;
      sens_req   <= 1'b0;
      sens_fresh <= 1'b0;
    end else begin
      sens_req <= 1'b0;
      if (sens_valid) sens_fresh <= 1'b1;
      if (hv_update) hv_pending <= 1'b0;
      if (cmd_valid && wr) begin
        unique casez (addr)
          7'b000_0???: hv_val[addr[2:0]] <= wdata;
          7'h08:       hv_pending <= 1'b1;
          7'h11:       tp_period <= wdata;
          7'h32:       begin sens_req <= 1'b1; sens_fresh <= 1'b0; end
          default: ;
        endcase
      end
      // periodic test pulses
      if (tp_period != '0) begin
        if (tp_tick) begin
          tp_cnt <= '0;
        end else begin
          tp_cnt <= tp_cnt + 1'b1;
        end
      end else begin
        tp_cnt <= '0;
      end
      if (tp_fire) begin
        tp_out <= 1'b1;
        tp_w   <= 8'(TP_WIDTH - 1);
      end else if (tp_w != '0) begin
        tp_w <= tp_w - 1'b1;
      end else begin
        tp_out <= 1'b0;
      end
    end
  end

  spi_dac_loader #(.N_CH(8), .CLK_DIV(DAC_DIV)) u_hv_dac (
    .clk, .rst_n, .update(hv_update), .values(hv_val),
    .sclk(hv_sclk), .mosi(hv_mosi), .cs_n(hv_cs_n), .busy(hv_busy)
  );

  mon_adc_scanner #(.N_CH(8), .CLK_DIV(ADC_DIV)) u_mon (
    .clk, .rst_n, .sclk(mon_sclk), .mosi(mon_mosi), .cs_n(mon_cs_n),
    .miso(mon_miso), .result(mon), .n_scans(mon_scans)
  );

  i2c_sensor_reader #(.QDIV(I2C_QDIV)) u_sensor (
    .clk, .rst_n, .req(sens_req), .scl(i2c_scl), .sda_oe(i2c_sda_oe),
    .sda_i(i2c_sda_i), .temperature(temp), .humidity(hum),
    .valid(sens_valid), .nack(sens_nack), .busy(sens_busy)
  );
endmodule

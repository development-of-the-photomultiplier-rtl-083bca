// tb_slow_control_cpld: exercises the slow-control CPLD through its link.
//
// The testbench plays the FPGA side of the link with its own bit-level
// task (24 command bits out, 24 reply bits in, 16 clocks per bit) and
// attaches models of the HV DAC, the monitor ADC and the I2C sensor. It
// checks: HV values written, read back and loaded into the DAC; an
// unknown address answered with status FF; a single test pulse of
// TP_WIDTH clocks and periodic pulses at the programmed period; monitor
// readings equal to the ADC model's codes; a sensor read returning the
// model's temperature and humidity with the address acknowledged.
module tb_slow_control_cpld;
  logic clk = 0, rst_n = 0;
  logic sc_sclk = 0, sc_mosi = 0, sc_cs_n = 1, sc_miso;
  logic hv_sclk, hv_mosi, hv_cs_n, mon_sclk, mon_mosi, mon_cs_n, mon_miso;
  logic i2c_scl, i2c_sda_oe, sens_oe, sda, tp_out;
  logic [7:0][15:0] hv_val;
  int hv_frames, hv_bad, n_reads, checks = 0, failures = 0, n_tp = 0;
  logic tp_q = 0;

  always #5 clk = ~clk;
  assign sda = !(i2c_sda_oe || sens_oe);

  slow_control_cpld #(.DAC_DIV(4), .ADC_DIV(8), .I2C_QDIV(8), .TP_WIDTH(4)) dut (
    .clk, .rst_n, .sc_sclk, .sc_mosi, .sc_cs_n, .sc_miso, .hv_sclk, .hv_mosi, .hv_cs_n,
    .mon_sclk, .mon_mosi, .mon_cs_n, .mon_miso, .i2c_scl, .i2c_sda_oe, .i2c_sda_i(sda), .tp_out);
  dac_model hv (.clk, .sclk(hv_sclk), .mosi(hv_mosi), .cs_n(hv_cs_n), .value(hv_val), .n_frames(hv_frames), .n_bad(hv_bad));
  mon_adc_model adc (.clk, .sclk(mon_sclk), .mosi(mon_mosi), .cs_n(mon_cs_n), .miso(mon_miso));
  i2c_sensor_model sensor (.clk, .scl(i2c_scl), .sda, .sda_oe(sens_oe), .n_reads);

  always @(posedge clk) begin
    tp_q <= tp_out;
    if (tp_out && !tp_q) n_tp <= n_tp + 1;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic link(input logic [23:0] cmd, output logic [23:0] rsp);
    sc_cs_n = 0;
    for (int b = 0; b < 48; b++) begin
      sc_sclk = 0;
      sc_mosi = (b < 24) ? cmd[23 - b] : 1'b0;
      repeat (8) @(negedge clk);
      if (b >= 24) rsp = {rsp[22:0], sc_miso};
      sc_sclk = 1;
      repeat (8) @(negedge clk);
    end
    sc_sclk = 0;
    repeat (8) @(negedge clk);
    sc_cs_n = 1;
    repeat (8) @(negedge clk);
  endtask

  task automatic wr(logic [6:0] a, logic [15:0] d);
    logic [23:0] r;
    link({1'b1, a, d}, r);
    check(r == {8'h00, d}, $sformatf("write %h: reply %h", a, r));
  endtask

  task automatic rd(logic [6:0] a, output logic [23:0] r);
    link({1'b0, a, 16'h0}, r);
  endtask

  initial begin
    logic [23:0] r;
    logic [7:0][15:0] hv;
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    rd(7'h3F, r);
    check(r == 24'h00_5C01, $sformatf("identifier %h", r));
    rd(7'h55, r);
    check(r[23:16] == 8'hFF, "unknown address flagged");
    // high voltage
    for (int i = 0; i < 8; i++) begin
      hv[i] = 16'(1000 + 37 * i);
      wr(7'(i), hv[i]);
    end
    rd(7'h05, r);
    check(r == {8'h00, hv[5]}, "HV value read back");
    wr(7'h08, 16'h0);
    repeat (2000) @(negedge clk);
    check(hv_frames == 8 && hv_val == hv, $sformatf("HV DAC loaded (%0d frames)", hv_frames));
    // test pulses
    t0 = n_tp;
    wr(7'h10, 16'h0);
    repeat (20) @(negedge clk);
    check(n_tp == t0 + 1, "single test pulse");
    wr(7'h11, 16'd200);
    t0 = n_tp;
    repeat (2000) @(negedge clk);
    check(n_tp - t0 >= 9 && n_tp - t0 <= 11, $sformatf("%0d periodic pulses in 2000 clocks at period 200", n_tp - t0));
    wr(7'h11, 16'd0);
    t0 = n_tp;
    repeat (1000) @(negedge clk);
    check(n_tp == t0, "periodic pulses stopped");
    // monitor ADC: all channels have been scanned by now
    for (int c = 0; c < 8; c++) begin
      rd(7'(7'h20 + c), r);
      check(r == {8'h00, 4'h0, 12'(c * 500 + 77)}, $sformatf("monitor channel %0d = %h", c, r));
    end
    // sensor
    wr(7'h32, 16'h0);
    repeat (3000) @(negedge clk);
    rd(7'h30, r);
    check(r[15:0] == 16'h6A3C, $sformatf("temperature %h", r[15:0]));
    rd(7'h31, r);
    check(r[15:0] == 16'h5E21, $sformatf("humidity %h", r[15:0]));
    rd(7'h33, r);
    check(r[2:0] == 3'b100 && n_reads == 1, "sensor acknowledged, idle, new reading");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

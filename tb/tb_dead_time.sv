// tb_dead_time: dead time of 60-cell readout at 1 kHz and 7 kHz.
//
// Runs the whole unit (default sizes, 133 MHz clock) with L1 triggers at
// random, exponentially distributed intervals at mean rates of 7 kHz and
// then 1 kHz, the two rates at which the readout's dead time was measured
// on the hardware (0.9 % at 1 kHz and 5.4 % at 7 kHz). For each rate it
// reads the busy-cycle and lost-trigger counters over the register bus and
// prints the dead-time fraction and the busy time per event. Checks: every
// accepted event reaches the Ethernet side complete (bytes counted), the
// busy time per event is the same at both rates (no back-pressure from the
// SRAM or Ethernet), and the dead-time fraction is within 0.5 to 2 times the
// hardware figures.
module tb_dead_time;
  import dragon_pkg::*;

  localparam real CLK_MHZ = 133.333;

  logic clk = 0, rst_n = 0, trig_in = 0;
  logic drs_denable, drs_dwrite, drs_rsrload, drs_srclk, drs_srout;
  logic [N_LANE-1:0][ADC_BITS-1:0] adc_data;
  logic thr_sclk, thr_mosi, thr_cs_n, drsdac_sclk, drsdac_mosi, drsdac_cs_n;
  logic [SRAM_AW-1:0] sram_addr; logic sram_we_n, sram_dq_oe;
  logic [SRAM_DW-1:0] sram_dq_o, sram_dq_i;
  logic tcp_open = 1, tcp_tx_full = 0, tcp_tx_wr;
  logic [7:0] tcp_tx_data;
  logic rbcp_act = 0, rbcp_we = 0, rbcp_re = 0, rbcp_ack;
  logic [31:0] rbcp_addr = '0;
  logic [7:0] rbcp_wd = '0, rbcp_rd;
  logic hv_sclk, hv_mosi, hv_cs_n, mon_sclk, mon_mosi, mon_cs_n, mon_miso = 0;
  logic i2c_scl, i2c_sda_oe, tp_out;
  logic [11:0] last_stop; int n_drs_events, sram_w, sram_r;
  longint tx_bytes = 0;
  int checks = 0, failures = 0;

  always #3.75 clk = ~clk;
  dragon_top dut (.*, .i2c_sda_i(!i2c_sda_oe));
  drs4_adc_model #(.ADC_LAT(3), .N_LANE(N_LANE)) drs (.clk, .denable(drs_denable), .dwrite(drs_dwrite),
    .rsrload(drs_rsrload), .srclk(drs_srclk), .srout(drs_srout), .adc_data, .last_stop, .n_events(n_drs_events));
  sram_model sram (.clk, .addr(sram_addr), .we_n(sram_we_n), .dq_o(sram_dq_o), .dq_i(sram_dq_i),
    .n_writes(sram_w), .n_reads(sram_r));

  always @(posedge clk) if (rst_n && tcp_tx_wr) tx_bytes++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask
  task automatic wr(logic [31:0] a, logic [7:0] d);
    @(negedge clk);
    rbcp_act = 1; rbcp_we = 1; rbcp_addr = a; rbcp_wd = d;
    @(negedge clk);
    rbcp_act = 0; rbcp_we = 0;
  endtask
  task automatic rd32(logic [31:0] a, output logic [31:0] v);
    v = 0;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      rbcp_act = 1; rbcp_re = 1; rbcp_addr = a + i;
      @(negedge clk);
      rbcp_act = 0; rbcp_re = 0;
      v = {v[23:0], rbcp_rd};
    end
  endtask

  // one run at `rate_khz`; returns dead fraction and busy clocks per event
  task automatic run(real rate_khz, int n_trig, output real dead, output real per_event);
    logic [31:0] dc, lost, now, ev;
    longint b0;
    real mean = CLK_MHZ * 1000.0 / rate_khz;
    wr(32'h01, 8'h08);                        // clear counters
    b0 = tx_bytes;
    for (int i = 0; i < n_trig; i++) begin
      real u = (real'($urandom_range(1, 1000000))) / 1000000.0;
      int gap = int'(-mean * $ln(u));
      repeat (gap) @(negedge clk);
      trig_in = 1;
      @(negedge clk);
      trig_in = 0;
    end
    repeat (20000) @(negedge clk);
    rd32(32'h48, dc);
    rd32(32'h44, lost);
    rd32(32'h58, now);
    rd32(32'h40, ev);
    dead = real'(dc) / real'(now);
    per_event = real'(dc) / real'(ev + 1);
    $display("rate %0.1f kHz: %0d triggers, %0d accepted, %0d lost, dead time %0.2f %%, busy %0.0f clocks = %0.2f us per event",
             rate_khz, n_trig, ev + 1, lost, 100.0 * dead, per_event, per_event / CLK_MHZ);
    check(int'(ev) + 1 + int'(lost) == n_trig, "every trigger accepted or counted lost");
    check(tx_bytes - b0 == longint'(ev + 1) * 2 * (HDR_WORDS + 60 * N_LANE), $sformatf("%0d bytes sent", tx_bytes - b0));
  endtask

  initial begin
    real d7, d1, p7, p1;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    wr(32'h00, 8'h01);                        // trigger enable; ROI is 60 after reset
    run(7.0, 200, d7, p7);
    run(1.0, 60, d1, p1);
    check(p7 > p1 - 2.0 && p7 < p1 + 2.0, "same busy time per event at both rates");
    check(d7 > 0.5 * 0.054 && d7 < 2.0 * 0.054, "7 kHz dead time within 2x of 5.4 %");
    check(d1 > 0.5 * 0.009 && d1 < 2.0 * 0.009, "1 kHz dead time within 2x of 0.9 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

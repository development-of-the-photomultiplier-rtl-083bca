// tb_drs4_readout: checks the DRS4 readout controller against the DRS4/ADC
// model. Several triggers with different ROI lengths (including 60 cells
// and zero) are issued; for each the testbench checks the stop position,
// that exactly roi_len samples arrive with cell indices 0..roi_len-1, that
// every lane holds the value the model stored at (stop + cell) mod 4096,
// that samples are RO_DIV clocks apart (33 MHz readout from 133 MHz), that
// sampling stops (DWRITE low) during readout and restarts after, and that
// start-to-done takes the expected number of clocks.
module tb_drs4_readout;
  import dragon_pkg::*;
  import dragon_tb_pkg::*;

  localparam int RO_DIV = 4, ADC_LAT = 3, SETTLE = 8;

  logic clk = 0, rst_n = 0, start = 0;
  logic [ROI_BITS-1:0] roi_len = '0;
  logic denable, dwrite, rsrload, srclk, srout;
  logic [N_LANE-1:0][ADC_BITS-1:0] adc_data, smp_data;
  logic smp_valid, busy, done;
  logic [ROI_BITS-1:0] smp_cell;
  logic [POS_BITS-1:0] stop_pos;
  logic [11:0] last_stop;
  int n_events;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  drs4_readout #(.RO_DIV(RO_DIV), .ADC_LAT(ADC_LAT), .STOP_SETTLE(SETTLE)) dut (
    .clk, .rst_n, .start, .roi_len, .drs_denable(denable), .drs_dwrite(dwrite),
    .drs_rsrload(rsrload), .drs_srclk(srclk), .drs_srout(srout), .adc_data,
    .smp_valid, .smp_cell, .smp_data, .stop_pos, .busy, .done);

  drs4_adc_model #(.ADC_LAT(ADC_LAT), .N_LANE(N_LANE)) model (
    .clk, .denable, .dwrite, .rsrload, .srclk, .srout, .adc_data, .last_stop, .n_events);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_event(int roi);
    int got = 0, t0, last_t = -1, cyc = 0;
    bit data_ok = 1, idx_ok = 1, gap_ok = 1, dw_ok = 1;
    roi_len = ROI_BITS'(roi);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin
      @(posedge clk);
      #1;
      cyc++;
      if (dwrite && busy && !done) dw_ok = 0;
      if (smp_valid) begin
        if (smp_cell != ROI_BITS'(got)) idx_ok = 0;
        for (int l = 0; l < N_LANE; l++)
          if (smp_data[l] != drs_cell_value(l, (int'(last_stop) + got) % DEPTH, n_events - 1)) data_ok = 0;
        if (last_t >= 0 && cyc - last_t != RO_DIV) gap_ok = 0;
        last_t = cyc;
        got++;
      end
    end
    check(stop_pos == last_stop, $sformatf("stop position %0d, model %0d", stop_pos, last_stop));
    check(got == roi, $sformatf("roi %0d: got %0d samples", roi, got));
    check(idx_ok, "cell indices in order");
    check(data_ok, $sformatf("sample values roi %0d", roi));
    check(gap_ok, "samples RO_DIV clocks apart");
    check(dw_ok, "DWRITE low while reading");
    // STOP_SETTLE + load + 12 stop bits + (roi + ADC_LAT - 1) read clocks
    t0 = SETTLE + 1 + (POS_BITS + ((roi == 0) ? 0 : roi + ADC_LAT - 1)) * RO_DIV + 1;
    check(cyc == t0, $sformatf("roi %0d: start to done %0d clocks, expected %0d", roi, cyc, t0));
    @(posedge clk); #1;
    check(dwrite && !busy, "sampling restarted");
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (37) @(posedge clk);
    check(denable && dwrite, "domino running after reset");
    run_event(60);
    repeat (101) @(posedge clk);
    run_event(5);
    repeat (17) @(posedge clk);
    run_event(0);
    repeat (3000) @(posedge clk);
    run_event(200);   // wraps around the 4096-cell ring for some stop positions
    run_event(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

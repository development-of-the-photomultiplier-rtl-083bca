// tb_dragon_top: end-to-end test of the whole readout unit at its default
// sizes (4096-cell DRS4 rings, 16 lanes, 1M x 18 SRAM, 60-cell ROI after
// reset).
//
// Around dragon_top sit models of the DRS4 chips with their ADCs, the SRAM,
// the three DACs, the monitor ADC and the I2C sensor; the testbench itself
// plays SiTCP: it issues register-bus accesses and swallows the TCP byte
// stream, declaring the transmit FIFO full at random and closing the
// connection for a while. It programs the board over the register bus,
// talks to the slow-control CPLD through the relayed link, fires L1 and
// software triggers (some deliberately while busy), changes the ROI
// length, and decodes every event from the byte stream: magic word, event
// numbers in sequence, stop position equal to where the model froze, ROI
// length, and every sample equal to the model's cell value. Counters read
// back over the register bus must match what the testbench saw. Each
// mechanism is counted and must have happened at least once.
module tb_dragon_top;
  import dragon_pkg::*;
  import dragon_tb_pkg::*;

  logic clk = 0, rst_n = 0, trig_in = 0;
  logic drs_denable, drs_dwrite, drs_rsrload, drs_srclk, drs_srout;
  logic [N_LANE-1:0][ADC_BITS-1:0] adc_data;
  logic thr_sclk, thr_mosi, thr_cs_n, drsdac_sclk, drsdac_mosi, drsdac_cs_n;
  logic [SRAM_AW-1:0] sram_addr; logic sram_we_n, sram_dq_oe;
  logic [SRAM_DW-1:0] sram_dq_o, sram_dq_i;
  logic tcp_open = 0, tcp_tx_full = 0, tcp_tx_wr;
  logic [7:0] tcp_tx_data;
  logic rbcp_act = 0, rbcp_we = 0, rbcp_re = 0, rbcp_ack;
  logic [31:0] rbcp_addr = '0;
  logic [7:0] rbcp_wd = '0, rbcp_rd;
  logic hv_sclk, hv_mosi, hv_cs_n, mon_sclk, mon_mosi, mon_cs_n, mon_miso;
  logic i2c_scl, i2c_sda_oe, sens_oe, sda, tp_out;

  logic [11:0] last_stop; int n_drs_events;
  int sram_w, sram_r, n_sens;
  logic [7:0][15:0] thr_val, drs_val, hv_val;
  int thr_fr, thr_bad, drs_fr, drs_bad, hv_fr, hv_bad;

  int checks = 0, failures = 0;
  always #3.75 clk = ~clk;   // 133 MHz system clock
  assign sda = !(i2c_sda_oe || sens_oe);

  dragon_top dut (.*, .i2c_sda_i(sda));

  drs4_adc_model #(.ADC_LAT(3), .N_LANE(N_LANE)) drs (.clk, .denable(drs_denable), .dwrite(drs_dwrite),
    .rsrload(drs_rsrload), .srclk(drs_srclk), .srout(drs_srout), .adc_data, .last_stop, .n_events(n_drs_events));
  sram_model sram (.clk, .addr(sram_addr), .we_n(sram_we_n), .dq_o(sram_dq_o), .dq_i(sram_dq_i),
    .n_writes(sram_w), .n_reads(sram_r));
  dac_model thr_dac (.clk, .sclk(thr_sclk), .mosi(thr_mosi), .cs_n(thr_cs_n), .value(thr_val), .n_frames(thr_fr), .n_bad(thr_bad));
  dac_model drs_dac (.clk, .sclk(drsdac_sclk), .mosi(drsdac_mosi), .cs_n(drsdac_cs_n), .value(drs_val), .n_frames(drs_fr), .n_bad(drs_bad));
  dac_model hv_dac (.clk, .sclk(hv_sclk), .mosi(hv_mosi), .cs_n(hv_cs_n), .value(hv_val), .n_frames(hv_fr), .n_bad(hv_bad));
  mon_adc_model mon (.clk, .sclk(mon_sclk), .mosi(mon_mosi), .cs_n(mon_cs_n), .miso(mon_miso));
  i2c_sensor_model sensor (.clk, .scl(i2c_scl), .sda, .sda_oe(sens_oe), .n_reads(n_sens));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- mechanisms
  typedef enum int {M_L1, M_SW, M_LOST, M_ROI_CHANGE, M_TX_FULL, M_TX_CLOSED, M_SRAM_BUF,
                    M_THR_DAC, M_DRS_DAC, M_HV_DAC, M_LINK, M_TEST_PULSE, M_MONITOR, M_SENSOR,
                    M_CLEAR, M_NMECH} mech_t;
  int mech [M_NMECH];
  string mech_name [M_NMECH] = '{"L1 trigger", "software trigger", "lost trigger", "ROI change",
    "TX full stall", "TX closed hold", "SRAM buffering", "threshold DAC", "DRS4 DAC", "HV DAC",
    "CPLD link", "test pulse", "monitor ADC", "sensor read", "counter clear"};
  initial foreach (mech[i]) mech[i] = 0;

  // ---------------------------------------------------------------- stops seen by the DRS4 model
  int stops [$];
  int roi_at [$];
  logic [ROI_BITS-1:0] roi_now = 60;
  int prev_events = 0;
  always @(posedge clk) begin
    if (n_drs_events != prev_events) begin
      prev_events <= n_drs_events;
      stops.push_back(int'(drs.pos));
      roi_at.push_back(int'(roi_now));
    end
  end

  // ---------------------------------------------------------------- TCP byte sink and event decoder
  logic [7:0] hi_byte; bit have_hi = 0;
  int ev_words = 0, ev_seen = 0, ev_bad = 0, expect_len = 0, cur_stop = 0, cur_roi = 0;
  logic [31:0] cur_id = 0;
  int tx_bytes = 0, tcp_open_cycles = 0;
  logic full_q = 0, open_q = 0, wr_blocked = 0;
  logic [15:0] hdr [7];

  task automatic take_word(logic [15:0] w);
    if (ev_words < 7) begin
      hdr[ev_words] = w;
      if (ev_words == 0 && w != EV_MAGIC) begin
        ev_bad++;
        $display("bad magic %h", w);
      end
      if (ev_words == 6) begin
        cur_id   = {hdr[1], hdr[2]};
        cur_stop = int'(hdr[5]);
        cur_roi  = int'(w);
        expect_len = 7 + cur_roi * N_LANE;
        if (cur_id != 32'(ev_seen)) begin ev_bad++; $display("event number %0d, expected %0d", cur_id, ev_seen); end
        if (ev_seen < stops.size() && cur_stop != stops[ev_seen]) begin ev_bad++; $display("stop %0d, model %0d", cur_stop, stops[ev_seen]); end
        if (ev_seen < roi_at.size() && cur_roi != roi_at[ev_seen]) begin ev_bad++; $display("roi %0d, expected %0d", cur_roi, roi_at[ev_seen]); end
      end
    end else begin
      int k = ev_words - 7;
      int lane = k / cur_roi, c = k % cur_roi;
      logic [15:0] e = {4'(lane), drs_cell_value(lane, (cur_stop + c) % DEPTH, ev_seen)};
      if (w != e) begin
        if (ev_bad < 10) $display("event %0d word %0d: %h expected %h", ev_seen, ev_words, w, e);
        ev_bad++;
      end
    end
    ev_words++;
    if (ev_words >= 7 && ev_words == expect_len) begin
      ev_seen++;
      ev_words = 0;
      expect_len = 0;
    end
  endtask

  always @(posedge clk) begin
    full_q <= tcp_tx_full;
    open_q <= tcp_open;
    if (rst_n && tcp_tx_wr) begin
      tx_bytes++;
      if (full_q || !open_q) wr_blocked = 1;
      if (!have_hi) begin
        hi_byte = tcp_tx_data;
        have_hi = 1;
      end else begin
        have_hi = 0;
        take_word({hi_byte, tcp_tx_data});
      end
    end
    if (tcp_tx_full && ev_words != 0) mech[M_TX_FULL]++;
    if (tp_out && !$past(tp_out)) mech[M_TEST_PULSE]++;
  end

  bit rnd_full = 0;
  always @(negedge clk) tcp_tx_full <= rnd_full && ($urandom_range(0, 3) == 0);

  // ---------------------------------------------------------------- register bus
  task automatic wr(logic [31:0] a, logic [7:0] d);
    @(negedge clk);
    rbcp_act = 1; rbcp_we = 1; rbcp_addr = a; rbcp_wd = d;
    @(negedge clk);
    rbcp_act = 0; rbcp_we = 0;
  endtask
  task automatic rd(logic [31:0] a, output logic [7:0] d);
    @(negedge clk);
    rbcp_act = 1; rbcp_re = 1; rbcp_addr = a;
    @(negedge clk);
    rbcp_act = 0; rbcp_re = 0;
    d = rbcp_rd;
  endtask
  task automatic rd32(logic [31:0] a, output logic [31:0] v);
    logic [7:0] b;
    v = 0;
    for (int i = 0; i < 4; i++) begin
      rd(a + i, b);
      v = {v[23:0], b};
    end
  endtask
  task automatic set_roi(int r);
    wr(32'h02, 8'(r >> 8));
    wr(32'h03, 8'(r));
    roi_now = ROI_BITS'(r);
  endtask
  // one command to the slow-control CPLD, reply returned
  task automatic sc(logic [23:0] cmd, output logic [23:0] rsp);
    logic [7:0] b;
    wr(32'h30, cmd[23:16]); wr(32'h31, cmd[15:8]); wr(32'h32, cmd[7:0]);
    wr(32'h01, 8'h10);
    do rd(32'h57, b); while (b[4]);
    rd(32'h54, b); rsp[23:16] = b;
    rd(32'h55, b); rsp[15:8] = b;
    rd(32'h56, b); rsp[7:0] = b;
    mech[M_LINK]++;
  endtask

  task automatic l1_trigger();
    @(negedge clk);
    trig_in = 1;
    @(negedge clk);
    trig_in = 0;
  endtask

  task automatic wait_idle();
    logic [7:0] b;
    do begin
      repeat (50) @(negedge clk);
      rd(32'h57, b);
    end while (b[1:0] != 0);
  endtask

  int n_l1 = 0, n_sw = 0, n_lost = 0;
  int lost_delay [4] = '{50, 400, 800, 1100};

  initial begin
    logic [23:0] r;
    logic [31:0] v;
    logic [7:0] b;
    logic [7:0][15:0] tv, dv;
    int thr_bad0, drs_bad0, hv_bad0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    thr_bad0 = thr_bad; drs_bad0 = drs_bad; hv_bad0 = hv_bad;

    // DAC settings
    for (int i = 0; i < 8; i++) begin
      tv[i] = 16'(300 + 11 * i); dv[i] = 16'(20000 + 500 * i);
      wr(32'h10 + 2*i, tv[i][15:8]); wr(32'h11 + 2*i, tv[i][7:0]);
      wr(32'h20 + 2*i, dv[i][15:8]); wr(32'h21 + 2*i, dv[i][7:0]);
    end
    wr(32'h01, 8'h06);
    repeat (1000) @(negedge clk);
    check(thr_val == tv && thr_bad == thr_bad0, "trigger thresholds in the DAC");
    check(drs_val == dv && drs_bad == drs_bad0, "DRS4 DAC values in the DAC");
    if (thr_val == tv) mech[M_THR_DAC]++;
    if (drs_val == dv) mech[M_DRS_DAC]++;

    // slow control through the CPLD
    sc(24'h3F0000, r);
    check(r == 24'h005C01, $sformatf("CPLD identifier %h", r));
    for (int i = 0; i < 7; i++) sc({1'b1, 7'(i), 16'(2000 + i)}, r);
    sc({1'b1, 7'h08, 16'h0}, r);
    repeat (1000) @(negedge clk);
    check(hv_val[6] == 16'd2006 && hv_val[0] == 16'd2000 && hv_bad == hv_bad0, "HV DAC programmed");
    if (hv_val[6] == 16'd2006) mech[M_HV_DAC]++;
    sc({1'b1, 7'h10, 16'h0}, r);
    sc({1'b0, 7'h23, 16'h0}, r);
    check(r == {8'h00, 4'h0, 12'(3 * 500 + 77)}, $sformatf("monitor channel 3 = %h", r));
    if (r[11:0] == 12'(1577)) mech[M_MONITOR]++;
    sc({1'b1, 7'h32, 16'h0}, r);
    repeat (8000) @(negedge clk);
    sc({1'b0, 7'h30, 16'h0}, r);
    check(r[15:0] == 16'h6A3C, $sformatf("temperature %h", r[15:0]));
    sc({1'b0, 7'h31, 16'h0}, r);
    check(r[15:0] == 16'h5E21, $sformatf("humidity %h", r[15:0]));
    if (r[15:0] == 16'h5E21 && n_sens == 1) mech[M_SENSOR]++;

    // data taking: triggers at the default 60-cell ROI
    tcp_open = 1;
    rnd_full = 1;
    wr(32'h00, 8'h01);
    for (int e = 0; e < 4; e++) begin
      wait_idle();
      repeat ($urandom_range(0, 300)) @(negedge clk);
      l1_trigger(); n_l1++;
      // a second trigger while the unit is busy: during the DRS4 readout
      // (first event) or while the event buffer drains (later ones)
      repeat (lost_delay[e]) @(negedge clk);
      l1_trigger(); n_lost++;
    end
    wait_idle();
    wr(32'h01, 8'h01); n_sw++;          // software trigger
    wait_idle();
    // ROI change
    set_roi(150);
    mech[M_ROI_CHANGE]++;
    for (int e = 0; e < 3; e++) begin
      wait_idle();
      l1_trigger(); n_l1++;
    end
    wait_idle();
    // connection dropped while data waits: first let the backlog drain
    while (ev_seen != n_l1 + n_sw) @(negedge clk);
    tcp_open = 0;
    set_roi(60);
    l1_trigger(); n_l1++;
    repeat (3000) @(negedge clk);
    rd32(32'h50, v);                     // words waiting in the SRAM
    // the whole event minus what the skid buffer (4) and the bridge (1) took
    check(v <= 32'(7 + 60 * N_LANE) && v >= 32'(7 + 60 * N_LANE - 5),
          $sformatf("%0d words held in the SRAM while closed", v));
    if (v > 0) begin
      mech[M_TX_CLOSED]++;
      mech[M_SRAM_BUF]++;
    end
    tcp_open = 1;
    wait_idle();
    rnd_full = 0;
    repeat (20000) @(negedge clk);

    mech[M_L1] = n_l1;
    mech[M_SW] = n_sw;
    rd32(32'h44, v);
    check(v == 32'(n_lost), $sformatf("lost triggers %0d, expected %0d", v, n_lost));
    mech[M_LOST] = int'(v);
    rd32(32'h40, v);
    check(v == 32'(n_l1 + n_sw - 1), $sformatf("last event number %0d", v));
    rd32(32'h48, v);
    check(v > 0, $sformatf("dead time %0d clocks", v));
    check(ev_seen == n_l1 + n_sw, $sformatf("%0d events decoded, %0d triggered", ev_seen, n_l1 + n_sw));
    check(ev_bad == 0, $sformatf("%0d event errors", ev_bad));
    check(ev_words == 0 && !have_hi, "stream ends on an event boundary");
    check(!wr_blocked, "no byte written while SiTCP was full or closed");
    rd32(32'h50, v);
    check(v == 0, "SRAM drained");
    // counter clear
    wr(32'h01, 8'h08);
    rd32(32'h44, v);
    if (v == 0) mech[M_CLEAR]++;
    check(v == 0, "counters cleared");

    for (int m = 0; m < M_NMECH; m++) begin
      $display("mechanism %-16s happened %0d times", mech_name[m], mech[m]);
      check(mech[m] > 0, $sformatf("mechanism %s never happened", mech_name[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_reg_file: checks the register bank through the SiTCP register bus.
//
// It checks the reset value of the ROI length (60), write and read-back of
// the ROI, trigger enable, all threshold and DRS4 DAC values and the
// slow-control command as seen on the decoded outputs, the one-cycle
// pulses of register 0x01 (and that it reads as zero), read-only status
// bytes, unmapped addresses reading zero, and the one-cycle acknowledge.
module tb_reg_file;
  import dragon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rbcp_act = 0, rbcp_we = 0, rbcp_re = 0, rbcp_ack;
  logic [31:0] rbcp_addr = '0;
  logic [7:0] rbcp_wd = '0, rbcp_rd;
  logic [31:0][7:0] status;
  logic trig_enable, sw_trig, thr_update, drs_update, cnt_clear, sc_go;
  logic [ROI_BITS-1:0] roi_len;
  logic [7:0][15:0] thr_values, drs_values;
  logic [23:0] sc_cmd;
  int checks = 0, failures = 0;
  int n_pulse [5] = '{0, 0, 0, 0, 0};

  always #5 clk = ~clk;
  reg_file dut (.clk, .rst_n, .rbcp_act, .rbcp_addr, .rbcp_we, .rbcp_wd, .rbcp_re, .rbcp_ack,
    .rbcp_rd, .status, .trig_enable, .sw_trig, .thr_update, .drs_update, .cnt_clear, .sc_go,
    .roi_len, .thr_values, .drs_values, .sc_cmd);

  always_comb for (int i = 0; i < 32; i++) status[i] = 8'(i * 3 + 1);

  always @(posedge clk) if (rst_n) begin
    n_pulse[0] += int'(sw_trig);
    n_pulse[1] += int'(thr_update);
    n_pulse[2] += int'(drs_update);
    n_pulse[3] += int'(cnt_clear);
    n_pulse[4] += int'(sc_go);
  end

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
    check(rbcp_ack, "write acknowledged");
  endtask

  task automatic rd(logic [31:0] a, output logic [7:0] d);
    @(negedge clk);
    rbcp_act = 1; rbcp_re = 1; rbcp_addr = a;
    @(negedge clk);
    rbcp_act = 0; rbcp_re = 0;
    check(rbcp_ack, "read acknowledged");
    d = rbcp_rd;
  endtask

  initial begin
    logic [7:0] d;
    logic [7:0][15:0] tv, dv;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(roi_len == 60 && !trig_enable, "reset values");
    wr(32'h02, 8'h01); wr(32'h03, 8'h00);
    check(roi_len == 256, $sformatf("roi_len %0d", roi_len));
    rd(32'h03, d); check(d == 8'h00, "roi low byte read back");
    wr(32'h00, 8'h01);
    check(trig_enable, "trigger enable");
    for (int i = 0; i < 8; i++) begin
      tv[i] = 16'($urandom); dv[i] = 16'($urandom);
      wr(32'h10 + 2*i, tv[i][15:8]); wr(32'h11 + 2*i, tv[i][7:0]);
      wr(32'h20 + 2*i, dv[i][15:8]); wr(32'h21 + 2*i, dv[i][7:0]);
    end
    check(thr_values == tv, "threshold DAC values");
    check(drs_values == dv, "DRS4 DAC values");
    rd(32'h1B, d); check(d == tv[5][7:0], "threshold value read back");
    wr(32'h30, 8'h81); wr(32'h31, 8'h23); wr(32'h32, 8'h45);
    check(sc_cmd == 24'h812345, "slow-control command");
    wr(32'h01, 8'h1F);
    wr(32'h01, 8'h01);
    wr(32'h01, 8'h12);
    @(negedge clk);
    check(n_pulse[0] == 2 && n_pulse[1] == 2 && n_pulse[2] == 1 && n_pulse[3] == 1 && n_pulse[4] == 2,
          $sformatf("pulse counts %0d %0d %0d %0d %0d", n_pulse[0], n_pulse[1], n_pulse[2], n_pulse[3], n_pulse[4]));
    check(!sw_trig && !sc_go, "pulses last one cycle");
    rd(32'h01, d); check(d == 8'h00, "pulse register reads zero");
    rd(32'h40, d); check(d == 8'd1, "status byte 0x40");
    rd(32'h5F, d); check(d == 8'd94, "status byte 0x5F");
    rd(32'h1000, d); check(d == 8'h00, "unmapped address reads zero");
    wr(32'h1002, 8'h55);
    check(roi_len == 256, "write outside the map ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

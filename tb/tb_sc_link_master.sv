// tb_sc_link_master: checks the FPGA side of the CPLD link against a
// behavioural slave written here. The slave records the 24 bits clocked
// in on rising SCLK and, after the 24th, returns a reply derived from the
// command ({~cmd[23:16], cmd[15:0] ^ 16'hA5A5}) on the falling edges. The
// testbench checks command bits, reply, framing (48 clocks under one CS_N
// low), the transfer time of 48 * CLK_DIV clocks and that `go` while busy
// is ignored.
module tb_sc_link_master;
  localparam int CLK_DIV = 16;
  logic clk = 0, rst_n = 0, go = 0;
  logic [23:0] cmd = '0, reply;
  logic busy, done, sclk, mosi, cs_n, miso = 0;
  logic [23:0] got_cmd = '0;
  int rises = 0, frames = 0, checks = 0, failures = 0;
  logic sclk_q = 0, cs_q = 1;

  always #5 clk = ~clk;
  sc_link_master #(.CLK_DIV(CLK_DIV)) dut (.clk, .rst_n, .go, .cmd, .reply, .busy, .done,
    .sc_sclk(sclk), .sc_mosi(mosi), .sc_cs_n(cs_n), .sc_miso(miso));

  always @(posedge clk) begin
    sclk_q <= sclk;
    cs_q <= cs_n;
    if (cs_n) begin
      if (!cs_q) frames <= frames + 1;
      rises <= 0;
    end else begin
      if (sclk && !sclk_q) begin
        if (rises < 24) got_cmd <= {got_cmd[22:0], mosi};
        rises <= rises + 1;
      end
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reply bit k (MSB first) goes out on the falling edge after rise 24 + k
  function automatic logic [23:0] expected_reply(logic [23:0] c);
    return {~c[23:16], c[15:0] ^ 16'hA5A5};
  endfunction
  always @(posedge clk) if (!cs_n && !sclk && sclk_q && rises >= 24 && rises < 48)
    miso <= expected_reply(got_cmd)[23 - (rises - 24)];

  task automatic xfer(logic [23:0] c);
    int cyc = 0, f0 = frames;
    @(negedge clk);
    cmd = c; go = 1;
    @(negedge clk);
    go = 0; cmd = '0;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc == 100) begin
        go = 1;
        cmd = 24'hFFFFFF;
        @(negedge clk);
        go = 0;
        cyc++;
      end
    end
    repeat (3) @(negedge clk);
    check(got_cmd == c, $sformatf("command %h seen as %h", c, got_cmd));
    check(reply == expected_reply(c), $sformatf("reply %h, expected %h", reply, expected_reply(c)));
    check(frames == f0 + 1, "one frame");
    check(cyc == 48 * CLK_DIV, $sformatf("transfer took %0d clocks", cyc));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    xfer(24'h801234);
    xfer(24'h3F0000);
    xfer(24'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

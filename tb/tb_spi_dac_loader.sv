// tb_spi_dac_loader: loads random value tables into the DAC model and
// checks that every channel ends up with its value, that exactly N_CH good
// frames and no bad ones are sent per update, that an update while busy is
// ignored, and that a load takes N_CH * 25 * CLK_DIV + 1 clocks.
module tb_spi_dac_loader;
  localparam int N_CH = 8, CLK_DIV = 4;
  logic clk = 0, rst_n = 0, update = 0;
  logic [N_CH-1:0][15:0] values = '0;
  logic sclk, mosi, cs_n, busy;
  logic [7:0][15:0] dac_val;
  int n_frames, n_bad, checks = 0, failures = 0;

  always #5 clk = ~clk;
  spi_dac_loader #(.N_CH(N_CH), .CLK_DIV(CLK_DIV)) dut (.clk, .rst_n, .update, .values, .sclk, .mosi, .cs_n, .busy);
  dac_model dac (.clk, .sclk, .mosi, .cs_n, .value(dac_val), .n_frames, .n_bad);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load(bit poke_while_busy);
    logic [N_CH-1:0][15:0] v;
    int cyc = 0, f0 = n_frames, b0 = n_bad;
    for (int i = 0; i < N_CH; i++) v[i] = 16'($urandom);
    @(negedge clk);
    values = v; update = 1;
    @(negedge clk);
    update = 0;
    values = '1;                     // later changes must not matter
    while (busy) begin
      @(negedge clk);
      cyc++;
      if (poke_while_busy && cyc == 50) begin
        update = 1;
        @(negedge clk);
        update = 0;
        cyc++;
      end
    end
    repeat (4) @(negedge clk);
    check(cyc == N_CH * 25 * CLK_DIV, $sformatf("load took %0d clocks", cyc + 1));
    check(n_frames - f0 == N_CH, $sformatf("%0d frames", n_frames - f0));
    check(n_bad == b0, "no malformed frame");
    for (int i = 0; i < N_CH; i++)
      check(dac_val[i] == v[i], $sformatf("channel %0d = %h, expected %h", i, dac_val[i], v[i]));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    load(0);
    load(1);
    load(0);
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

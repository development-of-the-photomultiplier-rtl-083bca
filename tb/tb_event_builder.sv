// tb_event_builder: checks event buffering and the framed word format.
//
// For each event the testbench sends a header (number, time stamp), a set
// of random lane vectors at their cell indices (in order, at a readout-like
// pace) and the end of readout with stop position and ROI length. It then
// collects the word stream, with the consumer either always ready or
// randomly stalling, and compares every word with the expected header and
// lane-major sample list built from what it sent; it also checks the sof
// and eof flags, that busy stays high until the last word is taken, and,
// with an always-ready consumer, that the drain runs at one word per clock.
module tb_event_builder;
  import dragon_pkg::*;

  logic clk = 0, rst_n = 0;
  logic ev_start = 0, ev_done = 0, s_valid = 0, m_ready = 0;
  logic [31:0] ev_id = 0, ev_ts = 0;
  logic [POS_BITS-1:0] ev_stop = 0;
  logic [ROI_BITS-1:0] ev_roi = 0, s_cell = 0;
  logic [N_LANE-1:0][ADC_BITS-1:0] s_data = '0;
  logic m_valid, busy;
  ev_word_t m_word;
  int checks = 0, failures = 0;
  bit random_ready = 0;

  always #5 clk = ~clk;

  event_builder dut (.clk, .rst_n, .ev_start, .ev_id, .ev_ts, .ev_done, .ev_stop,
    .ev_roi, .s_valid, .s_cell, .s_data, .m_valid, .m_ready, .m_word, .busy);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(negedge clk) m_ready <= random_ready ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic run_event(int roi, logic [31:0] id, logic [31:0] ts, logic [11:0] stop);
    logic [N_LANE-1:0][ADC_BITS-1:0] vecs [];
    logic [15:0] exp_w [$];
    int n = 0, cyc = 0, first = -1, last = -1;
    bit ok = 1, flags_ok = 1;
    vecs = new[roi];
    @(negedge clk);
    ev_start = 1; ev_id = id; ev_ts = ts;
    @(negedge clk);
    ev_start = 0;
    for (int c = 0; c < roi; c++) begin
      for (int l = 0; l < N_LANE; l++) vecs[c][l] = 12'($urandom);
      repeat (3) @(negedge clk);
      s_valid = 1; s_cell = ROI_BITS'(c); s_data = vecs[c];
      @(negedge clk);
      s_valid = 0;
    end
    check(busy, "busy while filling");
    ev_done = 1; ev_stop = stop; ev_roi = ROI_BITS'(roi);
    @(negedge clk);
    ev_done = 0;
    exp_w = {EV_MAGIC, id[31:16], id[15:0], ts[31:16], ts[15:0], 16'(stop), 16'(roi)};
    for (int l = 0; l < N_LANE; l++)
      for (int c = 0; c < roi; c++) exp_w.push_back({4'(l), vecs[c][l]});
    while (n < exp_w.size() && cyc < 100000) begin
      @(posedge clk);
      cyc++;
      if (m_valid && m_ready) begin
        if (m_word.data !== exp_w[n]) begin
          if (ok) $display("word %0d: got %h expected %h", n, m_word.data, exp_w[n]);
          ok = 0;
        end
        if (m_word.sof != (n == 0) || m_word.eof != (n == exp_w.size() - 1)) flags_ok = 0;
        if (first < 0) first = cyc;
        last = cyc;
        n++;
      end
    end
    check(n == exp_w.size(), $sformatf("roi %0d: %0d of %0d words", roi, n, exp_w.size()));
    check(ok, $sformatf("roi %0d: word contents", roi));
    check(flags_ok, "sof/eof flags");
    if (!random_ready)
      check(last - first == exp_w.size() - 1, $sformatf("one word per clock (%0d clocks for %0d words)", last - first + 1, exp_w.size()));
    @(posedge clk); #1;
    check(!busy && !m_valid, "idle after the last word");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    run_event(60, 32'h0000_0001, 32'h1234_5678, 12'd4000);
    run_event(3, 32'hABCD_0002, 32'h0000_00FF, 12'd7);
    random_ready = 1;
    run_event(60, 32'h0000_0003, 32'h8000_0001, 12'd4095);
    run_event(0, 32'h0000_0004, 32'h0000_0002, 12'd1);
    run_event(17, 32'h0000_0005, 32'h0000_0003, 12'd2);
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

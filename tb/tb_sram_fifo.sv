// tb_sram_fifo: checks the SRAM-backed FIFO with the pipelined SRAM model.
//
// A small address width (64 words) lets the test fill the memory. Phase 1
// writes until the FIFO refuses input and checks that it held exactly
// 2**AW words (plus what sits in the on-chip skid buffer) and reports the
// level. Phase 2 drains and refills with random valid and ready patterns.
// Every word carries a sequence number, so the consumer checks order and
// completeness. The last phase runs the default 1M-word size briefly.
module tb_sram_fifo;
  localparam int AW = 6, DW = 18, RD_LAT = 2;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // small instance
  logic in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [DW-1:0] in_data = '0, out_data;
  logic [AW-1:0] a; logic we_n, oe; logic [DW-1:0] dqo, dqi; logic [AW:0] level;
  int nw, nr;
  sram_fifo #(.AW(AW), .DW(DW), .RD_LAT(RD_LAT)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .sram_addr(a), .sram_we_n(we_n), .sram_dq_o(dqo),
    .sram_dq_oe(oe), .sram_dq_i(dqi), .level);
  sram_model #(.AW(AW), .DW(DW), .RD_LAT(RD_LAT)) mem (.clk, .addr(a), .we_n, .dq_o(dqo), .dq_i(dqi),
    .n_writes(nw), .n_reads(nr));

  // full-size instance
  logic f_in_valid = 0, f_out_ready = 1, f_in_ready, f_out_valid;
  logic [DW-1:0] f_in_data = '0, f_out_data;
  logic [19:0] fa; logic f_we_n, f_oe; logic [DW-1:0] fdqo, fdqi; logic [20:0] f_level;
  int fnw, fnr;
  sram_fifo big (.clk, .rst_n, .in_valid(f_in_valid), .in_ready(f_in_ready), .in_data(f_in_data),
    .out_valid(f_out_valid), .out_ready(f_out_ready), .out_data(f_out_data), .sram_addr(fa),
    .sram_we_n(f_we_n), .sram_dq_o(fdqo), .sram_dq_oe(f_oe), .sram_dq_i(fdqi), .level(f_level));
  sram_model big_mem (.clk, .addr(fa), .we_n(f_we_n), .dq_o(fdqo), .dq_i(fdqi), .n_writes(fnw), .n_reads(fnr));

  int sent = 0, rcvd = 0, f_sent = 0, f_rcvd = 0;
  bit order_ok = 1, f_order_ok = 1, rnd_in = 0, rnd_out = 0, stop_in = 0;

  // producer and consumer of the small instance
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) sent <= sent + 1;
    if (rst_n && out_valid && out_ready) begin
      if (out_data != DW'(rcvd)) order_ok = 0;
      rcvd <= rcvd + 1;
    end
  end
  always @(negedge clk) begin
    in_valid  <= !stop_in && (!rnd_in || $urandom_range(0, 1) == 1);
    in_data   <= DW'(sent);
    out_ready <= rnd_out ? ($urandom_range(0, 2) == 0) : out_ready;
  end
  always @(posedge clk) begin
    if (rst_n && f_in_valid && f_in_ready) f_sent <= f_sent + 1;
    if (rst_n && f_out_valid && f_out_ready) begin
      if (f_out_data != DW'(f_rcvd * 7)) f_order_ok = 0;
      f_rcvd <= f_rcvd + 1;
    end
  end
  always @(negedge clk) begin
    f_in_valid <= (f_sent < 500);
    f_in_data  <= DW'(f_sent * 7);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: fill with the consumer stopped
    out_ready = 0;
    repeat (400) @(posedge clk);
    check(!in_ready, "input refused when full");
    check(level == (AW+1)'(2**AW), $sformatf("level %0d when full", level));
    check(sent == 2**AW + 4, $sformatf("accepted %0d words (2**AW + skid)", sent));
    check(nw == sent, "one SRAM write per accepted word");
    // phase 2: random traffic
    rnd_in = 1; rnd_out = 1;
    repeat (5000) @(posedge clk);
    stop_in = 1; rnd_out = 0; out_ready = 1;
    repeat (400) @(posedge clk);
    check(rcvd == sent && sent > 1000, $sformatf("all words out: sent %0d received %0d", sent, rcvd));
    check(order_ok, "words in order");
    check(level == 0, "empty at the end");
    // full-size instance
    check(f_rcvd == 500 && f_order_ok, $sformatf("1M-word instance passed %0d words in order", f_rcvd));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

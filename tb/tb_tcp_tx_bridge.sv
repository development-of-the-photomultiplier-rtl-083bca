// tb_tcp_tx_bridge: checks the word-to-byte bridge into the SiTCP FIFO.
//
// Random words are offered; the sink records every byte written. Phase 1
// keeps the SiTCP FIFO open and never full and checks the rate of two
// bytes (one word) per two clocks. Phase 2 toggles `tcp_tx_full` and
// `tcp_open` at random and checks that no byte is written while either
// forbids it. Bytes must arrive high byte first, in order, none lost.
module tb_tcp_tx_bridge;
  import dragon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, tcp_open = 1, tcp_tx_full = 0, in_ready, tcp_tx_wr;
  ev_word_t in_word = '0;
  logic [7:0] tcp_tx_data;
  int checks = 0, failures = 0;
  logic [15:0] words [$];
  logic [7:0] bytes_q [$];
  bit rnd = 0, wr_when_blocked = 0;
  logic open_q = 1, full_q = 0;
  int first_wr = -1, last_wr = -1, cyc = 0;

  always #5 clk = ~clk;
  tcp_tx_bridge dut (.clk, .rst_n, .in_valid, .in_ready, .in_word, .tcp_open, .tcp_tx_full, .tcp_tx_wr, .tcp_tx_data);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    open_q <= tcp_open;
    full_q <= tcp_tx_full;
    if (in_valid && in_ready) words.push_back(in_word.data);
    if (tcp_tx_wr) begin
      bytes_q.push_back(tcp_tx_data);
      // the strobe follows a cycle in which writing was allowed
      if (!open_q || full_q) wr_when_blocked = 1;
      if (first_wr < 0) first_wr = cyc;
      last_wr = cyc;
    end
  end

  task automatic send(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_word = ev_word_t'({2'b00, 16'($urandom)});
      do @(posedge clk); while (!in_ready);
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  always @(negedge clk) if (rnd) begin
    tcp_tx_full <= ($urandom_range(0, 3) == 0);
    tcp_open    <= ($urandom_range(0, 15) != 0);
  end

  initial begin
    bit ok = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // back-to-back words
    @(negedge clk);
    in_valid = 1;
    for (int i = 0; i < 100; i++) begin
      in_word = ev_word_t'({2'b00, 16'(i * 515)});
      do @(posedge clk); while (!in_ready);
      #1;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(posedge clk);
    check(bytes_q.size() == 200, $sformatf("200 bytes, got %0d", bytes_q.size()));
    check(last_wr - first_wr == 199, $sformatf("200 bytes in %0d clocks", last_wr - first_wr + 1));
    rnd = 1;
    send(300);
    rnd = 0; tcp_open = 1; tcp_tx_full = 0;
    repeat (20) @(posedge clk);
    check(bytes_q.size() == 2 * words.size(), $sformatf("%0d bytes for %0d words", bytes_q.size(), words.size()));
    for (int i = 0; i < words.size() && 2*i+1 < bytes_q.size(); i++)
      if ({bytes_q[2*i], bytes_q[2*i+1]} != words[i]) ok = 0;
    check(ok, "bytes high first and in order");
    check(!wr_when_blocked, "no write while full or closed");
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

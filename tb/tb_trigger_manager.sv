// tb_trigger_manager: drives random trigger and busy patterns and compares
// the trigger manager cycle by cycle with a reference written here from
// the rules: a trigger is accepted if enabled and neither busy nor within
// two cycles of the previous acceptance; accepted events are numbered from
// zero and stamped with the clock count; other enabled triggers count as
// lost; busy cycles (and the two after an acceptance) count as dead time;
// `clear` zeroes everything.
module tb_trigger_manager;
  logic clk = 0, rst_n = 0, trig_in = 0, sw_trig = 0, enable = 0, busy = 0, clear = 0;
  logic accept;
  logic [31:0] event_id, timestamp, n_lost, dead_cycles, now;
  int checks = 0, failures = 0;
  // reference
  longint r_ts = 0, r_ev = 0, r_lost = 0, r_dead = 0, r_id = 0, r_stamp = 0;
  bit r_acc = 0, r_acc_q = 0;
  int n_acc = 0, n_lost_seen = 0;
  bit match = 1;

  always #5 clk = ~clk;
  trigger_manager dut (.clk, .rst_n, .trig_in, .sw_trig, .enable, .busy, .clear, .accept,
    .event_id, .timestamp, .n_lost, .dead_cycles, .now);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    bit blocked, t;
    if (clear) begin
      r_ts = 0; r_ev = 0; r_lost = 0; r_dead = 0; r_id = 0; r_stamp = 0; r_acc = 0; r_acc_q = 0;
    end else begin
      t = (trig_in || sw_trig) && enable;
      blocked = busy || r_acc || r_acc_q;
      if (blocked) r_dead++;
      r_acc_q = r_acc;
      r_acc = 0;
      if (t) begin
        if (blocked) begin
          r_lost++;
          n_lost_seen++;
        end else begin
          r_acc = 1; r_id = r_ev; r_stamp = r_ts; r_ev++; n_acc++;
        end
      end
      r_ts++;
    end
  end

  always @(negedge clk) if (rst_n) begin
    if (accept != r_acc || n_lost != 32'(r_lost) || dead_cycles != 32'(r_dead) || now != 32'(r_ts)) match = 0;
    if (r_acc && (event_id != 32'(r_id) || timestamp != 32'(r_stamp))) match = 0;
    trig_in <= ($urandom_range(0, 9) == 0);
    sw_trig <= ($urandom_range(0, 29) == 0);
    busy    <= (busy ? ($urandom_range(0, 5) != 0) : ($urandom_range(0, 7) == 0));
    clear   <= ($urandom_range(0, 2999) == 0);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (200) @(posedge clk);
    check(n_acc == 0 && accept == 0, "nothing accepted while disabled");
    enable = 1;
    repeat (20000) @(posedge clk);
    @(negedge clk);
    check(match, "matches the reference every cycle");
    check(n_acc > 100 && n_lost_seen > 100, $sformatf("%0d accepted, %0d lost", n_acc, n_lost_seen));
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

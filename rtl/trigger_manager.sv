// trigger_manager: accepts triggers, numbers and time-stamps events, and
// measures dead time.
//
// A trigger (the L1 pulse from the trigger mezzanine, or a software trigger
// from the register bank) is accepted when triggering is enabled and the
// readout chain is not busy. An accepted trigger produces a one-cycle
// `accept` pulse together with the event number and the free-running time
// stamp latched in the same cycle; `now` is the running time stamp. Triggers arriving while busy are counted
// as lost; every busy cycle is counted so the dead-time fraction is
// dead_cycles / elapsed cycles. The paper reports dead time for 60-cell
// readout but does not say how the veto is made: the busy veto and counters
// are this design's choice. All inputs are synchronous one-cycle pulses;
// `clear` zeroes the counters. Latency: accept is registered, one cycle after
// the trigger.
module trigger_manager #(
  parameter int TS_BITS = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               trig_in,
  input  logic               sw_trig,
  input  logic               enable,
  input  logic               busy,
  input  logic               clear,
  output logic               accept,
  output logic [31:0]        event_id,
  output logic [TS_BITS-1:0] timestamp,
  output logic [31:0]        n_lost,
  output logic [31:0]        dead_cycles,
  output logic [TS_BITS-1:0] now          // free-running clock count
);
  logic [TS_BITS-1:0] ts_cnt;
  logic [31:0]        ev_cnt;
  logic               trig;
  logic               busy_q;

  assign trig = (trig_in || sw_trig) && enable;
  assign now  = ts_cnt;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      ts_cnt      <= '0;
      ev_cnt      <= '0;
      accept      <= 1'b0;
      event_id    <= '0;
      timestamp   <= '0;
      n_lost      <= '0;
      dead_cycles <= '0;
      busy_q      <= 1'b0;
    end else begin
      ts_cnt <= ts_cnt + 1'b1;
      accept <= 1'b0;
      // busy_q covers the cycle between accept and the readout raising busy
      busy_q <= accept;
      if (busy || accept || busy_q) dead_cycles <= dead_cycles + 1'b1;
      if (trig) begin
        if (busy || accept || busy_q) begin
          n_lost <= n_lost + 1'b1;
        end else begin
          accept    <= 1'b1;
          event_id  <= ev_cnt;
          timestamp <= ts_cnt;
          ev_cnt    <= ev_cnt + 1'b1;
        end
      end
    end
  end
endmodule

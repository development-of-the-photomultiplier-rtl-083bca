// sram_fifo: the external 18 Mbit SRAM used as a large first-in first-out
// buffer between the event builder and the Ethernet transmitter.
//
// The SRAM is a single-port synchronous part (1M x 18 by default): each
// cycle the controller issues at most one access, a write of the incoming
// word at the write pointer or a read at the read pointer. Writes win: the
// event builder then drains its buffer at one word per clock, which keeps
// the trigger dead time short, while the Ethernet side, which needs only
// one word every two clocks, catches up between events. (Input that never
// paused would starve the output; event data always pauses.) Address, write strobe
// and write data are registered onto the pins; read data returns RD_LAT
// clocks after the address appears there. Read words land in a small
// on-chip skid FIFO (SKID entries) that feeds the output stream; a read is
// only issued while the skid FIFO has room for it and for all reads still
// in flight, so no returning word is ever dropped. `level` is the number
// of words held in the SRAM. Input and output are valid/ready streams.
//
// The paper says only that the FPGA drives an 18 Mbit SRAM that stores
// large amounts of data before transmission; the SRAM organisation, its
// latency and the write-first arbitration are this design's choices.
module sram_fifo
  import dragon_pkg::*;
#(
  parameter int AW     = SRAM_AW,
  parameter int DW     = SRAM_DW,
  parameter int RD_LAT = 2,
  parameter int SKID   = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data,
  // SRAM pins
  output logic [AW-1:0] sram_addr,
  output logic          sram_we_n,
  output logic [DW-1:0] sram_dq_o,
  output logic          sram_dq_oe,
  input  logic [DW-1:0] sram_dq_i,
  output logic [AW:0]   level
);
  localparam int SW = $clog2(SKID);

  logic [AW-1:0]   wr_ptr, rd_ptr;
  logic [RD_LAT:0] rd_pipe;
  logic [SW:0]     inflight, sk_cnt;
  logic [SW-1:0]   sk_wp, sk_rp;
  logic [DW-1:0]   skid [SKID];
  logic            full, can_read, do_write, do_read, ret, pop;

  assign full      = level[AW];
  assign can_read  = (level != '0) && ((sk_cnt + inflight) < (SW+1)'(SKID));
  assign in_ready  = !full;
  assign do_write  = in_valid && in_ready;
  assign do_read   = can_read && !do_write;
  assign ret       = rd_pipe[RD_LAT];
  assign out_valid = (sk_cnt != '0);
  assign out_data  = skid[sk_rp];
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      level      <= '0;
      rd_pipe    <= '0;
      inflight   <= '0;
      sk_cnt     <= '0;
      sk_wp      <= '0;
      sk_rp      <= '0;
      sram_addr  <= '0;
      sram_we_n  <= 1'b1;
      sram_dq_o  <= '0;
      sram_dq_oe <= 1'b0;
    end else begin
      sram_we_n  <= !do_write;
      sram_dq_oe <= do_write;
      sram_dq_o  <= in_data;
      sram_addr  <= do_write ? wr_ptr : rd_ptr;
      if (do_write) wr_ptr <= wr_ptr + 1'b1;
      if (do_read)  rd_ptr <= rd_ptr + 1'b1;
      level    <= level + (AW+1)'(do_write) - (AW+1)'(do_read);
      rd_pipe  <= {rd_pipe[RD_LAT-1:0], do_read};
      inflight <= inflight + (SW+1)'(do_read) - (SW+1)'(ret);
      if (ret) begin
        skid[sk_wp] <= sram_dq_i;
        sk_wp       <= sk_wp + 1'b1;
      end
      if (pop) sk_rp <= sk_rp + 1'b1;
      sk_cnt <= sk_cnt + (SW+1)'(ret) - (SW+1)'(pop);
    end
  end

  // a returning read always finds room in the skid FIFO
  assert property (@(posedge clk) disable iff (!rst_n) ret |-> (sk_cnt < (SW+1)'(SKID)) || pop);
  assert property (@(posedge clk) disable iff (!rst_n) !(do_write && full));
endmodule

// sc_link_master: FPGA side of the serial link to the slow-control CPLD.
//
// The slow-control board's devices (HV DAC, monitor ADC, temperature and
// humidity sensor, test-pulse generator) sit behind a CPLD that talks to
// the FPGA; the FPGA relays its commands and replies over Ethernet. One
// transfer keeps SC_CS_N low for 48 bit periods of CLK_DIV clocks each.
// During the first 24 the master shifts out the command {write, addr[6:0],
// data[15:0]} MSB first on SC_MOSI; during the last 24 it samples the reply
// {status[7:0], data[15:0]} on SC_MISO. SCLK idles low, the master changes
// MOSI while SCLK is low and samples MISO at the rising edge. The CPLD
// oversamples the link with its own clock, so CLK_DIV must leave it half a
// bit period (here 8 clocks) to answer. `done` pulses when `reply` is
// valid; `go` while busy is ignored. The link protocol is this design's;
// the paper says only that FPGA and CPLD communicate.
module sc_link_master #(
  parameter int CLK_DIV = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        go,
  input  logic [23:0] cmd,
  output logic [23:0] reply,
  output logic        busy,
  output logic        done,
  output logic        sc_sclk,
  output logic        sc_mosi,
  output logic        sc_cs_n,
  input  logic        sc_miso
);
  localparam int DW = $clog2(CLK_DIV);
  logic [23:0]   cmd_q;
  logic [5:0]    bitn;
  logic [DW-1:0] div;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cmd_q   <= '0;
      reply   <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      bitn    <= '0;
      div     <= '0;
      sc_sclk <= 1'b0;
      sc_mosi <= 1'b0;
      sc_cs_n <= 1'b1;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        sc_cs_n <= 1'b1;
        sc_sclk <= 1'b0;
        if (go) begin
          busy  <= 1'b1;
          cmd_q <= cmd;
          bitn  <= '0;
          div   <= '0;
        end
      end else begin
        sc_cs_n <= 1'b0;
        div <= (div == DW'(CLK_DIV - 1)) ? '0 : div + 1'b1;
        if (div == '0) begin
          sc_sclk <= 1'b0;
          sc_mosi <= (bitn < 6'd24) ? cmd_q[23 - bitn] : 1'b0;
        end
        if (div == DW'(CLK_DIV / 2)) begin
          sc_sclk <= 1'b1;
          if (bitn >= 6'd24) reply <= {reply[22:0], sc_miso};
        end
        if (div == DW'(CLK_DIV - 1)) begin
          if (bitn == 6'd47) begin
            busy    <= 1'b0;
            done    <= 1'b1;
            sc_sclk <= 1'b0;
          end
          bitn <= bitn + 1'b1;
        end
      end
    end
  end
endmodule

// dac_model: behavioural model of an 8-channel serial DAC.
//
// Not synthesizable logic: a test model of the off-board DAC. While CS_N is
// low it samples MOSI on each rising SCLK edge; when CS_N rises it takes a
// 24-bit frame {command[3:0], channel[3:0], value[15:0]}. Command 4'h3
// (write and update) sets `value[channel]`. Frames of another length or
// command count in `n_bad` (a CS_N pulse without clocks is ignored); good frames in `n_frames`. Edges are seen on
// the system clock, as the DAC pins are driven from registers.
module dac_model (
  input  logic             clk,
  input  logic             sclk,
  input  logic             mosi,
  input  logic             cs_n,
  output logic [7:0][15:0] value,
  output int               n_frames,
  output int               n_bad
);
  logic sclk_q = 0, cs_q = 1;
  logic [31:0] sh = '0;
  int nbits = 0;
  initial begin
    value = '0;
    n_frames = 0;
    n_bad = 0;
  end
  always @(posedge clk) begin
    sclk_q <= sclk;
    cs_q   <= cs_n;
    if (!cs_n && sclk && !sclk_q) begin
      sh    <= {sh[30:0], mosi};
      nbits <= nbits + 1;
    end
    if (cs_n && !cs_q) begin
      if (nbits == 24 && sh[23:20] == 4'h3 && sh[19:16] < 8) begin
        value[sh[18:16]] <= sh[15:0];
        n_frames <= n_frames + 1;
      end else if (nbits != 0) begin
        n_bad <= n_bad + 1;
        $display("dac_model: bad frame, %0d bits, %h at %0t", nbits, sh, $time);
      end
      nbits <= 0;
    end
  end
endmodule

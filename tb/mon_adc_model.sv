// mon_adc_model: behavioural model of the serial monitor ADC.
//
// Not synthesizable logic: a test model of the off-board ADC. In each
// 16-clock frame (CS_N low) it takes the channel from the first three MOSI
// bits, sampled on rising SCLK, and returns the 12-bit code
// chan_value(channel) in the last twelve bit periods, changing MISO after
// each falling SCLK edge. Edges are seen on the system clock.
module mon_adc_model (
  input  logic clk,
  input  logic sclk,
  input  logic mosi,
  input  logic cs_n,
  output logic miso
);
  function automatic logic [11:0] chan_value(logic [2:0] ch);
    return 12'(ch * 500 + 77);
  endfunction

  logic sclk_q = 0;
  logic [2:0] ch = '0;
  int rises = 0;
  initial miso = 1'b0;
  always @(posedge clk) begin
    sclk_q <= sclk;
    if (cs_n) begin
      rises <= 0;
      miso  <= 1'b0;
    end else begin
      if (sclk && !sclk_q) begin
        if (rises < 3) ch <= {ch[1:0], mosi};
        rises <= rises + 1;
      end
      // after rise i the next bit (i+1) goes out; data occupies bits 4..15
      if (!sclk && sclk_q)
        miso <= (rises >= 4 && rises <= 15) ? chan_value(ch)[15 - rises] : 1'b0;
    end
  end
endmodule

// mon_adc_scanner: keeps the latest reading of every monitor-ADC channel.
//
// The slow-control board monitors the Cockcroft-Walton high voltage and
// the DC anode currents with a multi-channel serial ADC. This scanner
// loops over the N_CH channels without pause: each 16-bit SPI frame (mode
// 0, MSB first, CLK_DIV clocks per bit, CS_N high for CLK_DIV clocks
// between frames) sends {channel[2:0], 13'b0} and receives the 12-bit
// conversion of that channel in the frame's last 12 bits, sampled at the
// rising SCLK edges. The result is stored in `result[channel]` at the end
// of the frame. The ADC part and its frame are assumed; the paper only
// says that the CPLD reads such an ADC.
module mon_adc_scanner #(
  parameter int N_CH    = 8,
  parameter int CLK_DIV = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  output logic                  sclk,
  output logic                  mosi,
  output logic                  cs_n,
  input  logic                  miso,
  output logic [N_CH-1:0][11:0] result,
  output logic [15:0]           n_scans    // completed frames, wraps
);
  localparam int DW = $clog2(CLK_DIV);
  localparam int CW = $clog2(N_CH);
  logic [CW-1:0] ch;
  logic [4:0]    bitn;    // 0..15 frame, 16 gap
  logic [DW-1:0] div;
  logic [15:0]   frame, rx;

  assign frame = {3'(ch), 13'b0};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ch      <= '0;
      bitn    <= '0;
      div     <= '0;
      rx      <= '0;
      sclk    <= 1'b0;
      mosi    <= 1'b0;
      cs_n    <= 1'b1;
      result  <= '0;
      n_scans <= '0;
    end else begin
      div <= (div == DW'(CLK_DIV - 1)) ? '0 : div + 1'b1;
      if (bitn < 5'd16) begin
        cs_n <= 1'b0;
        if (div == '0) begin
          sclk <= 1'b0;
          mosi <= frame[15 - bitn];
        end
        if (div == DW'(CLK_DIV / 2)) begin
          sclk <= 1'b1;
          rx   <= {rx[14:0], miso};
        end
      end else begin
        sclk <= 1'b0;
        cs_n <= 1'b1;
      end
      if (div == DW'(CLK_DIV - 1)) begin
        if (bitn == 5'd15) begin
          result[ch] <= rx[11:0];
          n_scans    <= n_scans + 1'b1;
        end
        if (bitn == 5'd16) begin
          bitn <= '0;
          ch   <= (ch == CW'(N_CH - 1)) ? '0 : ch + 1'b1;
        end else begin
          bitn <= bitn + 1'b1;
        end
      end
    end
  end
endmodule

// spi_dac_loader: writes a table of channel values into a serial DAC.
//
// The readout board sets its trigger thresholds and the DRS4 bias voltages
// through DACs, and the slow-control board sets the Cockcroft-Walton high
// voltage the same way; this one module serves all three. On `update` it
// latches the N_CH values and writes them one channel after another, each
// as a 24-bit SPI frame {4'h3 (write and update channel), channel[3:0],
// value[15:0]}, most significant bit first, SPI mode 0: SCLK idles low,
// MOSI changes while SCLK is low and is sampled by the DAC on the rising
// edge. One bit lasts CLK_DIV clocks (SCLK high for the second half) and
// CS_N returns high for CLK_DIV clocks between frames. `busy` is high from
// `update` until the last frame ends; an update while busy is ignored.
// A full load takes N_CH * 25 * CLK_DIV + 1 clocks. The paper names the
// DACs and what they set; the frame format is this design's choice.
module spi_dac_loader #(
  parameter int N_CH    = 8,
  parameter int CLK_DIV = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  update,
  input  logic [N_CH-1:0][15:0] values,
  output logic                  sclk,
  output logic                  mosi,
  output logic                  cs_n,
  output logic                  busy
);
  localparam int FRAME = 24;
  localparam int CW    = (N_CH > 1) ? $clog2(N_CH) : 1;
  localparam int DW    = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;

  logic [N_CH-1:0][15:0] vals;
  logic [CW-1:0]         ch;
  logic [4:0]            bitn;     // 0..23 frame bits, 24 = gap
  logic [DW-1:0]         div;
  logic [FRAME-1:0]      frame;

  assign frame = {4'h3, 4'(ch), vals[ch]};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      vals <= '0;
      ch   <= '0;
      bitn <= '0;
      div  <= '0;
      sclk <= 1'b0;
      mosi <= 1'b0;
      cs_n <= 1'b1;
    end else if (!busy) begin
      sclk <= 1'b0;
      cs_n <= 1'b1;
      if (update) begin
        busy <= 1'b1;
        vals <= values;
        ch   <= '0;
        bitn <= '0;
        div  <= '0;
      end
    end else begin
      div <= (div == DW'(CLK_DIV - 1)) ? '0 : div + 1'b1;
      if (bitn < 5'(FRAME)) begin
        cs_n <= 1'b0;
        if (div == '0) begin
          sclk <= 1'b0;
          mosi <= frame[5'(FRAME - 1) - bitn];
        end
        if (div == DW'(CLK_DIV / 2)) sclk <= 1'b1;
      end else begin
        sclk <= 1'b0;
        cs_n <= 1'b1;
      end
      if (div == DW'(CLK_DIV - 1)) begin
        if (bitn == 5'(FRAME)) begin
          bitn <= '0;
          if (ch == CW'(N_CH - 1)) busy <= 1'b0;
          else                     ch <= ch + 1'b1;
        end else begin
          bitn <= bitn + 1'b1;
        end
      end
    end
  end
endmodule

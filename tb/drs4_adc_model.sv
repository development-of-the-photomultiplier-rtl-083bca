// drs4_adc_model: behavioural model of the eight DRS4 chips and their ADCs.
//
// Not synthesizable logic: a test model of off-board parts, using the same
// simplified pin protocol as drs4_readout. While DENABLE and DWRITE are
// high the domino position advances by one cell per clock (standing in for
// the GHz sampling) around the 4096-cell cascaded ring. When DWRITE falls
// with DENABLE high
// the position is frozen as the stop position and the event counter
// advances. RSRLOAD loads the stop position into the readout shift
// register; the next 12 SRCLK rising edges shift it out on SROUT, MSB
// first; each further edge presents the next cell (starting at the stop
// position) to the 16 ADC lanes, whose pipelined output appears ADC_LAT
// edges later. Cell contents come from dragon_tb_pkg::drs_cell_value.
// SRCLK edges are detected on the system clock. `last_stop` and `n_events`
// are test probes.
module drs4_adc_model
  import dragon_tb_pkg::*;
#(
  parameter int ADC_LAT   = 3,
  parameter int N_LANE    = 16,
  parameter int START_POS = 123
) (
  input  logic                      clk,
  input  logic                      denable,
  input  logic                      dwrite,
  input  logic                      rsrload,
  input  logic                      srclk,
  output logic                      srout,
  output logic [N_LANE-1:0][11:0]   adc_data,
  output logic [11:0]               last_stop,
  output int                        n_events
);
  logic [11:0] pos = 12'(START_POS);
  logic [11:0] sh = '0, rd_ptr = '0;
  int          scnt = 0;
  logic        dwrite_q = 1'b1, srclk_q = 1'b0;
  logic [N_LANE-1:0][11:0] pipe [ADC_LAT];

  initial begin
    last_stop = '0;
    n_events  = 0;
    for (int i = 0; i < ADC_LAT; i++) pipe[i] = '0;
  end

  assign srout    = sh[11];
  assign adc_data = pipe[ADC_LAT-1];

  always @(posedge clk) begin
    dwrite_q <= dwrite;
    srclk_q  <= srclk;
    if (denable && dwrite) pos <= pos + 1'b1;
    if (denable && dwrite_q && !dwrite) begin
      last_stop <= pos;
      n_events  <= n_events + 1;
    end
    if (rsrload) begin
      sh     <= last_stop;
      rd_ptr <= last_stop;
      scnt   <= 12;
    end else if (srclk && !srclk_q) begin
      if (scnt > 0) begin
        sh   <= {sh[10:0], 1'b0};
        scnt <= scnt - 1;
      end else begin
        for (int l = 0; l < N_LANE; l++) pipe[0][l] <= drs_cell_value(l, int'(rd_ptr), n_events - 1);
        for (int i = 1; i < ADC_LAT; i++) pipe[i] <= pipe[i-1];
        rd_ptr <= rd_ptr + 1'b1;
      end
    end
  end
endmodule

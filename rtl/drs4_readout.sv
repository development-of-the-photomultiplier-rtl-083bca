// drs4_readout: DRS4 sampling control and region-of-interest readout.
//
// While idle the domino wave runs (DENABLE and DWRITE high) and the DRS4
// chips sample continuously into their 4096-cell cascaded rings. On `start`
// (an accepted trigger) DWRITE drops, freezing the rings, and after
// STOP_SETTLE cycles the controller pulses RSRLOAD. It then clocks SRCLK,
// which is also the ADC clock, at clk/RO_DIV (33 MHz from a 133 MHz system
// clock): the first POS_BITS rising edges shift in the stop position from
// SROUT, most significant bit first (sampled just before each edge); the
// next roi_len + ADC_LAT - 1 edges step the DRS4 output through roi_len
// consecutive cells beginning at the stop position while the ADC pipeline
// fills. After edge j (counted from the first read edge, j >= ADC_LAT) the
// ADC lanes hold cell j - ADC_LAT; they are captured on the last system
// cycle of that SRCLK period and presented for one cycle with `smp_valid`
// and the cell index. After the last cell the rings are restarted and `done`
// pulses. `busy` is high from `start` to `done`.
//
// Following the paper: the 4096-cell depth (four 1024-cell channels
// cascaded), readout through the DRS4 shift register at 33 MHz into an
// external ADC, and readout of a configurable number of cells. This
// design's own: the exact pin sequence (the DRS4 datasheet protocol is
// simplified to stop-position shift followed by cell stepping), the
// settle time and the ADC latency.
module drs4_readout
  import dragon_pkg::*;
#(
  parameter int RO_DIV      = 4,
  parameter int ADC_LAT     = 3,
  parameter int STOP_SETTLE = 8
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [ROI_BITS-1:0]               roi_len,
  // DRS4 control
  output logic                              drs_denable,
  output logic                              drs_dwrite,
  output logic                              drs_rsrload,
  output logic                              drs_srclk,
  input  logic                              drs_srout,
  // ADC lanes, clocked by drs_srclk
  input  logic [N_LANE-1:0][ADC_BITS-1:0]   adc_data,
  // captured samples
  output logic                              smp_valid,
  output logic [ROI_BITS-1:0]               smp_cell,
  output logic [N_LANE-1:0][ADC_BITS-1:0]   smp_data,
  output logic [POS_BITS-1:0]               stop_pos,
  output logic                              busy,
  output logic                              done
);
  typedef enum logic [2:0] {S_IDLE, S_STOP, S_LOAD, S_POS, S_READ, S_DONE} state_t;
  state_t state;

  localparam int PH_BITS  = $clog2(RO_DIV);
  localparam int CNT_BITS = ROI_BITS + $clog2(ADC_LAT + 1) + 1;

  logic [PH_BITS-1:0]  phase;
  logic [CNT_BITS-1:0] edges;      // rising edges issued in the current phase
  logic [CNT_BITS-1:0] n_read;     // edges needed for the ROI
  logic [7:0]          settle;

  assign busy        = (state != S_IDLE);
  assign n_read      = CNT_BITS'(roi_len) + CNT_BITS'(ADC_LAT) - 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      drs_denable <= 1'b0;
      drs_dwrite  <= 1'b1;
      drs_rsrload <= 1'b0;
      drs_srclk   <= 1'b0;
      phase       <= '0;
      edges       <= '0;
      settle      <= '0;
      smp_valid   <= 1'b0;
      smp_cell    <= '0;
      smp_data    <= '0;
      stop_pos    <= '0;
      done        <= 1'b0;
    end else begin
      smp_valid   <= 1'b0;
      done        <= 1'b0;
      drs_rsrload <= 1'b0;
      drs_denable <= 1'b1;   // domino runs from the first clock after reset
      unique case (state)
        S_IDLE: begin
          drs_dwrite <= 1'b1;
          if (start) begin
            drs_dwrite <= 1'b0;
            settle     <= '0;
            state      <= S_STOP;
          end
        end
        S_STOP: begin
          settle <= settle + 1'b1;
          if (settle == 8'(STOP_SETTLE - 1)) begin
            drs_rsrload <= 1'b1;
            state       <= S_LOAD;
          end
        end
        S_LOAD: begin
          phase <= '0;
          edges <= '0;
          state <= S_POS;
        end
        S_POS: begin
          phase <= (phase == PH_BITS'(RO_DIV - 1)) ? '0 : phase + 1'b1;
          if (phase == '0) begin
            stop_pos  <= {stop_pos[POS_BITS-2:0], drs_srout};
            drs_srclk <= 1'b1;
            edges     <= edges + 1'b1;
          end
          if (phase == PH_BITS'(RO_DIV / 2)) drs_srclk <= 1'b0;
          if (phase == PH_BITS'(RO_DIV - 1) && edges == CNT_BITS'(POS_BITS)) begin
            edges <= '0;
            state <= (roi_len == '0) ? S_DONE : S_READ;
          end
        end
        S_READ: begin
          phase <= (phase == PH_BITS'(RO_DIV - 1)) ? '0 : phase + 1'b1;
          if (phase == '0) begin
            drs_srclk <= 1'b1;
            edges     <= edges + 1'b1;
          end
          if (phase == PH_BITS'(RO_DIV / 2)) drs_srclk <= 1'b0;
          if (phase == PH_BITS'(RO_DIV - 1)) begin
            if (edges >= CNT_BITS'(ADC_LAT)) begin
              smp_valid <= 1'b1;
              smp_cell  <= ROI_BITS'(edges - CNT_BITS'(ADC_LAT));
              smp_data  <= adc_data;
            end
            if (edges == n_read) state <= S_DONE;
          end
        end
        S_DONE: begin
          drs_srclk  <= 1'b0;
          drs_dwrite <= 1'b1;
          done       <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule

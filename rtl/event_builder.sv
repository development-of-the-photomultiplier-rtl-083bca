// event_builder: buffers one DRS4 readout and emits it as a framed word stream.
//
// The 16 ADC lanes arrive together, one lane vector per 33 MHz readout
// clock, which is more data than one SRAM word per system clock can carry.
// The builder therefore writes each lane vector into an on-chip buffer
// (MAX_ROI entries of N_LANE x ADC_BITS, written at the cell index), and
// once the readout reports `ev_done` it drains the buffer as 16-bit words:
//
//   word 0      EV_MAGIC
//   words 1,2   event number, high half first
//   words 3,4   trigger time stamp, high half first
//   word 5      stop position of the DRS4 ring
//   word 6      ROI length (cells per lane)
//   then        for lane 0..N_LANE-1, for cell 0..roi-1: {lane[3:0], adc[11:0]}
//
// The first word carries `sof`, the last `eof`. The output is a valid/ready
// stream; the buffer is read through a one-entry pipeline stage so the
// memory read is synchronous and stalls with the output. `busy` is high
// from `ev_start` until the last word has been accepted, so the next
// trigger is vetoed until the buffer is free (single buffering). The paper
// only says the digitised data pass through the FPGA to the SRAM and
// Ethernet; the buffer and the event format are this design's own.
module event_builder
  import dragon_pkg::*;
#(
  parameter int MAX_ROI = DEPTH
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // event header fields
  input  logic                            ev_start,
  input  logic [31:0]                     ev_id,
  input  logic [31:0]                     ev_ts,
  input  logic                            ev_done,
  input  logic [POS_BITS-1:0]             ev_stop,
  input  logic [ROI_BITS-1:0]             ev_roi,
  // samples from the readout
  input  logic                            s_valid,
  input  logic [ROI_BITS-1:0]             s_cell,
  input  logic [N_LANE-1:0][ADC_BITS-1:0] s_data,
  // word stream
  output logic                            m_valid,
  input  logic                            m_ready,
  output ev_word_t                        m_word,
  output logic                            busy
);
  localparam int AW = $clog2(MAX_ROI);

  logic [N_LANE-1:0][ADC_BITS-1:0] buffer [MAX_ROI];
  logic [N_LANE-1:0][ADC_BITS-1:0] q;

  typedef enum logic [1:0] {B_IDLE, B_FILL, B_DRAIN} bstate_t;
  bstate_t bstate;

  logic [31:0]          id_q, ts_q;
  logic [POS_BITS-1:0]  stop_q;
  logic [ROI_BITS-1:0]  roi_q;
  logic [2:0]           hdr_idx;
  logic [ROI_BITS-1:0]  rd_cell;
  logic [LANE_BITS:0]   lane;        // one extra bit: lane == N_LANE means finished
  logic                 more;        // words left to issue into stage 1
  // stage 1
  logic                 p1_valid, p1_hdr, p1_sof, p1_eof;
  logic [15:0]          p1_hword;
  logic [LANE_BITS-1:0] p1_lane;
  logic                 adv;
  logic                 last_data;
  logic [15:0]          hword;

  assign adv       = !m_valid || m_ready;
  assign more      = (bstate == B_DRAIN) && (hdr_idx < 3'(HDR_WORDS) || lane < (LANE_BITS+1)'(N_LANE));
  assign last_data = (lane == (LANE_BITS+1)'(N_LANE - 1)) && (rd_cell == roi_q - 1'b1);
  assign busy      = (bstate != B_IDLE) || p1_valid || m_valid;

  always_comb begin
    unique case (hdr_idx)
      3'd0:    hword = EV_MAGIC;
      3'd1:    hword = id_q[31:16];
      3'd2:    hword = id_q[15:0];
      3'd3:    hword = ts_q[31:16];
      3'd4:    hword = ts_q[15:0];
      3'd5:    hword = 16'(stop_q);
      default: hword = 16'(roi_q);
    endcase
  end

  // sample buffer: written during the readout, read while draining
  always_ff @(posedge clk) begin
    if (s_valid && bstate == B_FILL) buffer[AW'(s_cell)] <= s_data;
    if (adv) q <= buffer[AW'(rd_cell)];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bstate   <= B_IDLE;
      id_q     <= '0;
      ts_q     <= '0;
      stop_q   <= '0;
      roi_q    <= '0;
      hdr_idx  <= '0;
      rd_cell     <= '0;
      lane     <= '0;
      p1_valid <= 1'b0;
      p1_hdr   <= 1'b0;
      p1_sof   <= 1'b0;
      p1_eof   <= 1'b0;
      p1_hword <= '0;
      p1_lane  <= '0;
      m_valid  <= 1'b0;
      m_word   <= '0;
    end else begin
      unique case (bstate)
        B_IDLE: if (ev_start) begin
          id_q   <= ev_id;
          ts_q   <= ev_ts;
          bstate <= B_FILL;
        end
        B_FILL: if (ev_done) begin
          stop_q  <= ev_stop;
          roi_q   <= (ev_roi > ROI_BITS'(MAX_ROI)) ? ROI_BITS'(MAX_ROI) : ev_roi;
          hdr_idx <= '0;
          rd_cell    <= '0;
          lane    <= (ev_roi == '0) ? (LANE_BITS+1)'(N_LANE) : '0;
          bstate  <= B_DRAIN;
        end
        B_DRAIN: if (!more) bstate <= B_IDLE;
        default: bstate <= B_IDLE;
      endcase

      if (adv) begin
        // output stage
        m_valid <= p1_valid;
        if (p1_valid) begin
          m_word.sof  <= p1_sof;
          m_word.eof  <= p1_eof;
          m_word.data <= p1_hdr ? p1_hword : {p1_lane, q[p1_lane]};
        end
        // stage 1: issue the next header word or buffer read
        p1_valid <= more;
        if (more) begin
          if (hdr_idx < 3'(HDR_WORDS)) begin
            p1_hdr   <= 1'b1;
            p1_hword <= hword;
            p1_sof   <= (hdr_idx == 3'd0);
            p1_eof   <= (hdr_idx == 3'(HDR_WORDS - 1)) && (lane == (LANE_BITS+1)'(N_LANE));
            hdr_idx  <= hdr_idx + 1'b1;
          end else begin
            p1_hdr  <= 1'b0;
            p1_sof  <= 1'b0;
            p1_eof  <= last_data;
            p1_lane <= LANE_BITS'(lane);
            if (rd_cell == roi_q - 1'b1) begin
              rd_cell <= '0;
              lane <= lane + 1'b1;
            end else begin
              rd_cell <= rd_cell + 1'b1;
            end
          end
        end
      end
    end
  end
endmodule

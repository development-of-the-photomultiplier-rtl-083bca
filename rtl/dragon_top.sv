// dragon_top: digital logic of one Dragon readout unit (one 7-PMT cluster).
//
// Data path. The trigger manager accepts the L1 trigger from the trigger
// mezzanine (or a software trigger) when the unit is not busy. The DRS4
// readout then freezes the eight DRS4 chips, reads the stop position and
// steps the region of interest (ROI, 60 cells after reset) through the
// 33 MHz ADCs; the event builder collects the 16 lanes (7 PMTs x high and
// low gain, plus two spare) in an on-chip buffer and drains them as a
// framed 16-bit word stream; the external 18 Mbit SRAM buffers that stream
// as a FIFO; and the TCP bridge hands it byte by byte to the SiTCP core
// for Gigabit Ethernet. The unit is busy, and further triggers are counted
// as lost, from acceptance until the event builder's buffer is empty.
//
// Control path. SiTCP's register-access bus reaches the register bank,
// which sets the ROI length and trigger enable, loads the trigger-threshold
// DAC and the DRS4 bias DAC, reports counters, and relays commands to the
// slow-control CPLD over a serial link. The CPLD logic (included here as
// its own block, since it is part of the same unit) sets the high voltage,
// fires test pulses and reads the monitor ADC and the climate sensor.
//
// Everything outside the logic (DRS4 chips, ADCs, DACs, SRAM, SiTCP core
// and PHY, sensors) is reached through ports. One system clock drives all
// blocks; the CPLD would have its own clock and only sees the link through
// synchronisers. Reset is synchronous and active low. Which blocks exist
// and how they connect follows the paper's block diagram; the insides of
// each block are this design's.
module dragon_top
  import dragon_pkg::*;
(
  input  logic                            clk,
  input  logic                            rst_n,
  // trigger mezzanine
  input  logic                            trig_in,
  // DRS4 chips and readout ADCs
  output logic                            drs_denable,
  output logic                            drs_dwrite,
  output logic                            drs_rsrload,
  output logic                            drs_srclk,
  input  logic                            drs_srout,
  input  logic [N_LANE-1:0][ADC_BITS-1:0] adc_data,
  // trigger-threshold DAC and DRS4 DAC (SPI)
  output logic                            thr_sclk,
  output logic                            thr_mosi,
  output logic                            thr_cs_n,
  output logic                            drsdac_sclk,
  output logic                            drsdac_mosi,
  output logic                            drsdac_cs_n,
  // SRAM
  output logic [SRAM_AW-1:0]              sram_addr,
  output logic                            sram_we_n,
  output logic [SRAM_DW-1:0]              sram_dq_o,
  output logic                            sram_dq_oe,
  input  logic [SRAM_DW-1:0]              sram_dq_i,
  // SiTCP user side: TCP transmit and register access
  input  logic                            tcp_open,
  input  logic                            tcp_tx_full,
  output logic                            tcp_tx_wr,
  output logic [7:0]                      tcp_tx_data,
  input  logic                            rbcp_act,
  input  logic [31:0]                     rbcp_addr,
  input  logic                            rbcp_we,
  input  logic [7:0]                      rbcp_wd,
  input  logic                            rbcp_re,
  output logic                            rbcp_ack,
  output logic [7:0]                      rbcp_rd,
  // slow-control board devices (driven by the CPLD logic)
  output logic                            hv_sclk,
  output logic                            hv_mosi,
  output logic                            hv_cs_n,
  output logic                            mon_sclk,
  output logic                            mon_mosi,
  output logic                            mon_cs_n,
  input  logic                            mon_miso,
  output logic                            i2c_scl,
  output logic                            i2c_sda_oe,
  input  logic                            i2c_sda_i,
  output logic                            tp_out
);
  // registers
  logic                 trig_enable, sw_trig, thr_update, drs_update, cnt_clear, sc_go;
  logic [ROI_BITS-1:0]  roi_len;
  logic [7:0][15:0]     thr_values, drs_values;
  logic [23:0]          sc_cmd, sc_reply;
  logic [31:0][7:0]     status;
  // trigger
  logic                 accept;
  logic [31:0]          event_id, timestamp, n_lost, dead_cycles, ts_now;
  // readout
  logic                 ro_busy, ro_done, smp_valid;
  logic [ROI_BITS-1:0]  smp_cell;
  logic [N_LANE-1:0][ADC_BITS-1:0] smp_data;
  logic [POS_BITS-1:0]  stop_pos;
  // event stream
  logic                 eb_busy, eb_valid, eb_ready;
  ev_word_t             eb_word;
  logic                 fifo_valid, fifo_ready;
  logic [SRAM_DW-1:0]   fifo_data;
  logic [SRAM_AW:0]     sram_level;
  // slow control
  logic                 thr_busy, drsdac_busy, sc_busy, sc_done;
  logic                 sc_sclk, sc_mosi, sc_cs_n, sc_miso;

  trigger_manager u_trig (
    .clk, .rst_n, .trig_in, .sw_trig, .enable(trig_enable),
    .busy(ro_busy || eb_busy), .clear(cnt_clear), .accept, .event_id,
    .timestamp, .n_lost, .dead_cycles, .now(ts_now)
  );

  drs4_readout u_drs (
    .clk, .rst_n, .start(accept), .roi_len,
    .drs_denable, .drs_dwrite, .drs_rsrload, .drs_srclk, .drs_srout,
    .adc_data, .smp_valid, .smp_cell, .smp_data, .stop_pos,
    .busy(ro_busy), .done(ro_done)
  );

  event_builder u_eb (
    .clk, .rst_n, .ev_start(accept), .ev_id(event_id), .ev_ts(timestamp),
    .ev_done(ro_done), .ev_stop(stop_pos), .ev_roi(roi_len),
    .s_valid(smp_valid), .s_cell(smp_cell), .s_data(smp_data),
    .m_valid(eb_valid), .m_ready(eb_ready), .m_word(eb_word), .busy(eb_busy)
  );

  sram_fifo u_sram (
    .clk, .rst_n, .in_valid(eb_valid), .in_ready(eb_ready), .in_data(eb_word),
    .out_valid(fifo_valid), .out_ready(fifo_ready), .out_data(fifo_data),
    .sram_addr, .sram_we_n, .sram_dq_o, .sram_dq_oe, .sram_dq_i, .level(sram_level)
  );

  tcp_tx_bridge u_tx (
    .clk, .rst_n, .in_valid(fifo_valid), .in_ready(fifo_ready),
    .in_word(ev_word_t'(fifo_data)), .tcp_open, .tcp_tx_full, .tcp_tx_wr, .tcp_tx_data
  );

  // status bytes 0x40.. of the register bank, high byte first
  always_comb begin
    status = '0;
    {status[0],  status[1],  status[2],  status[3]}  = event_id;
    {status[4],  status[5],  status[6],  status[7]}  = n_lost;
    {status[8],  status[9],  status[10], status[11]} = dead_cycles;
    {status[12], status[13], status[14], status[15]} = timestamp;
    {status[16], status[17], status[18], status[19]} = 32'(sram_level);
    {status[20], status[21], status[22]}             = sc_reply;
    status[23] = {3'b000, sc_busy, drsdac_busy, thr_busy, eb_busy, ro_busy};
    {status[24], status[25], status[26], status[27]} = ts_now;
  end

  reg_file u_regs (
    .clk, .rst_n, .rbcp_act, .rbcp_addr, .rbcp_we, .rbcp_wd, .rbcp_re,
    .rbcp_ack, .rbcp_rd, .status, .trig_enable, .sw_trig, .thr_update,
    .drs_update, .cnt_clear, .sc_go, .roi_len, .thr_values, .drs_values, .sc_cmd
  );

  spi_dac_loader u_thr_dac (
    .clk, .rst_n, .update(thr_update), .values(thr_values),
    .sclk(thr_sclk), .mosi(thr_mosi), .cs_n(thr_cs_n), .busy(thr_busy)
  );

  spi_dac_loader u_drs_dac (
    .clk, .rst_n, .update(drs_update), .values(drs_values),
    .sclk(drsdac_sclk), .mosi(drsdac_mosi), .cs_n(drsdac_cs_n), .busy(drsdac_busy)
  );

  sc_link_master u_sc_link (
    .clk, .rst_n, .go(sc_go), .cmd(sc_cmd), .reply(sc_reply), .busy(sc_busy),
    .done(sc_done), .sc_sclk, .sc_mosi, .sc_cs_n, .sc_miso
  );

  slow_control_cpld u_cpld (
    .clk, .rst_n, .sc_sclk, .sc_mosi, .sc_cs_n, .sc_miso,
    .hv_sclk, .hv_mosi, .hv_cs_n, .mon_sclk, .mon_mosi, .mon_cs_n, .mon_miso,
    .i2c_scl, .i2c_sda_oe, .i2c_sda_i, .tp_out
  );
endmodule

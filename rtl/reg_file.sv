// reg_file: control and status registers reached over the Ethernet link.
//
// Slow control of the board goes over the same Gigabit Ethernet as the
// waveform data: SiTCP offers a byte-wide register-access bus (RBCP) next
// to its TCP stream. A request is one cycle with `rbcp_act` and either
// `rbcp_we` (write `rbcp_wd` at `rbcp_addr`) or `rbcp_re`; the answer is a
// one-cycle `rbcp_ack` on the next clock, with `rbcp_rd` for a read.
// Multi-byte fields are stored high byte at the lower address.
//
//   0x00        bit0 trigger enable
//   0x01 (W)    one-cycle pulses: bit0 software trigger, bit1 load threshold
//               DAC, bit2 load DRS4 DAC, bit3 clear counters, bit4 send
//               slow-control command; reads 0
//   0x02-0x03   ROI length in cells (reset value 60)
//   0x10-0x1F   eight 16-bit trigger-threshold DAC values
//   0x20-0x2F   eight 16-bit DRS4 DAC values
//   0x30-0x32   24-bit slow-control command for the CPLD
//   0x40-0x5F   read-only status bytes supplied by the top level
//
// The map is this design's own; the paper says only that control and
// monitoring data travel over the Ethernet.
module reg_file
  import dragon_pkg::*;
#(
  parameter logic [15:0] ROI_DEFAULT = 16'd60   // cells read per trigger after reset
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   rbcp_act,
  input  logic [31:0]            rbcp_addr,
  input  logic                   rbcp_we,
  input  logic [7:0]             rbcp_wd,
  input  logic                   rbcp_re,
  output logic                   rbcp_ack,
  output logic [7:0]             rbcp_rd,
  input  logic [31:0][7:0]       status,      // status[i] is byte 0x40+i
  output logic                   trig_enable,
  output logic                   sw_trig,
  output logic                   thr_update,
  output logic                   drs_update,
  output logic                   cnt_clear,
  output logic                   sc_go,
  output logic [ROI_BITS-1:0]    roi_len,
  output logic [7:0][15:0]       thr_values,
  output logic [7:0][15:0]       drs_values,
  output logic [23:0]            sc_cmd
);
  logic [7:0] regs [64];
  logic [5:0] a;
  logic       in_rw, in_status;

  assign a         = rbcp_addr[5:0];
  assign in_rw     = (rbcp_addr[31:6] == '0);
  assign in_status = (rbcp_addr[31:5] == 27'h2);   // 0x40..0x5F

  assign trig_enable = regs[0][0];
  assign roi_len     = ROI_BITS'({regs[2], regs[3]});
  assign sc_cmd      = {regs[6'h30], regs[6'h31], regs[6'h32]};
  always_comb begin
    for (int i = 0; i < 8; i++) begin
      thr_values[i] = {regs[6'(16 + 2*i)], regs[6'(17 + 2*i)]};
      drs_values[i] = {regs[6'(32 + 2*i)], regs[6'(33 + 2*i)]};
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 64; i++) regs[i] <= '0;
      regs[2]    <= ROI_DEFAULT[15:8];
      regs[3]    <= ROI_DEFAULT[7:0];
      rbcp_ack   <= 1'b0;
      rbcp_rd    <= '0;
      sw_trig    <= 1'b0;
      thr_update <= 1'b0;
      drs_update <= 1'b0;
      cnt_clear  <= 1'b0;
      sc_go      <= 1'b0;
    end else begin
      rbcp_ack   <= rbcp_act && (rbcp_we || rbcp_re);
      sw_trig    <= 1'b0;
      thr_update <= 1'b0;
      drs_update <= 1'b0;
      cnt_clear  <= 1'b0;
      sc_go      <= 1'b0;
      if (rbcp_act && rbcp_we && in_rw) begin
        if (a == 6'h01) begin
          sw_trig    <= rbcp_wd[0];
          thr_update <= rbcp_wd[1];
          drs_update <= rbcp_wd[2];
          cnt_clear  <= rbcp_wd[3];
          sc_go      <= rbcp_wd[4];
        end else begin
          regs[a] <= rbcp_wd;
        end
      end
      if (rbcp_act && rbcp_re) begin
        if (in_rw)          rbcp_rd <= (a == 6'h01) ? 8'h00 : regs[a];
        else if (in_status) rbcp_rd <= status[rbcp_addr[4:0]];
        else                rbcp_rd <= 8'h00;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(rbcp_act && rbcp_we && rbcp_re));
endmodule

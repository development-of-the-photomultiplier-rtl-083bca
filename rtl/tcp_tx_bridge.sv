// tcp_tx_bridge: feeds the event word stream into the SiTCP transmit FIFO.
//
// SiTCP, the hardware TCP/IP core inside the FPGA, takes the TCP payload
// one byte per clock through a write strobe and signals back-pressure with
// a full flag. This bridge takes one framed 18-bit word at a time, drops
// the two framing flags (the event header makes the stream self-describing)
// and writes the 16 data bits as two bytes, most significant first. A byte
// is written only in a cycle where `tcp_tx_full` is low and a TCP
// connection is open; otherwise it is held. One word takes at least two
// clocks, so at 133 MHz the bridge can offer 133 MB/s, above the
// 125 MB/s of Gigabit Ethernet, and the full flag sets the pace. The
// byte-wide strobe/full interface follows the published SiTCP core; the
// paper names SiTCP but not its interface.
module tcp_tx_bridge
  import dragon_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  ev_word_t   in_word,
  input  logic       tcp_open,
  input  logic       tcp_tx_full,
  output logic       tcp_tx_wr,
  output logic [7:0] tcp_tx_data
);
  logic [7:0] hi_byte, lo_byte;
  logic       have_word;   // a word is held
  logic       second;      // high byte already sent
  logic       can_send;

  assign can_send = have_word && tcp_open && !tcp_tx_full;
  assign in_ready = !have_word || (can_send && second);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      have_word   <= 1'b0;
      second      <= 1'b0;
      hi_byte     <= '0;
      lo_byte     <= '0;
      tcp_tx_wr   <= 1'b0;
      tcp_tx_data <= '0;
    end else begin
      tcp_tx_wr <= 1'b0;
      if (can_send) begin
        tcp_tx_wr   <= 1'b1;
        tcp_tx_data <= second ? lo_byte : hi_byte;
        second      <= 1'b1;
        if (second) have_word <= 1'b0;
      end
      // a new word may be taken in the cycle its predecessor's low byte goes
      if (in_valid && in_ready) begin
        have_word <= 1'b1;
        second    <= 1'b0;
        hi_byte   <= in_word.data[15:8];
        lo_byte   <= in_word.data[7:0];
      end
    end
  end
endmodule

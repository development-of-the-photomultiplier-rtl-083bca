// sc_link_slave: CPLD side of the FPGA link (see sc_link_master).
//
// SCLK, MOSI and CS_N are brought into the CPLD clock domain through two
// flip-flops each and SCLK edges are detected there. The first 24 rising
// edges of a transfer shift in the command; at the 24th the command is
// presented for one clock on `cmd_valid`/`cmd` and the reply word
// (`rsp`, which the owner must supply combinationally in that cycle) is
// loaded. The following falling edges shift the reply out on MISO, MSB
// first. CS_N high resets the bit counter. The protocol is this design's.
module sc_link_slave (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sc_sclk,
  input  logic        sc_mosi,
  input  logic        sc_cs_n,
  output logic        sc_miso,
  output logic        cmd_valid,
  output logic [23:0] cmd,
  input  logic [23:0] rsp
);
  logic [2:0]  sclk_s;
  logic [1:0]  mosi_s, cs_s;
  logic [5:0]  cnt;
  logic [23:0] sh_in, sh_out;
  logic        rise, fall;

  assign rise = sclk_s[1] && !sclk_s[2];
  assign fall = !sclk_s[1] && sclk_s[2];
  assign cmd  = sh_in;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sclk_s    <= '0;
      mosi_s    <= '0;
      cs_s      <= '1;
      cnt       <= '0;
      sh_in     <= '0;
      sh_out    <= '0;
      sc_miso   <= 1'b0;
      cmd_valid <= 1'b0;
    end else begin
      sclk_s    <= {sclk_s[1:0], sc_sclk};
      mosi_s    <= {mosi_s[0], sc_mosi};
      cs_s      <= {cs_s[0], sc_cs_n};
      cmd_valid <= 1'b0;
      if (cs_s[1]) begin
        cnt <= '0;
      end else begin
        if (rise) begin
          if (cnt < 6'd24) sh_in <= {sh_in[22:0], mosi_s[1]};
          if (cnt == 6'd23) cmd_valid <= 1'b1;
          cnt <= cnt + 1'b1;
        end
        if (fall && cnt >= 6'd24) begin
          sc_miso <= sh_out[23];
          sh_out  <= {sh_out[22:0], 1'b0};
        end
      end
      if (cmd_valid) sh_out <= rsp;
    end
  end
endmodule

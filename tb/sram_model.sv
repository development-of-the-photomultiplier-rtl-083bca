// sram_model: behavioural model of a pipelined synchronous SRAM.
//
// Not synthesizable logic: a test model of the external memory chip.
// Address, write strobe (active low) and write data are sampled on the
// rising clock edge; a read returns the word RD_LAT edges later on dq_i.
// `n_writes` and `n_reads` count accesses for the testbenches.
module sram_model #(
  parameter int AW     = 20,
  parameter int DW     = 18,
  parameter int RD_LAT = 2
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  input  logic          we_n,
  input  logic [DW-1:0] dq_o,
  output logic [DW-1:0] dq_i,
  output int            n_writes,
  output int            n_reads
);
  logic [DW-1:0] mem [2**AW];
  logic [DW-1:0] rpipe [RD_LAT];
  initial begin
    n_writes = 0;
    n_reads  = 0;
    for (int i = 0; i < RD_LAT; i++) rpipe[i] = '0;
  end
  assign dq_i = rpipe[RD_LAT-1];
  always @(posedge clk) begin
    if (!we_n) begin
      mem[addr] <= dq_o;
      n_writes  <= n_writes + 1;
    end else begin
      n_reads <= n_reads + 1;
    end
    rpipe[0] <= mem[addr];
    for (int i = 1; i < RD_LAT; i++) rpipe[i] <= rpipe[i-1];
  end
endmodule

// sram_sp: single-port on-chip SRAM bank.
//
// Stands for one compiler-generated single-port SRAM macro of the on-chip
// buffer, written as a synthesizable array. One access per cycle: with en and
// we high the word at addr is written; with en high and we low it is read and
// appears on rdata in the next cycle, where it stays until the next read.
// There is no read-during-write forwarding and the contents are not reset,
// as in a typical macro. The timing is this design's assumption.
module sram_sp #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 65536
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we)
        mem[addr] <= wdata;
      else
        rdata <= mem[addr];
    end
  end

  a_addr_in_range: assert property (@(posedge clk) en |-> (32'(addr) < DEPTH));
endmodule

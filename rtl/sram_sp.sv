// sram_sp -- behavioural single-port synchronous SRAM written as an array.
//
// One access per cycle: a write when we = 1, otherwise a read when re = 1. Read data
// appears on rdata one clock after re and is held until the next read, as in a
// typical compiled SRAM macro with an output latch. Stands for the SRAM macros of
// the accelerator; memory contents are not reset.
module sram_sp #(
  parameter int DEPTH = 512,
  parameter int WIDTH = 144,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic             re,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)      mem[addr] <= wdata;
    else if (re) rdata     <= mem[addr];
  end
endmodule

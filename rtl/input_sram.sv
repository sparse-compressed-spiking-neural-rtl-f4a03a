// input_sram -- the four Input SRAM banks, read together as one 576-bit bit plane.
//
// Each bank is a 512 x 144-bit SRAM holding one 9x16 quadrant of the tile, so one
// address holds one bit plane (one input channel at one time step, or one bit of a
// multibit input channel) of the whole 18x32 tile, and 512 addresses hold a tile
// with 512 input channels and one time step. The datapath reads all four banks at
// once (576 bits, one-cycle latency); the memory-controller side writes one bank
// (144 bits) at a time. A write has priority over a read in the same cycle.
module input_sram
  import snn_pkg::*;
#(
  parameter int DEPTH = IN_DEPTH,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [N_PE-1:0]   rdata,
  input  logic              we,
  input  logic [1:0]        wbank,
  input  logic [AW-1:0]     waddr,
  input  logic [Q_BITS-1:0] wdata
);
  for (genvar b = 0; b < 4; b++) begin : g_bank
    logic bwe;
    assign bwe = we && (wbank == 2'(b));
    sram_sp #(.DEPTH(DEPTH), .WIDTH(Q_BITS)) u_sram (
      .clk,
      .we    (bwe),
      .re    (re && !we),
      .addr  (bwe ? waddr : raddr),
      .wdata (wdata),
      .rdata (rdata[b*Q_BITS +: Q_BITS])
    );
  end
endmodule

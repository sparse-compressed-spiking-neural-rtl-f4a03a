// output_sram -- the four Output SRAM banks.
//
// Same organisation as the Input SRAM: four 512 x 144-bit banks, one 9x16 quadrant
// each. The datapath writes a full 576-bit spike tile to all four banks (wmask =
// 4'b1111) or, after max pooling, a 144-bit pooled tile into one bank (wmask one-hot,
// the pooled word replicated on all four 144-bit lanes of wdata). The memory
// controller reads one bank at a time; read data arrives one clock after re and a
// write has priority over a read.
module output_sram
  import snn_pkg::*;
#(
  parameter int DEPTH = IN_DEPTH,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [3:0]        wmask,
  input  logic [AW-1:0]     waddr,
  input  logic [N_PE-1:0]   wdata,
  input  logic              re,
  input  logic [1:0]        rbank,
  input  logic [AW-1:0]     raddr,
  output logic [Q_BITS-1:0] rdata
);
  logic [3:0][Q_BITS-1:0] bank_rd;
  logic [1:0]             rbank_q;

  for (genvar b = 0; b < 4; b++) begin : g_bank
    logic bwe;
    assign bwe = we && wmask[b];
    sram_sp #(.DEPTH(DEPTH), .WIDTH(Q_BITS)) u_sram (
      .clk,
      .we    (bwe),
      .re    (re && !we && rbank == 2'(b)),
      .addr  (bwe ? waddr : raddr),
      .wdata (wdata[b*Q_BITS +: Q_BITS]),
      .rdata (bank_rd[b])
    );
  end

  always_ff @(posedge clk) if (re && !we) rbank_q <= rbank;
  assign rdata = bank_rd[rbank_q];
endmodule

// bias_rf -- bias register file, one 8-bit bias per output channel.
//
// 512 x 8 bits (0.5 KB) of flip-flops. The bias of the output channel being processed
// is read into an output register (rdata valid one clock after raddr) that feeds the
// adder of every LIF neuron. Written by the memory controller. Biases are in the
// same Q3.4 format as the membrane potential; batch normalisation is assumed folded
// into weights and biases.
module bias_rf
  import snn_pkg::*;
#(
  parameter int DEPTH = BIAS_DEPTH,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] raddr,
  output logic [7:0]    rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [7:0]    wdata
);
  logic [7:0] rf [DEPTH];

  always_ff @(posedge clk) if (we) rf[waddr] <= wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rdata <= '0;
    else        rdata <= rf[raddr];
  end
endmodule

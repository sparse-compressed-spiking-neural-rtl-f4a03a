// weight_map_sram -- the Weight Map SRAM banks: bit masks of the sparse kernels.
//
// Each word is the 9-bit sparse map of one (output channel, input channel) 3x3
// kernel, bit i set when kernel position i holds a nonzero weight. Four banks of
// 16384 words hold 65536 kernels, enough for a 256 -> 256 channel 3x3 layer.
// Address = kernel index (k*C + c); the two top address bits select the bank.
// Single port: a write (we) has priority over a read (re); read data arrives one
// clock after re and is held.
module weight_map_sram
  import snn_pkg::*;
#(
  parameter int BANKS = WM_BANKS,
  parameter int BANK_DEPTH = WM_BDEPTH,
  localparam int BAW = $clog2(BANK_DEPTH),
  localparam int AW  = $clog2(BANKS*BANK_DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [8:0]    rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [8:0]    wdata
);
  logic [BANKS-1:0][8:0] bank_rd;
  logic [AW-1:0]         addr;
  logic [AW-BAW-1:0]     rsel_q;

  assign addr = we ? waddr : raddr;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic sel;
    assign sel = (addr[AW-1:BAW] == (AW-BAW)'(b));
    sram_sp #(.DEPTH(BANK_DEPTH), .WIDTH(9)) u_sram (
      .clk,
      .we    (we && sel),
      .re    (re && !we && sel),
      .addr  (addr[BAW-1:0]),
      .wdata (wdata),
      .rdata (bank_rd[b])
    );
  end

  always_ff @(posedge clk) if (re && !we) rsel_q <= raddr[AW-1:BAW];
  assign rdata = bank_rd[rsel_q];
endmodule

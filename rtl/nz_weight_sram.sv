// nz_weight_sram -- the NZ Weight SRAM banks: nonzero weight values, one per word.
//
// Nonzero 8-bit weights are stored back to back in the order output channel, input
// channel, kernel position (the order the sparse maps are scanned), so the datapath
// reads them with an incrementing pointer, one per cycle. Nine banks of 16384 bytes
// hold 147456 weights, the size of a dense 384 -> 384 channel 1x1 layer; the bank is
// address / 16384. Single port: a write has priority over a read; read data arrives
// one clock after re and is held.
module nz_weight_sram
  import snn_pkg::*;
#(
  parameter int BANKS = NZ_BANKS,
  parameter int BANK_DEPTH = NZ_BDEPTH,
  localparam int BAW = $clog2(BANK_DEPTH),
  localparam int AW  = $clog2(BANKS*BANK_DEPTH),
  localparam int SW  = AW - BAW
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [7:0]    rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [7:0]    wdata
);
  logic [BANKS-1:0][7:0] bank_rd;
  logic [AW-1:0]         addr;
  logic [SW-1:0]         rsel_q;

  assign addr = we ? waddr : raddr;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic sel;
    assign sel = (addr[AW-1:BAW] == SW'(b));
    sram_sp #(.DEPTH(BANK_DEPTH), .WIDTH(8)) u_sram (
      .clk,
      .we    (we && sel),
      .re    (re && !we && sel),
      .addr  (addr[BAW-1:0]),
      .wdata (wdata),
      .rdata (bank_rd[b])
    );
  end

  always_ff @(posedge clk) if (re && !we) rsel_q <= raddr[AW-1:BAW];
  assign rdata = (int'(rsel_q) < BANKS) ? bank_rd[rsel_q] : '0;
endmodule

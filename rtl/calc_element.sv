// calc_element -- one gated calculation element of the PE array.
//
// Holds a 16-bit partial sum. When its enable-map bit `en` is 1 the shifted nonzero
// weight is added on the rising clock edge; when `en` is 0 the register is not
// clocked and keeps its value, so a zero input spike costs no switching. This is
// the published "gate module in place of a multiplier": a spike input times a
// weight is either the weight or nothing. The gated clock is written as a register
// enable, which synthesis maps onto an integrated clock-gating cell; `clr` (start
// of a convolution pass) has priority. The sum wraps on overflow.
// Timing: acc is updated one clock after en/wgt are presented.
module calc_element #(
  parameter int ACC_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    en,
  input  logic signed [ACC_W-1:0] wgt,
  output logic signed [ACC_W-1:0] acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= '0;
    else if (en)  acc <= acc + wgt;
  end
endmodule

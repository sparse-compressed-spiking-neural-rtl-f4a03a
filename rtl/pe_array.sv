// pe_array -- 576 gated calculation elements with the bit-plane shifter and output mux.
//
// Every cycle with acc_en = 1 the same nonzero weight is broadcast to all elements
// ("one-to-all product") and accumulated by the elements whose enable-map bit is 1.
// For the multibit encoding layer the input is processed one bit plane at a time:
// the shifter sign-extends the 8-bit weight to 16 bits and shifts it left by the
// plane index bit_sel (0 = least significant plane), so the planes add up to the
// full multibit product. The 8-bit result handed to the LIF is the accumulator
// shifted right arithmetically by 8 in the encoding layer and the accumulator
// itself otherwise, saturated to 8 bits in both cases (the saturation and the mode
// that selects each input of the mux are this design's choice).
// Timing: conv_out reflects the partial sums one clock after the last acc_en.
module pe_array
  import snn_pkg::*;
#(
  parameter int N = N_PE
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  acc_en,
  input  logic [N-1:0]          en_map,
  input  logic signed [W_W-1:0] weight,
  input  logic [2:0]            bit_sel,
  input  logic                  encoding,
  output logic [N-1:0][V_W-1:0] conv_out
);
  logic signed [ACC_W-1:0] wgt_sh;
  logic signed [ACC_W-1:0] acc [N];

  // Shifter: 8-bit weight -> 16-bit, shifted by the bit-plane index
  always_comb wgt_sh = ACC_W'(weight) <<< bit_sel;

  for (genvar i = 0; i < N; i++) begin : g_ce
    logic signed [ACC_W-1:0] sel;
    calc_element #(.ACC_W(ACC_W)) u_ce (
      .clk, .rst_n, .clr,
      .en  (acc_en & en_map[i]),
      .wgt (wgt_sh),
      .acc (acc[i])
    );
    always_comb begin
      sel = encoding ? (acc[i] >>> 8) : acc[i];
      if (sel > ACC_W'(127))       conv_out[i] = 8'sd127;
      else if (sel < -ACC_W'(128)) conv_out[i] = -8'sd128;
      else                         conv_out[i] = sel[V_W-1:0];
    end
  end
endmodule

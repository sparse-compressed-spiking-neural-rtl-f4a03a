// maxpool -- 2x2, stride-2 max pooling of a binary spike tile.
//
// For spikes the maximum of a 2x2 window is the OR of its four bits, so the block is
// 144 four-input OR gates. Input is an 18x32 tile in the quadrant layout of snn_pkg;
// the output is the 9x16 pooled tile as one 144-bit word, pixel (r, c) at bit
// r*16 + c (the layout of one quadrant). Purely combinational.
module maxpool
  import snn_pkg::*;
(
  input  logic [N_PE-1:0]   spikes,
  output logic [Q_BITS-1:0] pooled
);
  for (genvar r = 0; r < QH; r++) begin : g_r
    for (genvar c = 0; c < QW; c++) begin : g_c
      assign pooled[r*QW + c] = spikes[pix_idx(2*r,   2*c)] | spikes[pix_idx(2*r,   2*c+1)]
                              | spikes[pix_idx(2*r+1, 2*c)] | spikes[pix_idx(2*r+1, 2*c+1)];
    end
  end
endmodule

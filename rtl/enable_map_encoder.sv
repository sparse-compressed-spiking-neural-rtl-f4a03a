// enable_map_encoder -- row/column encoders and enable-map generation.
//
// The 9-bit weight map marks the nonzero positions of a kernel, bit i being kernel
// position (i/3, i%3) with bit 0 the upper-left one. The row and column encoders
// find the leftmost (lowest-index) set bit, position (R, C). For the gated
// one-to-all product, output pixel (i, j) receives that weight exactly when input
// pixel (i+R-P, j+C-P) is a spike, P = (ks-1)/2 being the padding, so the enable
// map is the input plane shifted by (R, C). Coordinates outside the tile are
// clamped to the edge (replicate padding of block convolution: each tile is
// convolved on its own). Kernel size 1 always uses position 0.
// Purely combinational; `valid` is 0 when the map holds no nonzero weight.
module enable_map_encoder
  import snn_pkg::*;
(
  input  logic [8:0]      wmap,
  input  logic [1:0]      ks,
  input  logic [N_PE-1:0] in_plane,
  output logic [1:0]      row,
  output logic [1:0]      col,
  output logic            valid,
  output logic [N_PE-1:0] en_map
);
  logic [3:0] pos;

  // Row / column encoder: index of the lowest set bit
  always_comb begin
    pos   = '0;
    valid = 1'b0;
    for (int i = 8; i >= 0; i--) begin
      if (wmap[i]) begin
        pos   = 4'(i);
        valid = 1'b1;
      end
    end
    if (ks == 2'd1) pos = '0;
    row = (pos >= 4'd6) ? 2'd2 : (pos >= 4'd3) ? 2'd1 : 2'd0;
    col = 2'(pos - 4'(row) * 4'd3);
  end

  // Shifted, edge-clamped input plane
  always_comb begin
    int ri, ci, pad;
    pad = (ks == 2'd3) ? 1 : 0;
    for (int i = 0; i < TILE_H; i++) begin
      for (int j = 0; j < TILE_W; j++) begin
        ri = i + int'(row) - pad;
        ci = j + int'(col) - pad;
        if (ri < 0) ri = 0;
        if (ri > TILE_H-1) ri = TILE_H-1;
        if (ci < 0) ci = 0;
        if (ci > TILE_W-1) ci = TILE_W-1;
        en_map[pix_idx(i, j)] = in_plane[pix_idx(ri, ci)];
      end
    end
  end
endmodule

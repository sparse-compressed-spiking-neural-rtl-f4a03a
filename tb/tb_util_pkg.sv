// tb_util_pkg -- reference helpers shared by the testbenches.
//
// Written independently of the RTL: the tile geometry (18x32 pixels in four 9x16
// quadrant words) is restated here rather than taken from snn_pkg, so that a wrong
// layout in the design is caught.
package tb_util_pkg;
  localparam int H = 18;
  localparam int W = 32;

  // bit of pixel (r, c) in a 576-bit plane: quadrant {r/9, c/16}, then row-major
  function automatic int qidx(int r, int c);
    return (((r >= 9) ? 2 : 0) + ((c >= 16) ? 1 : 0)) * 144 + (r % 9) * 16 + (c % 16);
  endfunction

  function automatic int clampi(int v, int lo, int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  function automatic int sat8(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  // wrap to a signed 16-bit value
  function automatic int wrap16(int v);
    logic signed [15:0] t;
    t = 16'(v);
    return int'(t);
  endfunction
endpackage

// snn_pkg -- constants, types and helpers shared by the sparse SNN accelerator.
//
// The accelerator processes one 18x32 tile of an activation map per job with 576
// processing elements, one per output pixel (spatial parallelism). A bit plane of a
// tile is 576 bits wide and is kept as four 144-bit quadrant words of 9x16 pixels,
// one per Input/Output SRAM bank: quadrant q = {row half, column half}, pixel
// (r, c) of the quadrant at bit r*16 + c. The tile size, PE count, SRAM sizes and
// word widths are the published ones; the quadrant layout and the fixed-point
// format (signed Q3.4 for weights, bias and membrane potential, so the firing
// threshold 0.5 is 8 and the leak factor 0.25 is an arithmetic shift by 2) are
// choices of this implementation.
package snn_pkg;

  // Tile and array geometry
  localparam int TILE_H = 18;
  localparam int TILE_W = 32;
  localparam int N_PE   = TILE_H * TILE_W;   // 576 calculation elements
  localparam int QH     = TILE_H / 2;        // quadrant 9 x 16
  localparam int QW     = TILE_W / 2;
  localparam int Q_BITS = QH * QW;           // 144-bit SRAM word

  // Data widths
  localparam int W_W    = 8;                 // weight
  localparam int ACC_W  = 16;                // PE partial sum
  localparam int V_W    = 8;                 // membrane potential / LIF input
  localparam int FRAC   = 4;                 // fraction bits of W, bias, V
  localparam logic signed [V_W-1:0] VTH = 8'sd8;  // 0.5 in Q3.4

  // Configuration limits
  localparam int MAX_C  = 512;
  localparam int MAX_K  = 512;
  localparam int MAX_T  = 4;
  localparam int ENC_BITS = 8;               // bit planes of the encoding layer

  // Memory sizes
  localparam int IN_DEPTH   = 512;           // words per Input/Output SRAM bank
  localparam int WM_BANKS   = 4;
  localparam int WM_BDEPTH  = 16384;         // 9-bit words per weight-map bank
  localparam int NZ_BANKS   = 9;
  localparam int NZ_BDEPTH  = 16384;         // 8-bit words per NZ weight bank
  localparam int BIAS_DEPTH = 512;

  localparam int IN_AW = $clog2(IN_DEPTH);          // 9
  localparam int WM_AW = $clog2(WM_BANKS*WM_BDEPTH); // 16
  localparam int NZ_AW = $clog2(NZ_BANKS*NZ_BDEPTH); // 18
  localparam int K_AW  = $clog2(MAX_K);             // 9

  // Configuration register addresses
  typedef enum logic [3:0] {
    CFG_C       = 4'd0,   // input channels, 1..512
    CFG_K       = 4'd1,   // output channels of this job, 1..512
    CFG_KS      = 4'd2,   // kernel size 1..3
    CFG_IN_T    = 4'd3,   // input time steps 1..4
    CFG_OUT_T   = 4'd4,   // output time steps 1..4
    CFG_NZ_NUM  = 4'd5,   // number of sparse (nonzero) weights of the job
    CFG_FLAGS   = 4'd6,   // [0] max-pool, [1] encoding layer, [3:2] pooled bank
    CFG_K_BASE  = 4'd7,   // first output channel of this job
    CFG_NZ_BASE = 4'd8,   // NZ weight address of that channel
    CFG_SETUP   = 4'd15   // setup complete: write 1 to start
  } cfg_addr_e;

  typedef struct packed {
    logic [9:0]        c;
    logic [9:0]        k;
    logic [1:0]        ks;
    logic [2:0]        in_t;
    logic [2:0]        out_t;
    logic [NZ_AW:0]    nz_num;
    logic              pool;
    logic              encoding;
    logic [1:0]        pool_sel;
    logic [K_AW-1:0]   k_base;
    logic [NZ_AW-1:0]  nz_base;
  } cfg_t;

  // Bit index of tile pixel (r, c) in a 576-bit plane.
  function automatic int unsigned pix_idx(int unsigned r, int unsigned c);
    int unsigned q;
    q = (r / QH) * 2 + (c / QW);
    return q * Q_BITS + (r % QH) * QW + (c % QW);
  endfunction

endpackage

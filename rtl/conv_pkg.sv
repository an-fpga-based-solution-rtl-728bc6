// conv_pkg: constants and types shared by the convolution IP.
//
// The accelerator convolves a C-channel image with K kernels of size 3x3xC,
// stride 1, no padding, and splits the work four ways twice: four computing
// cores each own a quarter of the input channels, and inside a core four
// PCOREs each own a quarter of the kernels.  The quartering, the 3x3 tile of
// nine 8-bit entries, the 8-bit PSUM width and the 8-cycle tile period come
// from the paper's description and its simulation waveform; the register map,
// the AXI address map and the phase-by-phase schedule are this design's own.
package conv_pkg;

  // Data widths (8-bit feature and weight entries, 8-bit psum signals as in
  // the published waveform).
  localparam int unsigned DATA_W  = 8;
  localparam int unsigned PSUM_W  = 8;
  // 3x3 kernels: nine taps per kernel channel.
  localparam int unsigned KSIZE   = 3;
  localparam int unsigned TAPS    = KSIZE * KSIZE;
  // Four computing cores (channel quarters), four PCOREs per core (kernel quarters).
  localparam int unsigned NCORE   = 4;
  localparam int unsigned NPCORE  = 4;
  // Clock cycles per tile: one core delivers four psums every eight cycles.
  localparam int unsigned TILE_CYCLES = 8;
  // The schedule inside a tile period needs at least this many cycles
  // (reads in phases 0..4, last capture and last write in phase 5).
  localparam int unsigned MIN_TILE_CYCLES = 6;

  // Default BRAM depths: the largest layer the paper evaluates,
  // a 224x224x8 image and eight 3x3x8 kernels (222x222x8 output).
  localparam int unsigned MAX_IMG_H = 224;
  localparam int unsigned MAX_IMG_W = 224;
  localparam int unsigned MAX_CH    = 8;
  localparam int unsigned MAX_KN    = 8;
  localparam int unsigned IMG_DEPTH = MAX_IMG_H * MAX_IMG_W * MAX_CH / NCORE;                  // 100352
  localparam int unsigned W_DEPTH   = (MAX_KN / NPCORE) * (MAX_CH / NCORE) * TAPS;             // 36
  localparam int unsigned OUT_DEPTH = (MAX_IMG_H - 2) * (MAX_IMG_W - 2) * MAX_KN / NPCORE;    // 98568

  // Phases of the tile period at which each step happens.
  localparam int unsigned PH_MAC_LAST = 2;  // MACs run in phases 0..2
  localparam int unsigned PH_PSUM     = 3;  // PCORE adders
  localparam int unsigned PH_TREE     = 4;  // cross-core adder tree, output BRAM read
  localparam int unsigned PH_WRITE    = 5;  // accumulator write-back

  // AXI data width of the DMA-side and register ports.
  localparam int unsigned AXI_DW = 32;

  // Controller register map (byte offsets on the AXI4-Lite port).
  localparam logic [7:0] REG_CTRL   = 8'h00;  // W: bit0 start
  localparam logic [7:0] REG_STATUS = 8'h04;  // R: bit0 busy, bit1 done
  localparam logic [7:0] REG_IMG_H  = 8'h08;
  localparam logic [7:0] REG_IMG_W  = 8'h0C;
  localparam logic [7:0] REG_CH     = 8'h10;  // C, multiple of 4
  localparam logic [7:0] REG_KN     = 8'h14;  // K, multiple of 4
  localparam logic [7:0] REG_CYCLES = 8'h18;  // R: cycles of the last run

  // DMA-side region numbers: 0..3 image BRAMs, 4..19 weight BRAMs, 20..23 output BRAMs.
  localparam int unsigned REGION_W   = 5;
  localparam int unsigned RGN_IMG0   = 0;
  localparam int unsigned RGN_W0     = 4;
  localparam int unsigned RGN_OUT0   = 20;

  // A 3x3 block of entries.  Tap t = 3*row + col sits in element [TAPS-1-t], so
  // the packed vector reads row by row from the most significant byte, the
  // order of the weight and feature signals in the paper's waveform.
  typedef logic [TAPS-1:0][DATA_W-1:0] tile_t;

  function automatic int unsigned tap_idx(int unsigned row, int unsigned col);
    return TAPS - 1 - (row * KSIZE + col);
  endfunction

  // Word address width of a region on the DMA side.
  function automatic int unsigned max3(int unsigned a, int unsigned b, int unsigned c);
    int unsigned m;
    m = (a > b) ? a : b;
    return (m > c) ? m : c;
  endfunction

endpackage

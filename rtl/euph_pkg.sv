// euph_pkg: types and constants shared by the motion-vector frontend and the
// motion controller.
//
// Frame geometry follows the evaluated configuration: 1920x1080 frames, 16x16
// macroblocks, search range d = 7 (so a motion vector component fits in four
// bits and a whole vector in one byte), a 4-lane SIMD extrapolation datapath,
// up to 10 ROIs per frame and 128-bit AXI4 data paths.  The register map,
// the fixed-point formats and the ROI coordinate convention are choices of
// this implementation.
package euph_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned FRAME_W   = 1920;
  localparam int unsigned FRAME_H   = 1080;
  localparam int unsigned MB_L      = 16;
  localparam int unsigned SEARCH_D  = 7;
  localparam int unsigned MB_COLS   = (FRAME_W + MB_L - 1) / MB_L;   // 120
  localparam int unsigned MB_ROWS   = (FRAME_H + MB_L - 1) / MB_L;   // 68
  localparam int unsigned NUM_MB    = MB_COLS * MB_ROWS;              // 8160
  localparam int unsigned MV_BYTES  = 8192;                           // 8 KB buffer

  // ---------------------------------------------------------------- datapath
  localparam int unsigned LANES     = 4;      // SIMD width = sub-ROIs per ROI
  localparam int unsigned MAX_ROIS  = 10;
  localparam int unsigned EW_MAX    = 32;
  localparam int unsigned AXI_DW    = 128;
  localparam int unsigned AXI_AW    = 32;
  localparam int unsigned COORD_W   = 16;
  localparam int unsigned MV_FRAC   = 4;      // fractional bits of averaged MVs
  localparam int unsigned MVF_W     = 10;     // signed Q5.4 filtered MV

  // A region of interest in pixels: x0,y0 inclusive, x1,y1 exclusive.
  typedef struct packed {
    logic [COORD_W-1:0] y1;
    logic [COORD_W-1:0] x1;
    logic [COORD_W-1:0] y0;
    logic [COORD_W-1:0] x0;
  } roi_t;

  // One byte per motion vector: v in [7:4], u in [3:0], two's complement.
  typedef struct packed {
    logic signed [3:0] v;
    logic signed [3:0] u;
  } mv_t;

  // Filtered motion vector of one sub-ROI, Q5.4 per component.
  typedef struct packed {
    logic signed [MVF_W-1:0] v;
    logic signed [MVF_W-1:0] u;
  } mvf_t;

  // ------------------------------------------------ motion controller map
  // Byte offsets of the memory-mapped registers (32-bit each).
  localparam logic [7:0] REG_CTRL        = 8'h00; // [0] enable, [1] adaptive
  localparam logic [7:0] REG_EW          = 8'h04; // window size (constant mode / start)
  localparam logic [7:0] REG_MV_BASE     = 8'h08;
  localparam logic [7:0] REG_CONF_BASE   = 8'h0C;
  localparam logic [7:0] REG_PIX_BASE    = 8'h10;
  localparam logic [7:0] REG_RESULT_BASE = 8'h14;
  localparam logic [7:0] REG_CNN_BASE    = 8'h18;
  localparam logic [7:0] REG_CONF_THR    = 8'h1C; // alpha threshold, 0..255
  localparam logic [7:0] REG_DIFF_THR    = 8'h20; // adaptive-mode ROI distance
  localparam logic [7:0] REG_NUM_ROIS    = 8'h24; // ROIs the CNN reported
  localparam logic [7:0] REG_CNN_DONE    = 8'h28; // written by the CNN engine
  localparam logic [7:0] REG_STATUS      = 8'h2C; // read only
  localparam logic [7:0] REG_ROI0        = 8'h40; // ROI i: +8i {y0,x0}, +8i+4 {y1,x1}

  // Registers of the CNN engine that the sequencer programs (offsets from
  // REG_CNN_BASE).
  localparam logic [7:0] CNN_REG_SRC     = 8'h00; // input frame address
  localparam logic [7:0] CNN_REG_START   = 8'h04; // write 1 to start

  // Arithmetic helpers.
  function automatic logic [COORD_W-1:0] umin(input logic [COORD_W-1:0] a, input logic [COORD_W-1:0] b);
    return (a < b) ? a : b;
  endfunction
  function automatic logic [COORD_W-1:0] umax(input logic [COORD_W-1:0] a, input logic [COORD_W-1:0] b);
    return (a > b) ? a : b;
  endfunction

endpackage

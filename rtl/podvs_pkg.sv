// podvs_pkg -- types, sizes, kernels and helper functions shared by the
// single-channel proto-object grouping pipeline.
//
// Sizes follow the FPGA configuration of the design: a 112x84 input map with
// 8-bit pixels and a three-level pyramid (112x84, 80x60, 56x44), 5x5 kernels,
// four orientations (0, 45, 90, 135 degrees).  Every stored map is 8 bits per
// pixel, which is what the BRAM budgets of the design add up to.
//
// The kernel values are this design's own: the source describes the kernels
// only by their kind and count.  They are integer samples of the formulas
// below, each scaled so that its positive taps sum to 64 (so a response
// shifted right by KSHIFT = 6 stays in 0..255 for an ideal step).  Taps are in
// raster order, row (y = -2..2, downwards) major, column (x = -2..2) minor.
//   even edge, orientation t: g(x,y) * cos(2*pi*u/4), mean removed
//   odd edge,  orientation t: g(x,y) * sin(2*pi*u/4)
//     with g = exp(-(x^2+y^2)/(2*1.2^2)) and u = -x*sin(t) + y*cos(t)
//   center-surround: difference of Gaussians, sigma 0.7 and 1.6, mean removed
//   von Mises, orientation t, side s (left: t+90 deg, right: t-90 deg):
//     exp(2*cos(phi - s)) * exp(-(r-1.5)^2/2), centre tap 0,
//     phi = atan2(y,x), r = sqrt(x^2+y^2)
//
// Lint note: a module linted on its own reports the package constants it does
// not use (for example the kernel tables in bram) as unused parameters.  Every
// constant here is used by at least one module of the pipeline.
package podvs_pkg;

  localparam int unsigned PIX_W  = 8;      // bits per stored pixel
  localparam int unsigned NLVL   = 3;      // pyramid levels
  localparam int unsigned NORI   = 4;      // edge orientations
  localparam int unsigned KSIZE  = 5;      // kernel side
  localparam int unsigned NTAP   = KSIZE * KSIZE;
  localparam int unsigned ADDR_W = 14;     // enough for 112*84 = 9408 pixels
  localparam int unsigned KSHIFT = 6;      // kernel gain is 64
  localparam int unsigned ACC_W  = 32;     // weighted-sum accumulator

  // level sizes, level 0 is the full-resolution input
  localparam int unsigned LVL_W [NLVL] = '{112, 80, 56};
  localparam int unsigned LVL_H [NLVL] = '{84, 60, 44};

  typedef logic [PIX_W-1:0]      pix_t;
  typedef logic [ADDR_W-1:0]     addr_t;
  typedef logic signed [7:0]     coef_t;
  typedef coef_t                 kern_t [NTAP];
  typedef logic signed [ACC_W-1:0] acc_t;

  // processing stage of the channel, in the order they run
  typedef enum logic [2:0] {
    ST_IDLE   = 3'd0,  // host loads the input map (P1)
    ST_DOWN   = 3'd1,  // P2 pyramid
    ST_EDGE   = 3'd2,  // P3 edge and center-surround
    ST_VMF    = 3'd3,  // P4 von Mises filtering
    ST_VMSUM  = 3'd4,  // P5 von Mises sum
    ST_BO     = 3'd5,  // P6 border ownership
    ST_MASK   = 3'd6,  // host reads BO, writes masks
    ST_GROUP  = 3'd7   // P7 grouping
  } stage_t;

  // host read-back selector
  typedef enum logic [0:0] { RD_BO = 1'b0, RD_GRP = 1'b1 } rdsel_t;

  // Index of von Mises map: polarity (0 light/ON, 1 dark/OFF), side (0 left,
  // 1 right), orientation.
  function automatic int unsigned vm_idx(int unsigned pol, int unsigned side,
                                         int unsigned ori);
    return pol * 8 + side * 4 + ori;
  endfunction

  // Fixed-point ratio src/dst in 8 fractional bits, rounded down, so that
  // (d * ratio) >> 8 never leaves 0..src-1 for d in 0..dst-1.
  function automatic int unsigned scale_ratio(int unsigned src, int unsigned dst);
    return (src * 256) / dst;
  endfunction

  // Saturate a signed value to 0..255.
  function automatic pix_t sat8(input logic signed [ACC_W-1:0] v);
    if (v < 0)        return '0;
    else if (v > 255) return 8'd255;
    else              return v[7:0];
  endfunction

  // edge kernels (even 0,45,90,135; odd 0,45,90,135) and center-surround
  localparam kern_t FILT_K [9] = '{
    // EVEN0
    '{ -3,  -6,  -8,  -6,  -3,
       -1,  -1,  -1,  -1,  -1,
        5,  16,  23,  16,   5,
       -1,  -1,  -1,  -1,  -1,
       -3,  -6,  -8,  -6,  -3},
    // EVEN45
    '{  0,   0,  -5,  -6,  -2,
        0,  10,   6,  -9,  -6,
       -5,   6,  21,   6,  -5,
       -6,  -9,   6,  10,   0,
       -2,  -6,  -5,   0,   0},
    // EVEN90
    '{ -3,  -1,   5,  -1,  -3,
       -6,  -1,  16,  -1,  -6,
       -8,  -1,  23,  -1,  -8,
       -6,  -1,  16,  -1,  -6,
       -3,  -1,   5,  -1,  -3},
    // EVEN135
    '{ -2,  -6,  -5,   0,   0,
       -6,  -9,   6,  10,   0,
       -5,   6,  21,   6,  -5,
        0,  10,   6,  -9,  -6,
        0,   0,  -5,  -6,  -2},
    // ODD0
    '{  0,   0,   0,   0,   0,
       -5, -16, -22, -16,  -5,
        0,   0,   0,   0,   0,
        5,  16,  22,  16,   5,
        0,   0,   0,   0,   0},
    // ODD45
    '{  0,  -4,  -5,   1,   2,
        4,   0, -16, -10,   1,
        5,  16,   0, -16,  -5,
       -1,  10,  16,   0,  -4,
       -2,  -1,   5,   4,   0},
    // ODD90
    '{  0,   5,   0,  -5,   0,
        0,  16,   0, -16,   0,
        0,  22,   0, -22,   0,
        0,  16,   0, -16,   0,
        0,   5,   0,  -5,   0},
    // ODD135
    '{ -2,  -1,   5,   4,   0,
       -1,  10,  16,   0,  -4,
        5,  16,   0, -16,  -5,
        4,   0, -16, -10,   1,
        0,  -4,  -5,   1,   2},
    // CS
    '{ -3,  -4,  -4,  -4,  -3,
       -4,  -1,   8,  -1,  -4,
       -4,   8,  34,   8,  -4,
       -4,  -1,   8,  -1,  -4,
       -3,  -4,  -4,  -4,  -3}
  };
  // von Mises kernels: left side for 0,45,90,135, then right side
  localparam kern_t VM_K [8] = '{
    // VM0L
    '{  0,   0,   0,   0,   0,
        0,   0,   0,   0,   0,
        1,   1,   0,   1,   1,
        3,   6,  10,   6,   3,
        3,   7,  10,   7,   3},
    // VM45L
    '{  1,   1,   0,   0,   0,
        2,   1,   0,   0,   0,
        5,   5,   0,   0,   0,
        8,  11,   5,   1,   1,
        5,   8,   5,   2,   1},
    // VM90L
    '{  3,   3,   1,   0,   0,
        7,   6,   1,   0,   0,
       10,  10,   0,   0,   0,
        7,   6,   1,   0,   0,
        3,   3,   1,   0,   0},
    // VM135L
    '{  5,   8,   5,   2,   1,
        8,  11,   5,   1,   1,
        5,   5,   0,   0,   0,
        2,   1,   0,   0,   0,
        1,   1,   0,   0,   0},
    // VM0R
    '{  3,   7,  10,   7,   3,
        3,   6,  10,   6,   3,
        1,   1,   0,   1,   1,
        0,   0,   0,   0,   0,
        0,   0,   0,   0,   0},
    // VM45R
    '{  1,   2,   5,   8,   5,
        1,   1,   5,  11,   8,
        0,   0,   0,   5,   5,
        0,   0,   0,   1,   2,
        0,   0,   0,   1,   1},
    // VM90R
    '{  0,   0,   1,   3,   3,
        0,   0,   1,   6,   7,
        0,   0,   0,  10,  10,
        0,   0,   1,   6,   7,
        0,   0,   1,   3,   3},
    // VM135R
    '{  0,   0,   0,   1,   1,
        0,   0,   0,   1,   2,
        0,   0,   0,   5,   5,
        1,   1,   5,  11,   8,
        1,   2,   5,   8,   5}
  };

endpackage

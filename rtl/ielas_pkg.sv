// ielas_pkg: types and helper functions shared by the stereo-matching pipeline.
//
// A disparity is 8 bits wide (the output format of the accelerator). A support
// point is a disparity with a valid flag. A pixel descriptor is sixteen 8-bit
// Sobel responses (128 bits) taken from a 5x5 window; it is assembled when the
// descriptor RAM is read, so only the 8-bit Sobel results are stored. The
// energy of a match is the sum of absolute byte differences (SAD) of two
// descriptors, at most 16*255 = 4080, which fits 12 bits.
// The 128-bit width, the 5x5 window and the 8-bit storage follow the paper;
// the byte positions inside the window and the SAD energy follow the original
// ELAS software and are this design's choice.
package ielas_pkg;

  typedef logic [7:0]   disp_t;
  typedef logic [127:0] desc_t;
  typedef logic [11:0]  cost_t;

  typedef struct packed {
    logic  valid;
    disp_t d;
  } sp_t;

  // Kind of value produced by the interpolator for one support-grid position.
  typedef enum logic [1:0] {
    IK_ORIG  = 2'd0,   // an extracted support point, passed unchanged
    IK_HORIZ = 2'd1,   // from the nearest points left and right
    IK_VERT  = 2'd2,   // from the nearest points above and below
    IK_CONST = 2'd3    // the constant C
  } ikind_t;

  // One-cycle event pulses of the accelerator, brought out for monitoring.
  typedef struct packed {
    logic in_stall;      // input pixel offered while the writer's bank is still held
    logic bank_swap;     // a complete frame was handed from the writer to the back end
    logic lr_reject;     // support-point candidate failed the left/right check
    logic rm_incon;      // filter removed an implausible support point
    logic rm_redun;      // filter removed a redundant support point
    logic gv_overflow;   // a grid cell had more disparities than it can store
    logic ip_horiz;      // interpolation from a horizontal pair
    logic ip_vert;       // interpolation from a vertical pair
    logic ip_const;      // constant interpolation
    logic dm_plane;      // dense matching picked a plane-prior candidate
  } ev_t;

  // Sum of absolute differences of two descriptors.
  function automatic cost_t desc_sad(input desc_t a, input desc_t b);
    cost_t s;
    s = '0;
    for (int k = 0; k < 16; k++) begin
      if (a[8*k +: 8] > b[8*k +: 8]) s = s + {4'd0, 8'(a[8*k +: 8] - b[8*k +: 8])};
      else                           s = s + {4'd0, 8'(b[8*k +: 8] - a[8*k +: 8])};
    end
    return s;
  endfunction

  // Absolute difference of two disparities.
  function automatic disp_t disp_absdiff(input disp_t a, input disp_t b);
    return (a > b) ? disp_t'(a - b) : disp_t'(b - a);
  endfunction

endpackage

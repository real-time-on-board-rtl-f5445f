// disp_pkg: types and constants shared by the stereo disparity pipeline.
//
// The pipeline computes a disparity map from two camera streams with
// rectification, 5x5 matching costs (SAD or census/Hamming), four-path
// semi-global matching (SGM), a left-right consistency check and a 5x5
// median filter. The numbers that come from the published design are the
// disparity range d = [0,60) and the SGM penalties (P1/P2 = 8/32 for the
// census cost, 200/800 for SAD). Pixel width, cost widths and the code for an
// invalidated disparity are this implementation's own choices.
package disp_pkg;

  // Grey-value pixel width (8 bit, chosen).
  localparam int unsigned PIX_W = 8;

  // Default image size and disparity range of the main configuration.
  localparam int unsigned IMG_W  = 640;
  localparam int unsigned IMG_H  = 360;
  localparam int unsigned D_MAX  = 60;

  // Matching cost width: a 5x5 SAD of 8-bit pixels reaches 25*255 = 6375.
  localparam int unsigned COST_W = 13;
  localparam logic [COST_W-1:0] COST_MAX = 13'd6375;
  // Penalty width; path costs stay below COST_MAX + P2 < 2^LR_W.
  localparam int unsigned P_W    = 11;
  localparam int unsigned LR_W   = 14;
  // Sum of four paths.
  localparam int unsigned SUM_W  = 16;

  // Census transform of a 5x5 window: 24 neighbour bits.
  localparam int unsigned CENSUS_W = 24;

  // Matching cost selection.
  typedef enum logic {COST_CENSUS = 1'b0, COST_SAD = 1'b1} cost_sel_e;

  // Run-time configuration of the pipeline.
  typedef struct packed {
    cost_sel_e        cost_sel;    // matching cost function
    logic [P_W-1:0]   p1;          // SGM penalty for a disparity step of 1
    logic [P_W-1:0]   p2;          // SGM penalty for larger steps
    logic             rect_bypass; // input is already rectified: use identity map
  } disp_cfg_t;

  // Published penalty pairs.
  localparam logic [P_W-1:0] P1_CT  = 11'd8;
  localparam logic [P_W-1:0] P2_CT  = 11'd32;
  localparam logic [P_W-1:0] P1_SAD = 11'd200;
  localparam logic [P_W-1:0] P2_SAD = 11'd800;

  // Number of bits for a disparity code 0..dmax-1 plus the invalid code.
  function automatic int unsigned disp_bits(int unsigned dmax);
    return $clog2(dmax + 1);
  endfunction

endpackage

// sgm_disparity_top: streaming stereo disparity estimation.
//
// Two camera pixel streams go through the stages of the published pipeline,
// each passing one pixel per clock to the next:
//   rectify (left)  \
//                    > cost_match -> sgm_aggregate -> lr_check -> median_filter
//   rectify (right) /
// The output is the disparity map D of the left image, in raster order, with
// values 0 .. DMAX-1 and the all-ones code for pixels rejected by the
// left-right check. The rectification maps are held outside (they are
// W x H entries per camera) and are read through the two map ports with a
// one-clock read latency. cfg selects the cost function, the SGM penalties
// and the bypass of the rectification maps.
//
// Timing: the input accepts one left/right pixel pair per clock. The last
// disparity of a frame leaves at most (N+1)*W + 2*(2*W+2) + W + 12 clocks
// after the last input pixel (drains of rectify, cost_match and
// median_filter, the row check of lr_check and the stage registers); a
// source that waits that long before the next frame never overlaps two
// frames in a stage. A camera's vertical blanking easily covers this
// (8,336 clocks at the default size). The defaults are the published configuration:
// 640 x 360 pixels, disparities [0,60), 5x5 matching and median windows.
// N, the maximum vertical displacement of the maps, is not given and is a
// choice of this design.
module sgm_disparity_top
  import disp_pkg::*;
#(
  parameter int unsigned W    = IMG_W,
  parameter int unsigned H    = IMG_H,
  parameter int unsigned DMAX = D_MAX,
  parameter int unsigned N    = 7,
  localparam int unsigned DW  = disp_bits(DMAX),
  localparam int unsigned XW  = $clog2(W),
  localparam int unsigned YW  = $clog2(H)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  disp_cfg_t        cfg,
  input  logic             in_valid,
  input  logic [PIX_W-1:0] in_left,
  input  logic [PIX_W-1:0] in_right,
  // rectification map ports, left and right camera
  output logic             mapl_req,
  output logic [XW-1:0]    mapl_qx,
  output logic [YW-1:0]    mapl_qy,
  input  logic [XW-1:0]    mapl_x,
  input  logic [YW-1:0]    mapl_y,
  output logic             mapr_req,
  output logic [XW-1:0]    mapr_qx,
  output logic [YW-1:0]    mapr_qy,
  input  logic [XW-1:0]    mapr_x,
  input  logic [YW-1:0]    mapr_y,
  // disparity map
  output logic             out_valid,
  output logic [DW-1:0]    out_disp,
  output logic             lr_rejected
);
  logic             rl_valid, rr_valid;
  logic [PIX_W-1:0] rl_pix, rr_pix;

  rectify #(.W(W), .H(H), .N(N), .PIX_W(PIX_W)) u_rect_l (
    .clk, .rst_n, .bypass(cfg.rect_bypass), .in_valid, .in_pix(in_left),
    .map_req(mapl_req), .map_qx(mapl_qx), .map_qy(mapl_qy),
    .map_x(mapl_x), .map_y(mapl_y), .out_valid(rl_valid), .out_pix(rl_pix));

  rectify #(.W(W), .H(H), .N(N), .PIX_W(PIX_W)) u_rect_r (
    .clk, .rst_n, .bypass(cfg.rect_bypass), .in_valid, .in_pix(in_right),
    .map_req(mapr_req), .map_qx(mapr_qx), .map_qy(mapr_qy),
    .map_x(mapr_x), .map_y(mapr_y), .out_valid(rr_valid), .out_pix(rr_pix));

  logic                        c_valid;
  logic [DMAX-1:0][COST_W-1:0] c_vec;

  cost_match #(.W(W), .H(H), .DMAX(DMAX)) u_match (
    .clk, .rst_n, .cost_sel(cfg.cost_sel), .in_valid(rl_valid),
    .l_pix(rl_pix), .r_pix(rr_pix), .out_valid(c_valid), .cost(c_vec));

  logic                       a_valid;
  logic [DMAX-1:0][SUM_W-1:0] a_vec;

  sgm_aggregate #(.W(W), .H(H), .DMAX(DMAX)) u_sgm (
    .clk, .rst_n, .p1(cfg.p1), .p2(cfg.p2), .in_valid(c_valid), .cost(c_vec),
    .out_valid(a_valid), .agg(a_vec));

  logic          l_valid;
  logic [DW-1:0] l_disp;

  lr_check #(.W(W), .H(H), .DMAX(DMAX)) u_lr (
    .clk, .rst_n, .in_valid(a_valid), .agg(a_vec),
    .out_valid(l_valid), .out_disp(l_disp), .out_rejected(lr_rejected));

  median_filter #(.W(W), .H(H), .DMAX(DMAX)) u_median (
    .clk, .rst_n, .in_valid(l_valid), .in_disp(l_disp),
    .out_valid, .out_disp);

  // Both rectifiers run in lock step.
  a_rect_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    rl_valid == rr_valid);

endmodule

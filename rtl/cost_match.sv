// cost_match: pixel-wise matching cost volume C(p,d) for d = 0 .. D_MAX-1.
//
// Left pixel (x,y) is compared with right pixel (x-d,y), following
// C(p,d) = Phi(I_L(p), I_R(p_x - d, p_y)). Two cost functions are built,
// both over a 5x5 support region as in the published configuration, and
// cost_sel picks one at run time:
//   COST_SAD    - sum of absolute differences of the two 5x5 windows;
//   COST_CENSUS - Hamming distance of the two 24-bit census transforms
//                 (bit = neighbour darker than the centre).
// Window pixels outside the image contribute 0 to the SAD and 0-bits to the
// census; a disparity with x-d < 0 gets the cost COST_MAX. The border rule is
// this design's choice.
//
// Structure: one window_ctrl and two line_window instances (4 line buffers
// per image). The right image keeps D_MAX+4 columns, which is the buffer of
// d_max right pixels the paper asks for, and the right census values of the
// last D_MAX pixels are kept in a shift register.
// Interface: in_valid with the two rectified pixels (at most one pair per
// clock, raster order); out_valid with the cost vector of one left pixel, in
// raster order, 2*W+2 beats behind the input; after each frame the stage
// drains for 2*W+2 clocks (see window_ctrl).
module cost_match
  import disp_pkg::*;
#(
  parameter int unsigned W     = 640,
  parameter int unsigned H     = 360,
  parameter int unsigned DMAX  = 60
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  cost_sel_e                        cost_sel,
  input  logic                             in_valid,
  input  logic [PIX_W-1:0]                 l_pix,
  input  logic [PIX_W-1:0]                 r_pix,
  output logic                             out_valid,
  output logic [DMAX-1:0][COST_W-1:0]      cost
);
  localparam int unsigned K    = 5;
  localparam int unsigned R    = 2;
  localparam int unsigned RCOL = DMAX + K - 1;

  logic                 step, pad, w_step, w_valid;
  logic [$clog2(W)-1:0] xi, xc;
  logic [$clog2(H)-1:0] yc;

  window_ctrl #(.W(W), .H(H), .R(R)) u_ctrl (
    .clk, .rst_n, .in_valid, .step, .pad, .xi,
    .w_step, .w_valid, .w_xc(xc), .w_yc(yc)
  );

  logic [K-1:0][K-1:0][PIX_W-1:0]    lwin;
  logic [RCOL-1:0][K-1:0][PIX_W-1:0] rwin;

  line_window #(.W(W), .DW(PIX_W), .K(K), .NCOL(K)) u_lwin (
    .clk, .step, .pad, .xi, .pix(l_pix), .win(lwin));
  line_window #(.W(W), .DW(PIX_W), .K(K), .NCOL(RCOL)) u_rwin (
    .clk, .step, .pad, .xi, .pix(r_pix), .win(rwin));

  // Element validity. Column age i of the window holds x = xc + R - i,
  // row age j holds y = yc + R - j.
  logic [K-1:0]    row_ok;
  logic [RCOL-1:0] col_ok;   // column age i of the right history
  always_comb begin
    for (int j = 0; j < K; j++)
      row_ok[j] = (int'(yc) + int'(R) - j >= 0) && (int'(yc) + int'(R) - j < int'(H));
    for (int i = 0; i < RCOL; i++)
      col_ok[i] = (int'(xc) + int'(R) - i >= 0) && (int'(xc) + int'(R) - i < int'(W));
  end

  // Census of the window centred in column age c of a window array.
  function automatic logic [CENSUS_W-1:0] census5(
      input logic [K-1:0][K-1:0][PIX_W-1:0] w,
      input logic [K-1:0] rok, input logic [K-1:0] cok);
    logic [CENSUS_W-1:0] r;
    int b;
    b = 0;
    r = '0;
    for (int j = 0; j < K; j++)
      for (int i = 0; i < K; i++)
        if (!(i == R && j == R)) begin
          r[b] = rok[j] && cok[i] && (w[i][j] < w[R][R]);
          b++;
        end
    return r;
  endfunction

  logic [CENSUS_W-1:0] lcen, rcen_now;
  logic [CENSUS_W-1:0] rcen_q [DMAX];   // census of right pixel xc-1-k
  logic [K-1:0][K-1:0][PIX_W-1:0] rwin_c;

  always_comb begin
    for (int i = 0; i < K; i++) rwin_c[i] = rwin[i];
    lcen     = census5(lwin, row_ok, col_ok[K-1:0]);
    rcen_now = census5(rwin_c, row_ok, col_ok[K-1:0]);
  end

  always_ff @(posedge clk) begin
    if (w_step) begin
      rcen_q[0] <= rcen_now;
      for (int k = 1; k < DMAX; k++) rcen_q[k] <= rcen_q[k-1];
    end
  end

  logic [DMAX-1:0][COST_W-1:0] cost_c;
  always_comb begin
    for (int d = 0; d < DMAX; d++) begin
      logic [CENSUS_W-1:0] rc;
      logic [COST_W-1:0]   sad;
      rc  = (d == 0) ? rcen_now : rcen_q[(d == 0) ? 0 : d - 1];
      sad = '0;
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++)
          if (row_ok[j] && col_ok[i] && col_ok[i+d]) begin
            if (lwin[i][j] > rwin[i+d][j])
              sad = sad + COST_W'(lwin[i][j] - rwin[i+d][j]);
            else
              sad = sad + COST_W'(rwin[i+d][j] - lwin[i][j]);
          end
      if (int'(xc) < d)
        cost_c[d] = COST_MAX;
      else if (cost_sel == COST_SAD)
        cost_c[d] = sad;
      else
        cost_c[d] = COST_W'($countones(lcen ^ rc));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= w_valid;
    if (w_valid) cost <= cost_c;
  end

endmodule

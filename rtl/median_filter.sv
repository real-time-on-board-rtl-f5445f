// median_filter: 5x5 median of the disparity stream.
//
// Removes isolated outliers that survive the left-right check. The window is
// built from K-1 = 4 line buffers (the paper: a k x k median needs k line
// buffers; here the k-th row is the incoming pixel). The median is the
// element of rank 12 of the 25 window values, found by counting for every
// element how many others are smaller (or equal and earlier), so no sorting
// network is needed. The invalid code (all ones) takes part as the largest
// value, so a pixel ends up invalid only when at least 13 of its 25
// neighbours are. Pixels closer than two to the image border are passed on
// unfiltered. Rank counting, the handling of invalid pixels and the border
// rule are this design's choices.
// Interface and timing as in window_ctrl: raster input, one pixel per clock
// at most, output 2*W+2 beats behind, a 2*W+2 clock drain after each frame.
module median_filter
  import disp_pkg::*;
#(
  parameter int unsigned W    = 640,
  parameter int unsigned H    = 360,
  parameter int unsigned DMAX = 60,
  localparam int unsigned DW  = disp_bits(DMAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [DW-1:0] in_disp,
  output logic          out_valid,
  output logic [DW-1:0] out_disp
);
  localparam int unsigned K = 5;
  localparam int unsigned R = 2;
  localparam int unsigned N = K * K;

  logic                 step, pad, w_step, w_valid;
  logic [$clog2(W)-1:0] xi, xc;
  logic [$clog2(H)-1:0] yc;
  logic [K-1:0][K-1:0][DW-1:0] win;

  window_ctrl #(.W(W), .H(H), .R(R)) u_ctrl (
    .clk, .rst_n, .in_valid, .step, .pad, .xi,
    .w_step, .w_valid, .w_xc(xc), .w_yc(yc)
  );

  line_window #(.W(W), .DW(DW), .K(K), .NCOL(K)) u_win (
    .clk, .step, .pad, .xi, .pix(in_disp), .win);

  logic [DW-1:0] v [N];
  logic [DW-1:0] med;
  logic          border;

  always_comb begin
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) v[i*K + j] = win[i][j];
    med = v[0];
    for (int a = 0; a < N; a++) begin
      int rank;
      rank = 0;
      for (int b = 0; b < N; b++)
        if (v[b] < v[a] || (v[b] == v[a] && b < a)) rank++;
      if (rank == N / 2) med = v[a];
    end
    border = (int'(xc) < R) || (int'(xc) >= int'(W) - R) ||
             (int'(yc) < R) || (int'(yc) >= int'(H) - R);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_disp  <= '0;
    end else begin
      out_valid <= w_valid;
      if (w_valid) out_disp <= border ? win[R][R] : med;
    end
  end

endmodule

// sgm_aggregate: four-path semi-global cost aggregation on a pixel stream.
//
// The four paths are those that can be followed while the image streams in
// raster order: L0 (left to right), L45 (towards bottom right, from the
// upper-left neighbour), L90 (top to bottom) and L135 (towards bottom left,
// from the upper-right neighbour). L0 needs only the D_MAX values of the
// previous pixel, held in registers. The other three need the values of
// the previous row: one line memory of W words holds, per column, the
// 3 x D_MAX path costs and their three minima (the 3 x d_max buffer per pixel
// of the paper). At column x the stage reads columns x and x+1 of the previous
// row, keeps column x-1 from the step before, and overwrites column x with the
// current row's values. The output is the aggregated cost
// C_aggr(p,d) = L0+L45+L90+L135, registered, one clock after the input.
// Paths start afresh at the image border (L = C). Penalties are inputs.
// The recurrence and the path set follow the paper; the memory organisation
// (two asynchronous read ports) and the border rule are this design's.
// Timing: one cost vector per clock at most; the L0 recurrence closes in one
// clock.
module sgm_aggregate
  import disp_pkg::*;
#(
  parameter int unsigned W    = 640,
  parameter int unsigned H    = 360,
  parameter int unsigned DMAX = 60
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [P_W-1:0]              p1,
  input  logic [P_W-1:0]              p2,
  input  logic                        in_valid,
  input  logic [DMAX-1:0][COST_W-1:0] cost,
  output logic                        out_valid,
  output logic [DMAX-1:0][SUM_W-1:0]  agg
);
  localparam int unsigned XW = $clog2(W);
  localparam int unsigned YW = $clog2(H);
  typedef logic [DMAX-1:0][LR_W-1:0] lrvec_t;

  typedef struct packed {
    lrvec_t            l45, l90, l135;
    logic [LR_W-1:0]   m45, m90, m135;
  } col_t;

  col_t          rowmem [W];
  logic [XW-1:0] x;
  logic [YW-1:0] y;
  lrvec_t        l0_q;
  logic [LR_W-1:0] m0_q;
  col_t          ul_q;       // previous-row column x-1
  col_t          up, ur;     // previous-row columns x and x+1

  assign up = rowmem[x];
  assign ur = rowmem[(32'(x) + 1 < W) ? x + 1'b1 : x];

  lrvec_t l0, l45, l90, l135;
  logic [LR_W-1:0] m0, m45, m90, m135;

  sgm_path_step #(.DMAX(DMAX)) u_p0 (
    .start(x == '0), .cost, .prev(l0_q), .prev_min(m0_q), .p1, .p2, .lr(l0), .lmin(m0));
  sgm_path_step #(.DMAX(DMAX)) u_p45 (
    .start(x == '0 || y == '0), .cost, .prev(ul_q.l45), .prev_min(ul_q.m45), .p1, .p2,
    .lr(l45), .lmin(m45));
  sgm_path_step #(.DMAX(DMAX)) u_p90 (
    .start(y == '0), .cost, .prev(up.l90), .prev_min(up.m90), .p1, .p2, .lr(l90), .lmin(m90));
  sgm_path_step #(.DMAX(DMAX)) u_p135 (
    .start(32'(x) == W - 1 || y == '0), .cost, .prev(ur.l135), .prev_min(ur.m135), .p1, .p2,
    .lr(l135), .lmin(m135));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x <= '0;
      y <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        if (32'(x) == W - 1) begin
          x <= '0;
          y <= (32'(y) == H - 1) ? '0 : y + 1'b1;
        end else begin
          x <= x + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      l0_q <= l0;
      m0_q <= m0;
      ul_q <= up;
      rowmem[x] <= '{l45: l45, l90: l90, l135: l135, m45: m45, m90: m90, m135: m135};
      for (int d = 0; d < DMAX; d++)
        agg[d] <= SUM_W'(l0[d]) + SUM_W'(l45[d]) + SUM_W'(l90[d]) + SUM_W'(l135[d]);
    end
  end

endmodule

// sgm_path_step: one step of SGM cost aggregation along one path direction.
//
// Combinational. For every disparity d it computes the recurrence of
// semi-global matching,
//   L(p,d) = C(p,d) + min( L(q,d), L(q,d-1)+P1, L(q,d+1)+P1, min_k L(q,k)+P2 )
//            - min_k L(q,k),
// where q is the previous pixel on the path; the subtraction of the previous
// minimum keeps the values bounded (L <= C + P2), as the published design
// does to avoid overflow. When start is high, p is the first pixel of the
// path (q lies outside the image) and L(p,d) = C(p,d). lmin is min_d L(p,d),
// passed on with L so that the next step need not search for it again.
module sgm_path_step
  import disp_pkg::*;
#(
  parameter int unsigned DMAX = 60
) (
  input  logic                        start,
  input  logic [DMAX-1:0][COST_W-1:0] cost,
  input  logic [DMAX-1:0][LR_W-1:0]   prev,
  input  logic [LR_W-1:0]             prev_min,
  input  logic [P_W-1:0]              p1,
  input  logic [P_W-1:0]              p2,
  output logic [DMAX-1:0][LR_W-1:0]   lr,
  output logic [LR_W-1:0]             lmin
);
  localparam int unsigned TW = LR_W + 2;

  always_comb begin
    lmin = '1;
    for (int d = 0; d < DMAX; d++) begin
      logic [TW-1:0] m;
      m = TW'(prev[d]);
      if (d > 0 && TW'(prev[(d > 0) ? d - 1 : 0]) + TW'(p1) < m)
        m = TW'(prev[(d > 0) ? d - 1 : 0]) + TW'(p1);
      if (d < DMAX - 1 && TW'(prev[(d < DMAX - 1) ? d + 1 : d]) + TW'(p1) < m)
        m = TW'(prev[(d < DMAX - 1) ? d + 1 : d]) + TW'(p1);
      if (TW'(prev_min) + TW'(p2) < m)
        m = TW'(prev_min) + TW'(p2);
      if (start)
        lr[d] = LR_W'(cost[d]);
      else
        lr[d] = LR_W'(TW'(cost[d]) + m - TW'(prev_min));
      if (lr[d] < lmin) lmin = lr[d];
    end
  end

endmodule

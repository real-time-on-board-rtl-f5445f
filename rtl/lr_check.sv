// lr_check: winner-takes-all disparities and left-right consistency check.
//
// From the aggregated costs C_aggr(p,d) of each left pixel the stage takes
//   D_left(x)  = argmin_d C_aggr((x,y), d)
// and, without a second matching pass, the approximate right-image map
//   D_right(xr) = argmin_d C_aggr((xr+d, y), d),
// i.e. the minimum along the diagonal of the cost volume, as in the paper.
// Ties go to the smaller disparity. A left pixel is kept when
// |D_left(x) - D_right(x - D_left(x))| <= 1 and replaced by the invalid code
// (all ones) otherwise, or when x - D_left(x) < 0.
// (The paper writes the right pixel as x + d_left and calls the disparities
// inconsistent when the difference is <= 1; with C(p,d) matching right pixel
// x-d both are read here as x - d_left and > 1, which is the geometrically
// consistent form.)
//
// D_right(xr) collects contributions from the D_MAX left pixels xr..xr+D_MAX-1,
// so it is built in a shift register of running minima; entries are final
// when their last contribution arrives, or at the end of the row. Both row
// maps go to ping-pong row buffers; when a row is complete the checker reads
// it out during the next row, one pixel per clock, while the next row is
// being written into the other bank. Output: out_valid/out_disp, a burst of W
// pixels, the first of them two clocks after the clock edge that takes the
// last cost vector of the row. out_rejected marks pixels the check removed.
// Requires W >= DMAX and at most one input per clock.
module lr_check
  import disp_pkg::*;
#(
  parameter int unsigned W    = 640,
  parameter int unsigned H    = 360,
  parameter int unsigned DMAX = 60,
  localparam int unsigned DW  = disp_bits(DMAX)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [DMAX-1:0][SUM_W-1:0] agg,
  output logic                       out_valid,
  output logic [DW-1:0]              out_disp,
  output logic                       out_rejected
);
  localparam int unsigned XW = $clog2(W);
  localparam logic [DW-1:0] INVALID = '1;

  typedef struct packed {
    logic [SUM_W-1:0] val;
    logic [DW-1:0]    arg;
  } cand_t;

  logic [XW-1:0]   x;
  logic            wbank;
  logic [DW-1:0]   dleft  [2][W];
  logic [DW-1:0]   dright [2][W];
  cand_t           racc   [DMAX-1];   // running minimum for xr = x-1-k
  cand_t           nacc   [DMAX];     // after this pixel, for xr = x-k
  logic [DW-1:0]   dl;

  // Winner-takes-all for the left image and diagonal update for the right.
  always_comb begin
    logic [SUM_W-1:0] best;
    best = agg[0];
    dl   = '0;
    for (int d = 1; d < DMAX; d++)
      if (agg[d] < best) begin
        best = agg[d];
        dl   = DW'(d);
      end
    nacc[0] = '{val: agg[0], arg: '0};
    for (int d = 1; d < DMAX; d++) begin
      if (int'(x) < d || agg[d] < racc[d-1].val)
        nacc[d] = '{val: agg[d], arg: DW'(d)};
      else
        nacc[d] = racc[d-1];
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int k = 0; k < DMAX - 1; k++) racc[k] <= nacc[k];
      dleft[wbank][x] <= dl;
      if (32'(x) == W - 1) begin
        for (int d = 0; d < DMAX; d++) dright[wbank][W - 1 - d] <= nacc[d].arg;
      end else if (32'(x) >= DMAX - 1) begin
        dright[wbank][32'(x) - (DMAX - 1)] <= nacc[DMAX-1].arg;
      end
    end
  end

  // Checker of the completed row.
  logic          chk_active;
  logic          rbank;
  logic [XW-1:0] cx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x <= '0;
      wbank <= 1'b0;
      rbank <= 1'b0;
      chk_active <= 1'b0;
      cx <= '0;
    end else begin
      if (in_valid) begin
        if (32'(x) == W - 1) begin
          x <= '0;
          wbank <= ~wbank;
          rbank <= wbank;
          chk_active <= 1'b1;
          cx <= '0;
        end else begin
          x <= x + 1'b1;
        end
      end
      if (chk_active && !(in_valid && 32'(x) == W - 1)) begin
        if (32'(cx) == W - 1) chk_active <= 1'b0;
        else                  cx <= cx + 1'b1;
      end
    end
  end

  logic [DW-1:0] cdl, cdr;
  logic          ok;
  always_comb begin
    cdl = dleft[rbank][cx];
    cdr = (cx >= XW'(cdl)) ? dright[rbank][cx - XW'(cdl)] : '0;
    ok  = (cx >= XW'(cdl)) &&
          ((cdl >= cdr) ? (cdl - cdr <= 1) : (cdr - cdl <= 1));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      out_disp     <= '0;
      out_rejected <= 1'b0;
    end else begin
      out_valid    <= chk_active;
      out_disp     <= ok ? cdl : INVALID;
      out_rejected <= chk_active && !ok;
    end
  end

  // A new row may only complete once the previous one has been checked.
  a_check_done: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && 32'(x) == W - 1) |-> (!chk_active || 32'(cx) == W - 1));

endmodule

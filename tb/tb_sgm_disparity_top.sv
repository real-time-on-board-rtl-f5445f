// tb_sgm_disparity_top: end-to-end test of the disparity pipeline.
//
// A synthetic stereo pair (textured background at disparity 2, a box-shaped
// obstacle at disparity 5) is streamed through the whole pipeline in three
// frames, each checked pixel by pixel against the chained reference model
// (rectify -> cost -> SGM -> LR check -> median):
//   frame 1: census cost, P1/P2 = 8/32, warped rectification maps (vertical
//            ripple of up to 3 rows, so some entries fall outside the N-row
//            band and come out black);
//   frame 2: SAD cost, P1/P2 = 200/800, rectification bypassed;
//   frame 3: census cost, bypassed, pixels back to back (full rate).
// The test counts how often each mechanism happened (out-of-band map entries,
// bypass frames, each cost function, left-right rejections, pixels changed by
// the median) and fails if one never did. It also checks that the obstacle is
// found at its disparity, that each frame is complete within the idle gap the
// top module specifies, and that input is accepted at one pixel per clock.
module tb_sgm_disparity_top;
  import disp_pkg::*;
  localparam int W = 32, H = 12, D = 8, N = 2;
  localparam int DW = disp_bits(D);
  localparam int INV = (1 << DW) - 1;
  localparam int GAP = (N + 1) * W + 2 * (2 * W + 2) + W + 12;
  localparam int XW = $clog2(W), YW = $clog2(H);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  disp_cfg_t cfg;
  logic in_valid, out_valid, lr_rej;
  logic [7:0] il, ir;
  logic mapl_req, mapr_req;
  logic [XW-1:0] mapl_qx, mapr_qx, mapl_x, mapr_x;
  logic [YW-1:0] mapl_qy, mapr_qy, mapl_y, mapr_y;
  logic [DW-1:0] od;

  sgm_disparity_top #(.W(W), .H(H), .DMAX(D), .N(N)) dut (
    .clk, .rst_n, .cfg, .in_valid, .in_left(il), .in_right(ir),
    .mapl_req, .mapl_qx, .mapl_qy, .mapl_x, .mapl_y,
    .mapr_req, .mapr_qx, .mapr_qy, .mapr_x, .mapr_y,
    .out_valid, .out_disp(od), .lr_rejected(lr_rej));

  int checks = 0, failures = 0;
  int n_oob = 0, n_bypass = 0, n_census = 0, n_sad = 0, n_rej = 0, n_med = 0;

  function automatic int fmy(int x, int y);
    int v;
    v = y + ((x / 4) % 7) - 3;
    return (v < 0) ? 0 : ((v > H - 1) ? H - 1 : v);
  endfunction

  // Rectification map memories (behavioural, one-clock read latency).
  always @(posedge clk) begin
    mapl_x <= mapl_qx;
    mapl_y <= YW'(fmy(int'(mapl_qx), int'(mapl_qy)));
    mapr_x <= mapr_qx;
    mapr_y <= YW'(fmy(int'(mapr_qx), int'(mapr_qy)));
  end

  int exp_d[];
  int ocnt, cyc, last_in, last_out;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && lr_rej) n_rej++;
    if (rst_n && out_valid) begin
      checks++;
      if (int'(od) != exp_d[ocnt]) begin
        failures++;
        if (failures < 10) $display("px %0d: got %0d exp %0d", ocnt, od, exp_d[ocnt]);
      end
      ocnt++;
      last_out = cyc;
    end
  end

  task automatic run_frame(cost_sel_e s, bit byp, bit full_rate, int seed);
    int l[], r[], lr_[], rr_[], mx[], my[], c[], sg[], dl[], nrej, nchg, hit, tot;
    ref_pkg::scene(W, H, 2, 5, seed, l, r);
    mx = new[W*H]; my = new[W*H];
    for (int i = 0; i < W*H; i++) begin
      mx[i] = i % W;
      my[i] = byp ? i / W : fmy(i % W, i / W);
      if (ref_pkg::iabs(my[i] - i / W) > N) n_oob++;
    end
    ref_pkg::rectify(l, mx, my, W, H, N, lr_);
    ref_pkg::rectify(r, mx, my, W, H, N, rr_);
    ref_pkg::cost(lr_, rr_, W, H, D, s == COST_SAD, c);
    if (s == COST_SAD) ref_pkg::sgm(c, W, H, D, 200, 800, sg);
    else               ref_pkg::sgm(c, W, H, D, 8, 32, sg);
    ref_pkg::lrcheck(sg, W, H, D, INV, dl, nrej);
    ref_pkg::median(dl, W, H, exp_d, nchg);
    n_med += nchg;
    if (byp) n_bypass++;
    if (s == COST_SAD) n_sad++; else n_census++;
    cfg.cost_sel    = s;
    cfg.p1          = (s == COST_SAD) ? P1_SAD : P1_CT;
    cfg.p2          = (s == COST_SAD) ? P2_SAD : P2_CT;
    cfg.rect_bypass = byp;
    ocnt = 0;
    for (int i = 0; i < W*H; ) begin
      @(negedge clk);
      if (!full_rate && $urandom % 4 == 0) in_valid = 0;
      else begin in_valid = 1; il = 8'(l[i]); ir = 8'(r[i]); i++; last_in = cyc; end
    end
    @(negedge clk) in_valid = 0;
    repeat (GAP) @(negedge clk);
    checks++;
    if (ocnt != W*H) begin failures++; $display("frame count %0d", ocnt); end
    checks++;
    if (last_out - last_in > GAP) begin failures++; $display("frame took %0d > %0d", last_out - last_in, GAP); end
    // The obstacle interior should be seen at its disparity (bypassed frames).
    if (byp) begin
      hit = 0; tot = 0;
      for (int y = H/4 + 2; y < H/4 + H/2 - 2; y++)
        for (int x = W/3 + 2; x < W/3 + W/4 - 2; x++) begin
          tot++;
          if (exp_d[y*W+x] == 5) hit++;
        end
      checks++;
      if (2 * hit < tot) begin failures++; $display("obstacle found in %0d of %0d", hit, tot); end
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t0;
  initial begin
    cyc = 0; in_valid = 0; il = 0; ir = 0;
    cfg = '{cost_sel: COST_CENSUS, p1: P1_CT, p2: P2_CT, rect_bypass: 1'b0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame(COST_CENSUS, 0, 0, 11);
    run_frame(COST_SAD, 1, 0, 12);
    t0 = cyc;
    run_frame(COST_CENSUS, 1, 1, 13);
    checks++;
    if (cyc - t0 != W*H + 1 + GAP) begin failures++; $display("full-rate input took %0d", cyc - t0); end
    $display("mechanisms: out_of_band=%0d bypass_frames=%0d census_frames=%0d sad_frames=%0d lr_rejections=%0d median_changes=%0d",
             n_oob, n_bypass, n_census, n_sad, n_rej, n_med);
    checks++; if (n_oob == 0)    begin failures++; $display("no out-of-band map entry"); end
    checks++; if (n_bypass == 0) begin failures++; $display("no bypass frame"); end
    checks++; if (n_census == 0) begin failures++; $display("no census frame"); end
    checks++; if (n_sad == 0)    begin failures++; $display("no SAD frame"); end
    checks++; if (n_rej == 0)    begin failures++; $display("no LR rejection"); end
    checks++; if (n_med == 0)    begin failures++; $display("median changed nothing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

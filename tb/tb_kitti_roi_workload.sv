// tb_kitti_roi_workload: the benchmark configuration of the disparity
// pipeline, on synthetic data.
//
// The published evaluation feeds pre-rectified 640 x 360 crops of a stereo
// benchmark into the pipeline and compares the SAD and census cost functions
// by density (share of pixels that survive the left-right check) and
// correctness (share of those within 3 pixels of the ground truth).
// Benchmark images are not available here, so this test runs the same
// configuration (default top parameters, rectification bypassed, one frame
// with census and P1/P2 = 8/32, one with SAD and 200/800) on a synthetic
// scene with known ground truth: background at disparity 6, obstacle at 24.
// Every output pixel is compared with the reference model. Density and
// correctness are printed for both cost functions, measured over pixels at
// least DMAX from the left edge and 2 from the other edges; a frame fails if
// its density is below 50 % or its correctness below 80 %.
module tb_kitti_roi_workload;
  import disp_pkg::*;
  localparam int W = IMG_W, H = IMG_H, D = D_MAX, N = 7;
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

  sgm_disparity_top dut (
    .clk, .rst_n, .cfg, .in_valid, .in_left(il), .in_right(ir),
    .mapl_req, .mapl_qx, .mapl_qy, .mapl_x, .mapl_y,
    .mapr_req, .mapr_qx, .mapr_qy, .mapr_x, .mapr_y,
    .out_valid, .out_disp(od), .lr_rejected(lr_rej));

  int checks = 0, failures = 0;

  // Map port: identity map (the map is bypassed anyway).
  always @(posedge clk) begin
    mapl_x <= mapl_qx;
    mapl_y <= mapl_qy;
    mapr_x <= mapr_qx;
    mapr_y <= mapr_qy;
  end

  int exp_d[];
  int ocnt;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (int'(od) != exp_d[ocnt]) begin
        failures++;
        if (failures < 10) $display("px %0d: got %0d exp %0d", ocnt, od, exp_d[ocnt]);
      end
      ocnt++;
    end
  end

  task automatic run_frame(cost_sel_e s, int seed);
    int l[], r[], c[], sg[], dl[], nrej, nchg, nval, ncor, npx;
    ref_pkg::scene(W, H, 6, 24, seed, l, r);
    ref_pkg::cost(l, r, W, H, D, s == COST_SAD, c);
    if (s == COST_SAD) ref_pkg::sgm(c, W, H, D, 200, 800, sg);
    else               ref_pkg::sgm(c, W, H, D, 8, 32, sg);
    ref_pkg::lrcheck(sg, W, H, D, INV, dl, nrej);
    ref_pkg::median(dl, W, H, exp_d, nchg);
    cfg.cost_sel    = s;
    cfg.p1          = (s == COST_SAD) ? P1_SAD : P1_CT;
    cfg.p2          = (s == COST_SAD) ? P2_SAD : P2_CT;
    cfg.rect_bypass = 1'b1;
    ocnt = 0;
    for (int i = 0; i < W*H; i++) begin
      @(negedge clk);
      in_valid = 1; il = 8'(l[i]); ir = 8'(r[i]);
    end
    @(negedge clk) in_valid = 0;
    repeat (GAP) @(negedge clk);
    checks++;
    if (ocnt != W*H) begin failures++; $display("frame count %0d", ocnt); end
    // Density and correctness against the ground truth.
    nval = 0; ncor = 0; npx = 0;
    for (int y = 2; y < H - 2; y++)
      for (int x = D; x < W - 2; x++) begin
        int gt;
        gt = (x >= W/3 && x < W/3 + W/4 && y >= H/4 && y < H/4 + H/2) ? 24 : 6;
        npx++;
        if (exp_d[y*W+x] != INV) begin
          nval++;
          if (ref_pkg::iabs(exp_d[y*W+x] - gt) < 3) ncor++;
        end
      end
    $display("%s: density %0d.%0d %%, correct %0d.%0d %%, rejected by LR check %0d",
             (s == COST_SAD) ? "SAD" : "census",
             nval * 100 / npx, (nval * 1000 / npx) % 10,
             ncor * 100 / nval, (ncor * 1000 / nval) % 10, nrej);
    checks++;
    if (nval * 2 < npx || ncor * 10 < nval * 8) begin failures++; $display("poor disparity map"); end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; il = 0; ir = 0;
    cfg = '{cost_sel: COST_CENSUS, p1: P1_CT, p2: P2_CT, rect_bypass: 1'b1};
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame(COST_CENSUS, 21);
    run_frame(COST_SAD, 22);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

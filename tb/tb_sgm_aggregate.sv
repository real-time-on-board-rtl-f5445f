// tb_sgm_aggregate: self-checking test of the four-path SGM aggregation.
//
// Feeds 12x6 frames of random cost vectors (8 disparities) with random gaps
// and compares every aggregated cost with the reference four-path SGM
// (L0, L45, L90, L135 with minimum subtraction). Frame 1 uses the census
// penalties 8/32 and small costs; frame 2 uses the SAD penalties 200/800 and
// costs up to COST_MAX, which exercises the widest path values. Also checks
// the one-clock latency of every output.
module tb_sgm_aggregate;
  import disp_pkg::*;
  localparam int W = 12, H = 6, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [P_W-1:0] p1, p2;
  logic in_valid, out_valid;
  logic [D-1:0][COST_W-1:0] cost;
  logic [D-1:0][SUM_W-1:0]  agg;

  sgm_aggregate #(.W(W), .H(H), .DMAX(D)) dut (
    .clk, .rst_n, .p1, .p2, .in_valid, .cost, .out_valid, .agg);

  int checks = 0, failures = 0;
  int c[], s[];
  int ocnt;
  logic v_q;

  always @(posedge clk) begin
    v_q <= in_valid;
    if (rst_n) begin
      if (out_valid != v_q) begin failures++; $display("latency"); end
      if (out_valid) begin
        for (int d = 0; d < D; d++) begin
          checks++;
          if (int'(agg[d]) != s[ocnt*D + d]) begin
            failures++;
            if (failures < 10) $display("px %0d d %0d: got %0d exp %0d", ocnt, d, agg[d], s[ocnt*D+d]);
          end
        end
        ocnt++;
      end
    end
  end

  task automatic run_frame(int pp1, int pp2, int cmax);
    c = new[W*H*D];
    foreach (c[i]) c[i] = (i % 5 == 0) ? cmax : $urandom % (cmax + 1);
    ref_pkg::sgm(c, W, H, D, pp1, pp2, s);
    p1 = P_W'(pp1); p2 = P_W'(pp2);
    ocnt = 0;
    for (int i = 0; i < W*H; ) begin
      @(negedge clk);
      if ($urandom % 3 == 0) in_valid = 0;
      else begin
        in_valid = 1;
        for (int d = 0; d < D; d++) cost[d] = COST_W'(c[i*D + d]);
        i++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (ocnt != W*H) begin failures++; $display("count %0d", ocnt); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; cost = '0; p1 = 0; p2 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame(8, 32, 24);
    run_frame(200, 800, 6375);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

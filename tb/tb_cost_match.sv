// tb_cost_match: self-checking test of the matching cost stage.
//
// Streams a synthetic 20x9 stereo pair (background and object at different
// disparities) twice with random input gaps, once with the census cost and
// once with SAD, and compares every cost vector with the reference cost
// volume, including the border rule and the COST_MAX entries for x < d.
// Also checks that exactly W*H vectors per frame come out and that the last
// one leaves 2*W+2 drain clocks plus two register stages after the last input
// (plus one clock because inputs are driven half a clock before sampling).
module tb_cost_match;
  import disp_pkg::*;
  localparam int W = 20, H = 9, D = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cost_sel_e sel;
  logic in_valid, out_valid;
  logic [7:0] lp, rp;
  logic [D-1:0][COST_W-1:0] cost;

  cost_match #(.W(W), .H(H), .DMAX(D)) dut (
    .clk, .rst_n, .cost_sel(sel), .in_valid, .l_pix(lp), .r_pix(rp), .out_valid, .cost);

  int checks = 0, failures = 0;
  int limg[], rimg[], ref_c[];
  int ocnt, cyc, last_in, last_out;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      for (int d = 0; d < D; d++) begin
        checks++;
        if (int'(cost[d]) != ref_c[ocnt*D + d]) begin
          failures++;
          if (failures < 10) $display("px %0d d %0d: got %0d exp %0d", ocnt, d, cost[d], ref_c[ocnt*D+d]);
        end
      end
      ocnt++;
      last_out = cyc;
    end
  end

  task automatic run_frame(cost_sel_e s);
    ref_pkg::scene(W, H, 2, 4, int'(s) + 7, limg, rimg);
    ref_pkg::cost(limg, rimg, W, H, D, s == COST_SAD, ref_c);
    ocnt = 0;
    sel = s;
    for (int i = 0; i < W*H; ) begin
      @(negedge clk);
      if ($urandom % 3 == 0) in_valid = 0;
      else begin in_valid = 1; lp = 8'(limg[i]); rp = 8'(rimg[i]); i++; last_in = cyc; end
    end
    @(negedge clk) in_valid = 0;
    repeat (2*W + 10) @(negedge clk);
    checks++;
    if (ocnt != W*H) begin failures++; $display("count %0d", ocnt); end
    checks++;
    if (last_out - last_in != 2*W + 2 + 3) begin
      failures++; $display("drain latency %0d", last_out - last_in);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; in_valid = 0; lp = 0; rp = 0; sel = COST_CENSUS;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame(COST_CENSUS);
    run_frame(COST_SAD);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_lr_check: self-checking test of WTA and left-right consistency check.
//
// Feeds 16x5 frames of aggregated cost vectors (6 disparities) and compares
// the checked disparity of every pixel with the reference: left WTA, right
// WTA along the cost-volume diagonal, |D_left - D_right(x - D_left)| <= 1.
// Frame 1 is random with small values (many ties, many rejections); frame 2
// is built from a consistent disparity ramp so that most pixels survive.
// Input is back-to-back within rows, which is the tightest case for the
// ping-pong row buffers, with random gaps between rows. The output burst of
// each row must start exactly two clocks after the row's last input
// (checker start register, output register).
module tb_lr_check;
  import disp_pkg::*;
  localparam int W = 16, H = 5, D = 6;
  localparam int DW = disp_bits(D);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, rej;
  logic [D-1:0][SUM_W-1:0] agg;
  logic [DW-1:0] od;

  lr_check #(.W(W), .H(H), .DMAX(D)) dut (
    .clk, .rst_n, .in_valid, .agg, .out_valid, .out_disp(od), .out_rejected(rej));

  int checks = 0, failures = 0;
  int s[], ref_d[];
  int nrej, ocnt, ocnt_in, cyc, row_end_cyc, nrej_seen, nacc_seen;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && in_valid) begin
      if ((ocnt_in + 1) % W == 0) row_end_cyc = cyc;
      ocnt_in++;
    end
    if (rst_n && out_valid) begin
      checks++;
      if (int'(od) != ref_d[ocnt]) begin
        failures++;
        if (failures < 10) $display("px %0d: got %0d exp %0d", ocnt, od, ref_d[ocnt]);
      end
      if (rej != (int'(od) == (1 << DW) - 1)) begin failures++; $display("rejected flag"); end
      if (rej) nrej_seen++; else nacc_seen++;
      if (ocnt % W == 0) begin
        checks++;
        if (cyc != row_end_cyc + 2) begin failures++; $display("burst start %0d vs %0d", cyc, row_end_cyc); end
      end
      ocnt++;
    end
  end


  task automatic run_frame(bit ramp);
    s = new[W*H*D];
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int d = 0; d < D; d++) begin
          int dt;
          dt = (x / 4) % D;
          s[(y*W+x)*D+d] = ramp ? (ref_pkg::iabs(d - dt) * 10 + $urandom % 4) : $urandom % 6;
        end
    ref_pkg::lrcheck(s, W, H, D, (1 << DW) - 1, ref_d, nrej);
    ocnt = 0; ocnt_in = 0;
    for (int i = 0; i < W*H; ) begin
      @(negedge clk);
      if (i % W == 0 && $urandom % 2 == 0) in_valid = 0;
      else begin
        in_valid = 1;
        for (int d = 0; d < D; d++) agg[d] = SUM_W'(s[i*D + d]);
        i++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (W + 4) @(negedge clk);
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
    cyc = 0; in_valid = 0; agg = '0; nrej_seen = 0; nacc_seen = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame(0);
    run_frame(1);
    checks++;
    if (nrej_seen == 0 || nacc_seen == 0) begin failures++; $display("no rejection or no acceptance seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_median_filter: self-checking test of the 5x5 median filter.
//
// Streams 12x8 disparity frames (8 disparities, invalid code 15) with random
// gaps and compares every output with the reference median (rank 12 of the
// sorted window, borders passed through). Frame 1 is a smooth field with
// isolated outliers and invalid pixels, frame 2 is random, so the median both
// removes outliers and changes values. Also checks the frame count.
module tb_median_filter;
  import disp_pkg::*;
  localparam int W = 12, H = 8, D = 8;
  localparam int DW = disp_bits(D);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic [DW-1:0] id, od;

  median_filter #(.W(W), .H(H), .DMAX(D)) dut (
    .clk, .rst_n, .in_valid, .in_disp(id), .out_valid, .out_disp(od));

  int checks = 0, failures = 0;
  int img[], ref_o[];
  int ocnt, nchg;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (int'(od) != ref_o[ocnt]) begin
        failures++;
        if (failures < 10) $display("px %0d: got %0d exp %0d", ocnt, od, ref_o[ocnt]);
      end
      ocnt++;
    end
  end

  task automatic run_frame(bit rnd);
    img = new[W*H];
    for (int i = 0; i < W*H; i++) begin
      if (rnd) img[i] = ($urandom % 5 == 0) ? 15 : $urandom % D;
      else img[i] = ($urandom % 9 == 0) ? (($urandom % 2) ? 15 : $urandom % D) : (i % W) / 3;
    end
    ref_pkg::median(img, W, H, ref_o, nchg);
    checks++;
    if (nchg == 0) begin failures++; $display("median changed nothing"); end
    ocnt = 0;
    for (int i = 0; i < W*H; ) begin
      @(negedge clk);
      if ($urandom % 3 == 0) in_valid = 0;
      else begin in_valid = 1; id = DW'(img[i]); i++; end
    end
    @(negedge clk) in_valid = 0;
    repeat (2*W + 8) @(negedge clk);
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
    in_valid = 0; id = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame(0);
    run_frame(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

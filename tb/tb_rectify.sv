// tb_rectify: self-checking test of the rectifier.
//
// Streams two 18x10 frames with random gaps: the first through a warped map
// (a horizontal shear plus a vertical ripple, including entries outside the
// image and outside the +-N row band, which must come out black), the second
// with the bypass (identity map). Every rectified pixel is compared with the
// reference remap, and the map read latency of one clock and the two-clock
// request-to-output latency are checked on every pixel.
module tb_rectify;
  localparam int W = 18, H = 10, N = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bypass, in_valid, map_req, out_valid;
  logic [7:0] in_pix, out_pix;
  logic [$clog2(W)-1:0] map_qx, map_x;
  logic [$clog2(H)-1:0] map_qy, map_y;

  rectify #(.W(W), .H(H), .N(N), .PIX_W(8)) dut (
    .clk, .rst_n, .bypass, .in_valid, .in_pix, .map_req, .map_qx, .map_qy,
    .map_x, .map_y, .out_valid, .out_pix);

  int checks = 0, failures = 0;
  int raw[], mx[], my[], exp_img[];

  function automatic int fmx(int x, int y); return (x + (y % 3)) % (W + 2); endfunction
  function automatic int fmy(int x, int y);
    int v;
    v = y + ((x % 7) - 3);          // displacement up to 3 > N
    return (v < 0) ? 0 : (v > 15 ? 15 : v);
  endfunction

  // Map memory model: one-clock read latency.
  always @(posedge clk) begin
    map_x <= $bits(map_x)'(fmx(int'(map_qx), int'(map_qy)));
    map_y <= $bits(map_y)'(fmy(int'(map_qx), int'(map_qy)));
  end

  // Latency check: output follows a request by exactly two clocks.
  logic [1:0] req_sr;
  always @(posedge clk) begin
    if (!rst_n) req_sr <= '0;
    else begin
      req_sr <= {req_sr[0], map_req};
      if (out_valid !== req_sr[1]) begin
        failures++;
        $display("latency mismatch");
      end
    end
  end

  int ocnt;
  int nblack;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (int'(out_pix) != exp_img[ocnt]) begin
        failures++;
        if (failures < 10) $display("pix %0d: got %0d exp %0d", ocnt, out_pix, exp_img[ocnt]);
      end
      if (exp_img[ocnt] == 0) nblack++;
      ocnt++;
    end
  end

  task automatic run_frame(bit byp);
    raw = new[W*H]; mx = new[W*H]; my = new[W*H];
    for (int i = 0; i < W*H; i++) begin
      raw[i] = 1 + ($urandom % 255);
      mx[i] = byp ? i % W : fmx(i % W, i / W);
      my[i] = byp ? i / W : fmy(i % W, i / W);
    end
    ref_pkg::rectify(raw, mx, my, W, H, N, exp_img);
    ocnt = 0;
    bypass = byp;
    for (int i = 0; i < W*H; ) begin
      @(negedge clk);
      if ($urandom % 4 == 0) in_valid = 0;
      else begin in_valid = 1; in_pix = 8'(raw[i]); i++; end
    end
    @(negedge clk) in_valid = 0;
    repeat ((N + 1) * W + 10) @(posedge clk);
    checks++;
    if (ocnt != W*H) begin failures++; $display("frame count %0d at %0t", ocnt, $time); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_pix = 0; bypass = 0; nblack = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_frame(0);
    checks++;
    if (nblack == 0) begin failures++; $display("no out-of-band pixel exercised"); end
    run_frame(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

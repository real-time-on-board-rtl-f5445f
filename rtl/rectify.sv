// rectify: image rectification of one camera stream through precomputed maps.
//
// For every pixel p = (x,y) of the rectified image the maps give the source
// coordinates in the raw image, I_rect(p) = I(M_x(p), M_y(p)), as in the
// published design. Raw pixels are written into a ring line buffer of
// LINES = 2N+3 rows. Rectified row y is produced while raw row y+N+1 streams
// in, so every source row y-N .. y+N is complete in the buffer: N is the
// largest vertical displacement |M_y(p) - y| the maps may contain. A map entry
// outside that band or outside the image gives a black (0) pixel. After the
// last raw pixel the remaining (N+1)*W rectified pixels are produced on the
// following clocks, one per clock, so the source must leave that many idle
// clocks between frames.
//
// Map read port: map_req is high in the clock a rectified pixel is started
// and (map_qx,map_qy) are its coordinates; map_x/map_y must be returned on
// the next clock (a registered memory read). With rect_bypass the map is not
// used and the identity map is applied (for already rectified input).
// Latency: the rectified pixel appears two clocks after its map request.
// Interface, N, the band rule, the bypass and the timing are this design's
// choices; the map formula and the line buffer come from the paper.
module rectify #(
  parameter int unsigned W     = 640,
  parameter int unsigned H     = 360,
  parameter int unsigned N     = 7,
  parameter int unsigned PIX_W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  bypass,
  input  logic                  in_valid,
  input  logic [PIX_W-1:0]      in_pix,
  output logic                  map_req,
  output logic [$clog2(W)-1:0]  map_qx,
  output logic [$clog2(H)-1:0]  map_qy,
  input  logic [$clog2(W)-1:0]  map_x,
  input  logic [$clog2(H)-1:0]  map_y,
  output logic                  out_valid,
  output logic [PIX_W-1:0]      out_pix
);
  localparam int unsigned LINES = 2 * N + 3;
  localparam int unsigned XW    = $clog2(W);
  localparam int unsigned YW    = $clog2(H);
  localparam int unsigned SW    = $clog2(LINES);
  localparam int unsigned DRAIN = (N + 1) * W;
  localparam int unsigned DCW   = $clog2(DRAIN + 1);

  logic [PIX_W-1:0] lb [LINES * W];

  logic [XW-1:0]  xi, xo;
  logic [YW-1:0]  yi, yo;
  logic [SW-1:0]  wslot;
  logic           draining;
  logic [DCW-1:0] dcnt;
  logic           obeat;

  // A rectified pixel is started on every raw pixel once N+1 rows are in,
  // and on every clock of the drain.
  assign obeat   = draining || (in_valid && (yi >= YW'(N + 1)));
  assign map_req = obeat;
  assign map_qx  = xo;
  assign map_qy  = yo;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      xi <= '0; yi <= '0; xo <= '0; yo <= '0; wslot <= '0;
      draining <= 1'b0; dcnt <= '0;
    end else begin
      if (in_valid && !draining) begin
        if (xi == XW'(W - 1)) begin
          xi    <= '0;
          wslot <= (wslot == SW'(LINES - 1)) ? '0 : wslot + 1'b1;
          if (yi == YW'(H - 1)) begin
            yi <= '0;
            draining <= 1'b1;
            dcnt <= '0;
          end else begin
            yi <= yi + 1'b1;
          end
        end else begin
          xi <= xi + 1'b1;
        end
      end
      if (draining) begin
        dcnt <= dcnt + 1'b1;
        if (dcnt == DCW'(DRAIN - 1)) begin
          draining <= 1'b0;
          wslot    <= '0;
        end
      end
      if (obeat) begin
        if (xo == XW'(W - 1)) begin
          xo <= '0;
          yo <= (yo == YW'(H - 1)) ? '0 : yo + 1'b1;
        end else begin
          xo <= xo + 1'b1;
        end
      end
    end
  end

  // Raw pixel write.
  always_ff @(posedge clk) begin
    if (in_valid && !draining) lb[32'(wslot) * W + 32'(xi)] <= in_pix;
  end

  // Stage 1: map entry arrives; check the band and read the line buffer.
  logic          s1_valid;
  logic [XW-1:0] s1_xo;
  logic [YW-1:0] s1_yo;
  logic [XW-1:0] sx;
  logic [YW-1:0] sy;
  logic          s_ok;
  logic [SW-1:0] rslot;

  always_ff @(posedge clk) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= obeat;
    s1_xo <= xo;
    s1_yo <= yo;
  end

  always_comb begin
    sx    = bypass ? s1_xo : map_x;
    sy    = bypass ? s1_yo : map_y;
    s_ok  = (32'(sx) < W) && (32'(sy) < H) &&
            (32'(sy) + N >= 32'(s1_yo)) && (32'(sy) <= 32'(s1_yo) + N);
    rslot = SW'(32'(sy) % LINES);
  end

  // Stage 2: registered read.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pix   <= '0;
    end else begin
      out_valid <= s1_valid;
      out_pix   <= (s1_valid && s_ok) ? lb[32'(rslot) * W + 32'(sx)] : '0;
    end
  end

  a_no_input_during_drain: assert property (@(posedge clk) disable iff (!rst_n)
    !(draining && in_valid));

endmodule

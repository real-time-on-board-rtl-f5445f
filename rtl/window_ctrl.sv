// window_ctrl: raster bookkeeping for a streaming (2R+1)x(2R+1) window stage.
//
// A window stage sees its input as a raster stream of W x H pixels, at most
// one per clock, marked by in_valid. The window centred on pixel (xc,yc) is
// complete only once pixel (xc+R, yc+R) has arrived, so the stage lags the
// input by LAG = R*W + R beats. After the last pixel of a frame the
// controller therefore inserts LAG padding beats on its own, one per clock,
// so that every frame produces exactly W x H windows. The source must leave
// at least LAG idle clocks after each frame (checked by an assertion).
//
// Outputs:
//   step/pad/xi: the window advances this clock; pad marks a padding beat
//                (data to be shifted in is ignored); xi is the column of the
//                beat, used to address the line buffers.
//   w_step/w_valid/w_xc/w_yc: registered one clock later, aligned with the
//                window registers of line_window: the window just advanced,
//                and whether its centre (w_xc,w_yc) is a pixel of the frame.
// Reset is synchronous and active low.
// The drain scheme and the centre coordinates are this design's choices; the
// published design only states that line buffers hold the neighbourhood.
module window_ctrl #(
  parameter int unsigned W = 640,
  parameter int unsigned H = 360,
  parameter int unsigned R = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   step,
  output logic                   pad,
  output logic [$clog2(W)-1:0]   xi,
  output logic                   w_step,
  output logic                   w_valid,
  output logic [$clog2(W)-1:0]   w_xc,
  output logic [$clog2(H)-1:0]   w_yc
);
  localparam int unsigned LAG   = R * W + R;
  localparam int unsigned TOTAL = W * H + LAG;
  localparam int unsigned CW    = $clog2(TOTAL + 1);

  logic [CW-1:0]          cnt;      // linear position of the next beat
  logic [$clog2(W)-1:0]   xcnt;     // column of the next beat
  logic [$clog2(W)-1:0]   xc_q;     // centre of the next emitted window
  logic [$clog2(H)-1:0]   yc_q;
  logic                   drain;
  logic                   emit;

  assign drain = (cnt >= CW'(W * H));
  assign step  = drain | in_valid;
  assign pad   = drain;
  assign xi    = xcnt;
  assign emit  = step && (cnt >= CW'(LAG));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt     <= '0;
      xcnt    <= '0;
      xc_q    <= '0;
      yc_q    <= '0;
      w_step  <= 1'b0;
      w_valid <= 1'b0;
      w_xc    <= '0;
      w_yc    <= '0;
    end else begin
      w_step  <= step;
      w_valid <= emit;
      if (emit) begin
        w_xc <= xc_q;
        w_yc <= yc_q;
        if (xc_q == $bits(xc_q)'(W - 1)) begin
          xc_q <= '0;
          yc_q <= (yc_q == $bits(yc_q)'(H - 1)) ? '0 : yc_q + 1'b1;
        end else begin
          xc_q <= xc_q + 1'b1;
        end
      end
      if (step) begin
        cnt  <= (cnt == CW'(TOTAL - 1)) ? '0 : cnt + 1'b1;
        xcnt <= (xcnt == $bits(xcnt)'(W - 1)) ? '0 : xcnt + 1'b1;
      end
    end
  end

  // The source must not deliver a pixel while the frame is being drained.
  a_no_input_during_drain: assert property (@(posedge clk) disable iff (!rst_n)
    !(drain && in_valid));

endmodule

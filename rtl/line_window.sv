// line_window: line buffers and window registers of a streaming window stage.
//
// K-1 line buffers, each W pixels deep, hold the previous image rows; with
// the incoming pixel they form a new K-pixel column every step. The last
// NCOL columns are kept in registers: win[i][j] is column age i (0 = newest)
// and row age j (0 = newest row). A stage with a K x K window uses NCOL = K;
// the matching stage keeps more columns of the right image so that it can
// reach the windows of every candidate disparity. Padding steps shift in 0.
// The window registers change on the clock after a step (aligned with the
// registered outputs of window_ctrl). The published design names the line
// buffers; their layout here is this design's choice.
module line_window #(
  parameter int unsigned W    = 640,
  parameter int unsigned DW   = 8,
  parameter int unsigned K    = 5,
  parameter int unsigned NCOL = 5
) (
  input  logic                           clk,
  input  logic                           step,
  input  logic                           pad,
  input  logic [$clog2(W)-1:0]           xi,
  input  logic [DW-1:0]                  pix,
  output logic [NCOL-1:0][K-1:0][DW-1:0] win
);
  logic [DW-1:0] lb [K-1][W];
  logic [K-1:0][DW-1:0] col;

  always_comb begin
    col[0] = pad ? '0 : pix;
    for (int j = 1; j < K; j++) col[j] = lb[j-1][xi];
  end

  always_ff @(posedge clk) begin
    if (step) begin
      for (int j = 0; j < K - 1; j++) lb[j][xi] <= col[j];
      win[0] <= col;
      for (int i = 1; i < NCOL; i++) win[i] <= win[i-1];
    end
  end

endmodule

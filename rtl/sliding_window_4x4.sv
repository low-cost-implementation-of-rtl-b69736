// sliding_window_4x4: 4x4 neighbourhood generator for the bicubic datapath.
//
// The raster pixel stream (one line of IMG_WIDTH pixels after another) runs
// through four rows of four 8-bit registers joined by three line buffers:
//
//   pix_in -> [P16][P15][P14][P13] -> LB -> [P12][P11][P10][P9] -> LB ->
//             [P8][P7][P6][P5] -> LB -> [P4][P3][P2][P1]
//
// Register rows, tap names and the three line buffers follow the paper's
// sliding-window diagram; the paper chains each line buffer to the last
// register of the row below. Each line buffer is IMG_WIDTH-4 deep, so a row
// of registers plus its line buffer delays by exactly one image line: P1..P4
// are four horizontally adjacent pixels three lines above P13..P16. Window
// output win[k] is tap P(k+1); P1 is the oldest (top-left) pixel.
//
// Interface: pix_valid qualifies pix_in (the window only moves on accepted
// pixels, so the source may insert idle cycles); sof marks the first pixel of
// a frame and restarts the position counters. win_valid pulses for one cycle,
// in the cycle after a pixel is accepted, when all 16 taps hold pixels of the
// current frame that come from four adjacent lines and four adjacent columns
// (newest pixel at column >= 3 and line >= 3). The paper says nothing about
// handshakes, frame start or image borders: the valid/sof scheme and the
// choice to produce no output for windows that straddle a line end are this
// design's own. Latency: window taps change on the clock edge that accepts
// the pixel; win_valid is registered with them.
module sliding_window_4x4
  import interp_pkg::*;
#(
  parameter int unsigned IMG_WIDTH = 256
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   pix_valid,
  input  logic   sof,
  input  pixel_t pix_in,
  output pixel_t win [16],
  output logic   win_valid
);

  localparam int unsigned N  = 4;
  localparam int unsigned CW = $clog2(IMG_WIDTH);

  pixel_t rowreg [N][N];   // rowreg[r][0] is the first register of row r
  pixel_t lb_out [N-1];    // line buffer feeding row r (r = 0..2)

  // Register chains; row N-1 (bottom) takes the input stream.
  always_ff @(posedge clk) begin
    if (pix_valid) begin
      rowreg[N-1][0] <= pix_in;
      for (int r = 0; r < N-1; r++) rowreg[r][0] <= lb_out[r];
      for (int r = 0; r < N; r++)
        for (int j = 1; j < N; j++) rowreg[r][j] <= rowreg[r][j-1];
    end
  end

  // Line buffer r sits between the last register of row r+1 and row r.
  for (genvar r = 0; r < N-1; r++) begin : g_lb
    line_buffer #(
      .DEPTH (IMG_WIDTH - N),
      .WIDTH (PIX_W)
    ) u_lb (
      .clk  (clk),
      .rst_n(rst_n),
      .en   (pix_valid),
      .din  (rowreg[r+1][N-1]),
      .dout (lb_out[r])
    );
  end

  // Tap names: row r holds P(4r+1)..P(4r+4), P(4r+4) in the first register.
  always_comb begin
    for (int r = 0; r < N; r++)
      for (int j = 0; j < N; j++)
        win[N*r + j] = rowreg[r][N-1-j];
  end

  // Position (column, line) that the next accepted pixel will take in the
  // frame; sof forces it to (0, 0). The line count saturates at N-1.
  logic [CW-1:0] col, cur_col;
  logic [1:0]    row, cur_row;

  always_comb begin
    cur_col = sof ? '0 : col;
    cur_row = sof ? '0 : row;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col       <= '0;
      row       <= '0;
      win_valid <= 1'b0;
    end else begin
      win_valid <= 1'b0;
      if (pix_valid) begin
        win_valid <= (cur_col >= CW'(N-1)) && (cur_row == 2'(N-1));
        if (cur_col == CW'(IMG_WIDTH - 1)) begin
          col <= '0;
          row <= (cur_row == 2'(N-1)) ? cur_row : cur_row + 1'b1;
        end else begin
          col <= cur_col + 1'b1;
          row <= cur_row;
        end
      end
    end
  end

  initial begin
    assert (IMG_WIDTH > N) else $error("sliding_window_4x4: IMG_WIDTH must exceed 4");
  end

endmodule

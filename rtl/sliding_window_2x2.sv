// sliding_window_2x2: 2x2 neighbourhood generator for the bilinear datapath.
//
// The raster pixel stream runs through two rows of two 8-bit registers joined
// by one line buffer:
//
//   pix_in -> [P4][P3] -> LB -> [P2][P1]
//
// Register rows, tap names and the single line buffer follow the paper's
// bilinear sliding-window diagram; the line buffer is fed from the last
// register of the lower row (tap P3). It is IMG_WIDTH-2 deep, so a register
// row plus the line buffer delays by exactly one image line: P1, P2 are two
// horizontally adjacent pixels one line above P3, P4. Window output win[k] is
// tap P(k+1); P1 is the oldest (top-left) pixel.
//
// Interface: pix_valid qualifies pix_in (the window only moves on accepted
// pixels); sof marks the first pixel of a frame and restarts the position
// counters. win_valid pulses for one cycle, in the cycle after a pixel is
// accepted, when all four taps hold pixels of the current frame from two
// adjacent lines and columns (newest pixel at column >= 1 and line >= 1).
// The paper says nothing about handshakes, frame start or image borders: the
// valid/sof scheme and suppressing windows that straddle a line end are this
// design's own. Taps and win_valid change on the edge that accepts a pixel.
module sliding_window_2x2
  import interp_pkg::*;
#(
  parameter int unsigned IMG_WIDTH = 256
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   pix_valid,
  input  logic   sof,
  input  pixel_t pix_in,
  output pixel_t win [4],
  output logic   win_valid
);

  localparam int unsigned N  = 2;
  localparam int unsigned CW = $clog2(IMG_WIDTH);

  pixel_t rowreg [N][N];   // rowreg[r][0] is the first register of row r
  pixel_t lb_out [N-1];    // line buffer feeding row r (r = 0)

  // Register chains; row N-1 (bottom) takes the input stream.
  always_ff @(posedge clk) begin
    if (pix_valid) begin
      rowreg[N-1][0] <= pix_in;
      for (int r = 0; r < N-1; r++) rowreg[r][0] <= lb_out[r];
      for (int r = 0; r < N; r++)
        for (int j = 1; j < N; j++) rowreg[r][j] <= rowreg[r][j-1];
    end
  end

  // The line buffer sits between the last register of row 1 (P3) and row 0.
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

  // Tap names: row r holds P(2r+1)..P(2r+2), P(2r+2) in the first register.
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
    assert (IMG_WIDTH > N) else $error("sliding_window_2x2: IMG_WIDTH must exceed 2");
  end

endmodule

// sr_interp_top: streaming bilinear / bicubic interpolator for 2x super-resolution.
//
// Pixel_in -> sliding window -> interpolation computing -> Pixel_out, the
// two-step structure of the paper, built once for each of its two proposed
// architectures:
//
//   bilinear: sliding_window_2x2 (one line buffer) -> bilinear_interp
//   bicubic : sliding_window_4x4 (three line buffers) -> bicubic_interp
//
// Both pipelines see the same raster stream and run side by side; `mode`
// (0 = bilinear, 1 = bicubic) selects which one drives pix_out/out_valid. The
// paper presents the two as alternatives chosen "depending on the user
// request"; putting both behind one output multiplexer is this design's
// choice. Each output is the interpolated pixel at the centre of the current
// window, one per accepted input pixel once the window is filled, so the
// output rate equals the input rate.
//
// Interface: pix_valid qualifies pix_in (idle cycles allowed), sof marks the
// first pixel of a frame, IMG_WIDTH is the line length (256, the image size
// of the paper's implementation results). Latency from the clock edge that
// accepts a pixel to its result: 1 further clock for bilinear (out_valid high
// in the cycle after the window pulse), 2 for bicubic. The bilinear output
// for newest pixel (line y, column x) is the centre of lines y-1..y, columns
// x-1..x; the bicubic output is the centre of lines y-3..y, columns x-3..x.
// Windows that straddle a line end or reach above the first line produce no
// output. mode is sampled combinationally at the output; change it between
// frames.
module sr_interp_top
  import interp_pkg::*;
#(
  parameter int unsigned IMG_WIDTH = 256
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       mode,       // 0: bilinear, 1: bicubic
  input  logic       pix_valid,
  input  logic       sof,
  input  logic [7:0] pix_in,
  output logic       out_valid,
  output logic [7:0] pix_out
);

  // Bilinear path.
  pixel_t win2 [4];
  logic   win2_valid;
  logic   bil_valid;
  pixel_t bil_pix;

  sliding_window_2x2 #(.IMG_WIDTH(IMG_WIDTH)) u_win2 (
    .clk      (clk),
    .rst_n    (rst_n),
    .pix_valid(pix_valid),
    .sof      (sof),
    .pix_in   (pix_in),
    .win      (win2),
    .win_valid(win2_valid)
  );

  bilinear_interp u_bil (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (win2_valid),
    .win      (win2),
    .out_valid(bil_valid),
    .pix_out  (bil_pix)
  );

  // Bicubic path.
  pixel_t win4 [16];
  logic   win4_valid;
  logic   bic_valid;
  pixel_t bic_pix;

  sliding_window_4x4 #(.IMG_WIDTH(IMG_WIDTH)) u_win4 (
    .clk      (clk),
    .rst_n    (rst_n),
    .pix_valid(pix_valid),
    .sof      (sof),
    .pix_in   (pix_in),
    .win      (win4),
    .win_valid(win4_valid)
  );

  bicubic_interp u_bic (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (win4_valid),
    .win      (win4),
    .out_valid(bic_valid),
    .pix_out  (bic_pix)
  );

  // Output selection.
  always_comb begin
    if (interp_mode_e'(mode) == MODE_BICUBIC) begin
      out_valid = bic_valid;
      pix_out   = bic_pix;
    end else begin
      out_valid = bil_valid;
      pix_out   = bil_pix;
    end
  end

endmodule

// bicubic_interp: multiplier-free approximate bicubic value of a 4x4 window.
//
// Separable two-stage evaluation, as in the paper's bicubic datapath diagram:
//
//   stage 1, each row r = 0..3 (taps P(4r+1)..P(4r+4), oldest first):
//       h[r] = (-1*P(4r+1) + 6*P(4r+2) + 5*P(4r+3) + 5*P(4r+4)) >>> 4
//   stage 2, across the rows (row 0 is the oldest line):
//       t    = (-1*h[0] + 6*h[1] + 5*h[2] + 5*h[3]) >>> 4
//
// The weights -1, 6, 5, 5 and both shifts by 4 are the numbers printed in the
// paper's diagram (they replace the cubic-convolution kernel weights; the
// paper calls them approximate coefficients). Each constant product is built
// from shifts and adds (6x = 4x + 2x, 5x = 4x + x, -x by negation), so the
// block uses no multiplier. Intermediate values are signed; the shifts are
// arithmetic (round towards minus infinity). Because of the negative weight
// the result can leave the pixel range (it spans -32..256), so the final
// value is clamped to 0..255. The signed arithmetic, the rounding and the
// clamp are this design's choices: the paper does not discuss them.
//
// Interface: in_valid qualifies win (win[k] is tap P(k+1)). Two pipeline
// registers, one after each stage (this design's choice of cut), so
// out_valid/pix_out follow in_valid after two clocks, one result per clock.
module bicubic_interp
  import interp_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  pixel_t win [16],
  output logic   out_valid,
  output pixel_t pix_out
);

  typedef logic signed [15:0] acc_t;

  // Constant multiply by shift-and-add over the bits of |w|.
  function automatic acc_t wmul(input int w, input acc_t x);
    acc_t r;
    int   m;
    r = '0;
    m = (w < 0) ? -w : w;
    for (int b = 0; b < 4; b++)
      if (m[b]) r += x <<< b;
    return (w < 0) ? -r : r;
  endfunction

  // Stage 1: horizontal (row) interpolation.
  acc_t h_nx [4];
  acc_t h    [4];
  logic v1;

  always_comb begin
    for (int r = 0; r < 4; r++) begin
      acc_t s;
      s = '0;
      for (int j = 0; j < 4; j++)
        s += wmul(BICUBIC_W[j], acc_t'({8'd0, win[4*r + j]}));
      h_nx[r] = s >>> BICUBIC_SHIFT;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      for (int r = 0; r < 4; r++) h[r] <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) h <= h_nx;
    end
  end

  // Stage 2: vertical (column) interpolation, then clamp to the pixel range.
  acc_t   t;
  pixel_t t_sat;

  always_comb begin
    acc_t s;
    s = '0;
    for (int r = 0; r < 4; r++) s += wmul(BICUBIC_W[r], h[r]);
    t = s >>> BICUBIC_SHIFT;
    if (t < 0)                        t_sat = '0;
    else if (t > acc_t'(int'(PIX_MAX))) t_sat = PIX_MAX;
    else                              t_sat = pixel_t'(t);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      pix_out   <= '0;
    end else begin
      out_valid <= v1;
      if (v1) pix_out <= t_sat;
    end
  end

endmodule

// bilinear_interp: multiplier-free bilinear value of a 2x2 window.
//
// Computes pix_out = (P1 + P2 + P3 + P4) >> 2, as in the paper's bilinear
// datapath diagram: every tap weighted by 1, one adder tree, a right shift by
// 2. This is the bilinear formula with both fractional offsets dx = dy = 1/2,
// i.e. the pixel at the centre of the window, which the paper uses to double
// the image resolution. The shift truncates (rounds towards zero); the sum
// of four 8-bit pixels shifted by 2 always fits 8 bits, so nothing saturates.
//
// Interface: in_valid qualifies win; out_valid/pix_out follow one clock
// later (one pipeline register, this design's choice: the paper only says
// the datapath is pipelined and produces one pixel per input pixel).
module bilinear_interp
  import interp_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  pixel_t win [4],
  output logic   out_valid,
  output pixel_t pix_out
);

  logic [PIX_W+1:0] sum;

  always_comb begin
    sum = '0;
    for (int k = 0; k < 4; k++) sum += (PIX_W+2)'(win[k]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      pix_out   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) pix_out <= pixel_t'(sum >> BILINEAR_SHIFT);
    end
  end

endmodule

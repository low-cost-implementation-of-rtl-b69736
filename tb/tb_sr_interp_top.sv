// tb_sr_interp_top: end-to-end test of the interpolator at its default size
// (256-pixel lines, full 256x256 frames).
//
// A synthetic 256x256 image (random grey lines, random black/white lines, a
// smooth ramp and one patch that makes the bicubic value overshoot) is
// streamed in raster order with random idle cycles. For every accepted pixel
// at line y, column x the testbench works out the expected output itself:
// bilinear for x >= 1, y >= 1 (window lines y-1..y, columns x-1..x), bicubic
// for x >= 3, y >= 3 (lines y-3..y, columns x-3..x). Outputs are compared in
// order, and each must arrive exactly 2 (bilinear) or 3 (bicubic) clock edges
// after the edge that accepted its newest pixel.
//
// Sequence: a bilinear frame, a bicubic frame, a bicubic frame cut short
// after 20 lines and restarted by sof, then a bilinear frame. Counted and
// required at least once: idle input cycles, mode switches, frame restarts,
// bicubic clamps at 0 and at 255, results in each mode.
module tb_sr_interp_top;
  import tb_ref_pkg::*;

  localparam int W = 256;
  localparam int H = 256;

  logic       clk = 1'b0;
  logic       rst_n;
  logic       mode;
  logic       pix_valid;
  logic       sof;
  logic [7:0] pix_in;
  logic       out_valid;
  logic [7:0] pix_out;

  int checks = 0;
  int failures = 0;

  sr_interp_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Mechanism counters.
  int n_idle = 0, n_mode_switch = 0, n_restart = 0;
  int n_clamp_lo = 0, n_clamp_hi = 0, n_out_bil = 0, n_out_bic = 0;

  typedef struct { int value; int due; } exp_t;
  exp_t expq [$];

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks++;
      if (mode) n_out_bic++; else n_out_bil++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected out_valid at cycle %0d", cycle);
      end else begin
        exp_t e;
        e = expq.pop_front();
        if (int'(pix_out) != e.value || cycle != e.due) begin
          if (failures < 10)
            $display("pix_out=%0d at cycle %0d, expected %0d at cycle %0d", pix_out, cycle, e.value, e.due);
          failures++;
        end
      end
    end
  end

  int img [H][W];

  function automatic int gen_pixel(input int y, input int x, input int seed);
    if (y >= 200 && y < 204 && x >= 100 && x < 104) return patch_pixel(y - 200, x - 100);
    if (y < 64)  return int'($urandom_range(0, 255));
    if (y < 128) return 255 * int'($urandom_range(0, 1));
    return (x + 2 * y + seed) % 256;
  endfunction

  task automatic set_mode(input logic m);
    @(negedge clk);
    if (mode != m) n_mode_switch++;
    mode = m;
  endtask

  task automatic send_frame(input int lines, input int seed);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) img[y][x] = gen_pixel(y, x, seed);
    for (int y = 0; y < lines; y++) begin
      for (int x = 0; x < W; x++) begin
        while ($urandom_range(0, 7) == 0) begin
          @(negedge clk);
          pix_valid = 1'b0; sof = 1'b0;
          n_idle++;
        end
        @(negedge clk);
        pix_valid = 1'b1;
        sof       = (x == 0 && y == 0);
        pix_in    = 8'(img[y][x]);
        if (mode == 1'b0 && x >= 1 && y >= 1) begin
          expq.push_back('{value: bil_ref(img[y-1][x-1], img[y-1][x], img[y][x-1], img[y][x]),
                           due: cycle + 2});
        end
        if (mode == 1'b1 && x >= 3 && y >= 3) begin
          int p [16];
          int raw;
          for (int r = 0; r < 4; r++)
            for (int j = 0; j < 4; j++) p[4*r + j] = img[y-3+r][x-3+j];
          raw = bic_raw(p);
          if (raw < 0) n_clamp_lo++;
          if (raw > 255) n_clamp_hi++;
          expq.push_back('{value: clamp255(raw), due: cycle + 3});
        end
      end
    end
    @(negedge clk);
    pix_valid = 1'b0; sof = 1'b0;
    repeat (4) @(negedge clk);   // drain before the mode may change
  endtask

  task automatic need(input string what, input int n);
    checks++;
    $display("%s: %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    rst_n = 1'b0; mode = 1'b0; pix_valid = 1'b0; sof = 1'b0; pix_in = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    set_mode(1'b0);
    send_frame(H, 0);
    set_mode(1'b1);
    send_frame(H, 17);
    send_frame(20, 33);      // cut short; the next frame restarts on sof
    n_restart++;
    send_frame(H, 51);
    set_mode(1'b0);
    send_frame(H, 70);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("%0d results never came out", expq.size());
    end
    need("idle input cycles", n_idle);
    need("mode switches", n_mode_switch);
    need("frame restarts", n_restart);
    need("bicubic clamps at 0", n_clamp_lo);
    need("bicubic clamps at 255", n_clamp_hi);
    need("bilinear results", n_out_bil);
    need("bicubic results", n_out_bic);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

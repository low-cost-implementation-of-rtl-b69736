// tb_sliding_window_2x2: streams small random frames (IMG_WIDTH = 9) with
// random idle cycles through the window and, at every win_valid pulse, checks
// all taps against the image held in the testbench: tap P(N*r+j+1) must be
// the pixel at line y-(N-1)+r, column x-(N-1)+j, where (x, y) is the position
// of the last accepted pixel. Also checks that win_valid pulses exactly for
// the positions with x >= N-1 and y >= N-1, and that sof restarts a frame
// that was cut short.
module tb_sliding_window_2x2;
  import interp_pkg::*;

  localparam int N   = 2;
  localparam int W   = 9;
  localparam int H   = 7;

  logic   clk = 1'b0;
  logic   rst_n;
  logic   pix_valid;
  logic   sof;
  pixel_t pix_in;
  pixel_t win [N*N];
  logic   win_valid;

  int checks = 0;
  int failures = 0;

  sliding_window_2x2 #(.IMG_WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pixel_t img [H][W];
  int     last_x, last_y;
  int     expect_valid;
  int     n_valid, n_expected;

  // One frame of `lines` lines (lines < H cuts it short).
  task automatic send_frame(input int lines);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) img[y][x] = pixel_t'($urandom);
    for (int y = 0; y < lines; y++) begin
      for (int x = 0; x < W; x++) begin
        while ($urandom_range(0, 3) == 0) begin     // idle cycles
          @(negedge clk);
          pix_valid = 1'b0; sof = 1'b0;
          @(posedge clk); #1;
          check_cycle();
        end
        @(negedge clk);
        pix_valid = 1'b1;
        sof       = (x == 0 && y == 0);
        pix_in    = img[y][x];
        @(posedge clk); #1;
        last_x = x; last_y = y;
        expect_valid = (x >= N-1 && y >= N-1);
        if (expect_valid != 0) n_expected++;
        check_cycle();
        expect_valid = 0;
      end
    end
    @(negedge clk);
    pix_valid = 1'b0; sof = 1'b0;
  endtask

  task automatic check_cycle();
    checks++;
    if (int'(win_valid) != expect_valid) begin
      failures++;
      $display("win_valid=%0d expected %0d at x=%0d y=%0d", win_valid, expect_valid, last_x, last_y);
    end
    if (win_valid) begin
      n_valid++;
      for (int r = 0; r < N; r++)
        for (int j = 0; j < N; j++) begin
          checks++;
          if (win[N*r + j] !== img[last_y - (N-1) + r][last_x - (N-1) + j]) begin
            failures++;
            $display("tap P%0d=%0d expected %0d at x=%0d y=%0d", N*r+j+1, win[N*r+j],
                     img[last_y - (N-1) + r][last_x - (N-1) + j], last_x, last_y);
          end
        end
    end
  endtask

  initial begin
    rst_n = 1'b0; pix_valid = 1'b0; sof = 1'b0; pix_in = '0;
    expect_valid = 0; n_valid = 0; n_expected = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    send_frame(H);
    send_frame(N);        // cut short, next frame must restart on sof
    send_frame(H);
    repeat (3) @(posedge clk);
    checks++;
    if (n_valid != n_expected || n_expected == 0) begin
      failures++;
      $display("valid windows %0d expected %0d", n_valid, n_expected);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

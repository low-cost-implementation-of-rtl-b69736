// tb_workloads: runs the interpolator at the image sizes of the evaluation
// set, a bilinear and a bicubic frame each, on synthetic content (the test
// photographs themselves are not part of this package):
//   256 x 256 (the implementation size; also Cameraman and Rice),
//   358 x 537 (Moon, width x height), 300 x 246 (Coins).
// Each size is a separate sr_interp_top built with IMG_WIDTH equal to the
// image width; see tb_frame_runner for what is checked.
module tb_workloads;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NCFG = 3;
  logic done [NCFG];
  int   chk  [NCFG];
  int   fail [NCFG];

  tb_frame_runner #(.W(256), .H(256)) u_256 (.clk(clk), .done(done[0]), .checks(chk[0]), .failures(fail[0]));
  tb_frame_runner #(.W(358), .H(537)) u_moon (.clk(clk), .done(done[1]), .checks(chk[1]), .failures(fail[1]));
  tb_frame_runner #(.W(300), .H(246)) u_coins (.clk(clk), .done(done[2]), .checks(chk[2]), .failures(fail[2]));

  initial begin
    int checks, failures;
    repeat (10) @(posedge clk);   // runners clear `done` at time 0
    fork
      begin
        repeat (2000000) @(posedge clk);
        checks = 0; failures = 1;
        for (int i = 0; i < NCFG; i++) begin checks += chk[i]; failures += fail[i]; end
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
      begin
        wait (done[0] && done[1] && done[2]);
      end
    join_any
    checks = 0; failures = 0;
    for (int i = 0; i < NCFG; i++) begin checks += chk[i]; failures += fail[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

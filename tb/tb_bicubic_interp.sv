// tb_bicubic_interp: drives random and corner-case 4x4 windows, some back to
// back and some with gaps, and checks every result against the integer
// reference in tb_ref_pkg, including the clamp at both ends of the pixel
// range. The result of a window applied at one clock edge must appear with
// out_valid exactly LAT = 2 clocks later.
module tb_bicubic_interp;
  import interp_pkg::*;
  import tb_ref_pkg::*;

  localparam int LAT = 2;

  logic   clk = 1'b0;
  logic   rst_n;
  logic   in_valid;
  pixel_t win [16];
  logic   out_valid;
  pixel_t pix_out;

  int checks = 0;
  int failures = 0;
  int n_clamp_lo = 0;
  int n_clamp_hi = 0;

  bicubic_interp dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { int value; int due; } exp_t;
  exp_t expq [$];

  // Output monitor: every out_valid must match the oldest expectation and
  // arrive exactly LAT clocks after its window.
  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected out_valid at cycle %0d", cycle);
      end else begin
        exp_t e;
        e = expq.pop_front();
        if (int'(pix_out) != e.value || cycle != e.due) begin
          failures++;
          $display("pix_out=%0d at cycle %0d, expected %0d at cycle %0d", pix_out, cycle, e.value, e.due);
        end
      end
    end
  end

  task automatic apply(input int p [16]);
    int raw;
    @(negedge clk);
    in_valid = 1'b1;
    for (int k = 0; k < 16; k++) win[k] = pixel_t'(p[k]);
    raw = bic_raw(p);
    if (raw < 0) n_clamp_lo++;
    if (raw > 255) n_clamp_hi++;
    expq.push_back('{value: clamp255(raw), due: cycle + LAT});
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 1'b0;
    for (int k = 0; k < 16; k++) win[k] = pixel_t'($urandom);
  endtask

  initial begin
    int p [16];
    rst_n = 1'b0; in_valid = 1'b0;
    for (int k = 0; k < 16; k++) win[k] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // Corner cases: flat black, flat white, overshoot patch, undershoot.
    for (int k = 0; k < 16; k++) p[k] = 0;
    apply(p);
    for (int k = 0; k < 16; k++) p[k] = 255;
    apply(p);
    for (int k = 0; k < 16; k++) p[k] = (k < 4) ? ((k == 0) ? 255 : 0) : ((k % 4 == 0) ? 0 : 255);
    apply(p);
    for (int k = 0; k < 16; k++) p[k] = (k < 4) ? 255 : 0;
    apply(p);
    // Random windows: full range and black/white.
    for (int i = 0; i < 3000; i++) begin
      if ($urandom_range(0, 4) == 0) idle();
      for (int k = 0; k < 16; k++)
        p[k] = (i % 2 == 0) ? int'($urandom_range(0, 255)) : 255 * int'($urandom_range(0, 1));
      apply(p);
    end
    idle();
    in_valid = 1'b0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (expq.size() != 0 || n_clamp_lo == 0 || n_clamp_hi == 0) begin
      failures++;
      $display("left=%0d clamp_lo=%0d clamp_hi=%0d", expq.size(), n_clamp_lo, n_clamp_hi);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_bilinear_interp: drives random and corner-case 2x2 windows, some back to
// back and some with gaps, and checks each result against floor((P1+P2+P3+P4)/4)
// from tb_ref_pkg. The result of a window applied at one clock edge must
// appear with out_valid exactly LAT = 1 clock later.
module tb_bilinear_interp;
  import interp_pkg::*;
  import tb_ref_pkg::*;

  localparam int LAT = 1;

  logic   clk = 1'b0;
  logic   rst_n;
  logic   in_valid;
  pixel_t win [4];
  logic   out_valid;
  pixel_t pix_out;

  int checks = 0;
  int failures = 0;

  bilinear_interp dut (.*);

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

  task automatic apply(input int p1, input int p2, input int p3, input int p4);
    @(negedge clk);
    in_valid = 1'b1;
    win[0] = pixel_t'(p1); win[1] = pixel_t'(p2); win[2] = pixel_t'(p3); win[3] = pixel_t'(p4);
    expq.push_back('{value: bil_ref(p1, p2, p3, p4), due: cycle + LAT});
  endtask

  initial begin
    rst_n = 1'b0; in_valid = 1'b0;
    for (int k = 0; k < 4; k++) win[k] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    apply(0, 0, 0, 0);
    apply(255, 255, 255, 255);
    apply(255, 0, 0, 0);
    apply(1, 1, 1, 0);
    apply(0, 0, 0, 255);
    for (int i = 0; i < 3000; i++) begin
      if ($urandom_range(0, 4) == 0) begin
        @(negedge clk);
        in_valid = 1'b0;
        for (int k = 0; k < 4; k++) win[k] = pixel_t'($urandom);
      end
      apply($urandom_range(0, 255), $urandom_range(0, 255), $urandom_range(0, 255), $urandom_range(0, 255));
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("%0d results never came out", expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_line_buffer: checks that dout is the din accepted exactly DEPTH enables
// earlier, with random gaps in the enable, for a small DEPTH.
module tb_line_buffer;

  localparam int unsigned DEPTH = 5;

  logic       clk = 1'b0;
  logic       rst_n;
  logic       en;
  logic [7:0] din;
  logic [7:0] dout;
  int         checks = 0;
  int         failures = 0;

  line_buffer #(.DEPTH(DEPTH), .WIDTH(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] hist [$];

  initial begin
    rst_n = 1'b0; en = 1'b0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      en  = ($urandom_range(0, 3) != 0);
      din = 8'($urandom);
      #1;
      if (en) begin
        if (hist.size() >= DEPTH) begin
          checks++;
          if (dout !== hist[hist.size() - DEPTH]) begin
            failures++;
            $display("mismatch at %0d: dout=%0d expected %0d", i, dout, hist[hist.size() - DEPTH]);
          end
        end
        hist.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

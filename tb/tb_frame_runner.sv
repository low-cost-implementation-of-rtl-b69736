// tb_frame_runner: helper for tb_workloads. Instantiates sr_interp_top with
// IMG_WIDTH = W and streams one W x H synthetic frame in bilinear mode and one
// in bicubic mode (random idle cycles included), checking every output value
// and its latency (2 clock edges bilinear, 3 bicubic) against the reference
// in tb_ref_pkg, and checking the number of results: (W-1)(H-1) bilinear and
// (W-3)(H-3) bicubic per frame. Raises `done` when finished.
module tb_frame_runner #(
  parameter int W = 256,
  parameter int H = 256
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  import tb_ref_pkg::*;

  logic       rst_n;
  logic       mode;
  logic       pix_valid;
  logic       sof;
  logic [7:0] pix_in;
  logic       out_valid;
  logic [7:0] pix_out;

  sr_interp_top #(.IMG_WIDTH(W)) dut (.*);

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { int value; int due; } exp_t;
  exp_t expq [$];
  int   n_out;

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks++;
      n_out++;
      if (expq.size() == 0) begin
        failures++;
      end else begin
        exp_t e;
        e = expq.pop_front();
        if (int'(pix_out) != e.value || cycle != e.due) begin
          if (failures < 5)
            $display("W=%0d: pix_out=%0d at cycle %0d, expected %0d at %0d", W, pix_out, cycle, e.value, e.due);
          failures++;
        end
      end
    end
  end

  int img [H][W];

  task automatic send_frame(input logic m);
    @(negedge clk);
    mode  = m;
    n_out = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        img[y][x] = (y % 3 == 0) ? int'($urandom_range(0, 255)) : (x * 3 + y + (x * y) % 7) % 256;
    for (int y = 0; y < H; y++) begin
      for (int x = 0; x < W; x++) begin
        while ($urandom_range(0, 15) == 0) begin
          @(negedge clk);
          pix_valid = 1'b0; sof = 1'b0;
        end
        @(negedge clk);
        pix_valid = 1'b1;
        sof       = (x == 0 && y == 0);
        pix_in    = 8'(img[y][x]);
        if (!m && x >= 1 && y >= 1)
          expq.push_back('{value: bil_ref(img[y-1][x-1], img[y-1][x], img[y][x-1], img[y][x]),
                           due: cycle + 2});
        if (m && x >= 3 && y >= 3) begin
          int p [16];
          for (int r = 0; r < 4; r++)
            for (int j = 0; j < 4; j++) p[4*r + j] = img[y-3+r][x-3+j];
          expq.push_back('{value: clamp255(bic_raw(p)), due: cycle + 3});
        end
      end
    end
    @(negedge clk);
    pix_valid = 1'b0; sof = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (n_out != (m ? (W-3)*(H-3) : (W-1)*(H-1)) || expq.size() != 0) begin
      failures++;
      $display("W=%0d H=%0d mode=%0d: %0d results", W, H, m, n_out);
    end
  endtask

  initial begin
    done = 1'b0; checks = 0; failures = 0;
    rst_n = 1'b0; mode = 1'b0; pix_valid = 1'b0; sof = 1'b0; pix_in = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    send_frame(1'b0);
    send_frame(1'b1);
    $display("frame %0dx%0d (width x height): %0d checks, %0d failures", W, H, checks, failures);
    done = 1'b1;
  end

endmodule

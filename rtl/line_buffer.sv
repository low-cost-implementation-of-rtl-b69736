// line_buffer: fixed-length pixel delay line, one entry per accepted pixel.
//
// The two sliding windows chain their register rows through line buffers so
// that a pixel leaving one row of registers re-appears, one image line later,
// at the head of the row above. The buffer is a circular array of DEPTH
// pixels with a single pointer: while `en` is high, the entry under the
// pointer is read (dout) and overwritten with `din` on the same clock edge,
// and the pointer advances. dout therefore equals the din accepted DEPTH
// enables earlier. The array has no reset; only the pointer is reset, so
// dout is meaningless until DEPTH pixels have been written (the windows mask
// that with their own position counters).
//
// Interface: clk, rst_n (active-low, synchronous), en (accept din this cycle),
// din, dout (combinational read of the current slot).
// The paper names the block and says its size equals the image line length;
// the circular-array structure, the enable and the reset are this design's
// choices. DEPTH is set by the instantiating window (line length minus the
// registers of one window row, so that a whole row delay is one line).
module line_buffer #(
  parameter int unsigned DEPTH = 252,
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    ptr;

  assign dout = mem[ptr];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr <= '0;
    end else if (en) begin
      ptr <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (en) mem[ptr] <= din;
  end

  initial begin
    assert (DEPTH >= 1) else $error("line_buffer: DEPTH must be at least 1");
  end

endmodule

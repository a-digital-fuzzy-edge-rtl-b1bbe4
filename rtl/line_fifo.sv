// line_fifo
// Row buffer of the window generator: a RAM-based FIFO that is always full,
// so it acts as a delay line of DEPTH entries. Each shift reads the oldest
// entry and writes the new one into the same address, then advances the
// pointer. dout is the value written DEPTH shifts ago. The paper builds its
// two 253x8 FIFOs from RAM; the single-pointer circular-buffer form is this
// design's choice.
//
// Interface/timing: dout is combinational from the RAM at the current
// pointer, valid while shift is high; the write and the pointer step take
// effect at the clock edge. Reset clears only the pointer; RAM contents are
// left as they are, so the first DEPTH outputs after reset are stale.
module line_fifo #(
  parameter int unsigned DEPTH = 253,
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             shift,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    ptr;

  assign dout = mem[ptr];

  always_ff @(posedge clk) begin
    if (shift) mem[ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)
      ptr <= '0;
    else if (shift)
      ptr <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
  end

endmodule

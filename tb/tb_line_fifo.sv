// tb_line_fifo
// Drives the row buffer at its full 253-entry depth with random data and
// random shift gaps, and checks that every output equals the value written
// exactly DEPTH shifts earlier (a software queue keeps the history).
module tb_line_fifo;
  localparam int unsigned DEPTH = 253;
  localparam int unsigned WIDTH = 8;

  logic             clk = 1'b0, rst_n = 1'b0, shift = 1'b0;
  logic [WIDTH-1:0] din = '0, dout;
  int               checks = 0, failures = 0;
  logic [WIDTH-1:0] hist [$];

  line_fifo dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 6 * DEPTH; n++) begin
      shift <= ($urandom_range(4) != 0);
      din   <= WIDTH'($urandom);
      #1;
      if (shift) begin
        if (hist.size() == DEPTH) begin
          checks++;
          if (dout !== hist[0]) begin
            failures++;
            $display("FAIL at shift %0d: got %0h exp %0h", n, dout, hist[0]);
          end
          void'(hist.pop_front());
        end
        hist.push_back(din);
      end
      @(posedge clk);
    end
    shift <= 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

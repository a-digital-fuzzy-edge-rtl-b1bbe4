// tb_rgb_combine
// Applies all eight combinations of the three channel edge bits, with and
// without in_valid, and checks the registered result: edge when at least one
// channel is an edge, output held and no strobe when in_valid is low.
module tb_rgb_combine;
  logic       clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [2:0] ch_edge = '0;
  logic       out_valid, edge_bit;
  int         checks = 0, failures = 0;

  rgb_combine dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic last;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    last = 1'b0;
    for (int rep = 0; rep < 4; rep++)
      for (int v = 0; v < 8; v++) begin
        ch_edge  <= 3'(v);
        in_valid <= 1'b1;
        @(posedge clk);
        #1;
        checks++;
        if (!(out_valid && edge_bit == (v != 0))) begin
          failures++;
          $display("FAIL: ch_edge=%03b got %0b", v, edge_bit);
        end
        last = (v != 0);
        ch_edge  <= ~3'(v);
        in_valid <= 1'b0;
        @(posedge clk);
        #1;
        checks++;
        if (out_valid || edge_bit != last) begin
          failures++;
          $display("FAIL: idle cycle changed output");
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fuzzy_preprocessor
// Presents every 8-bit value with the enhancement on and off, with random
// gaps in in_valid, and checks each registered output against the
// floating-point polynomial (one-cycle latency) or the raw value. Also
// checks the curve's end points f(0)=0 and f(255)=255 and that idle cycles
// produce no output strobe.
module tb_fuzzy_preprocessor;
  import fuzzy_edge_pkg::*;
  import fuzzy_ref_pkg::*;

  logic   clk = 1'b0, rst_n = 1'b0;
  logic   fuzzy_en = 1'b0, in_valid = 1'b0;
  pixel_t in_pix = '0;
  logic   out_valid;
  pixel_t out_pix;
  int     checks = 0, failures = 0;

  fuzzy_preprocessor dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    int exp_v;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    check(fuzzy_ref(0) == 0 && fuzzy_ref(255) == 255, "curve end points");
    for (int mode = 1; mode >= 0; mode--) begin
      for (int x = 0; x < 256; x++) begin
        // random idle cycles between pixels
        while ($urandom_range(3) == 0) begin
          in_valid <= 1'b0;
          @(posedge clk);
          #1 check(!out_valid, "no strobe after idle cycle");
        end
        fuzzy_en <= 1'(mode);
        in_valid <= 1'b1;
        in_pix   <= pixel_t'(x);
        @(posedge clk);
        in_valid <= 1'b0;
        #1;
        exp_v = mode ? fuzzy_ref(x) : x;
        check(out_valid && int'(out_pix) == exp_v,
              $sformatf("mode %0d x=%0d got %0d exp %0d", mode, x, out_pix, exp_v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

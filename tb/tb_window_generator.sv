// tb_window_generator
// Streams three back-to-back frames of random pixels (reduced size 10x7,
// random gaps in in_valid) into the window generator and checks:
//  - every valid window's nine entries against the stored image
//    (P1 = (r,c), P2 = (r,c-1), P3 = (r,c-2), P4..P6 one row up, P7..P9 two
//    rows up), and its centre position (r-1, c-1);
//  - that exactly (W-2)*(H-2) windows per frame are flagged valid, and that
//    win_shift follows every input strobe by one clock.
module tb_window_generator;
  import fuzzy_edge_pkg::*;

  localparam int unsigned W = 10;
  localparam int unsigned H = 7;
  localparam int unsigned FRAMES = 3;

  logic    clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  pixel_t  in_pix = '0;
  logic    win_shift, win_valid;
  window_t win;
  logic [$clog2(H)-1:0] ctr_row;
  logic [$clog2(W)-1:0] ctr_col;
  int      checks = 0, failures = 0;

  window_generator #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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

  int img [H][W];

  initial begin
    int nvalid;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int f = 0; f < FRAMES; f++) begin
      nvalid = 0;
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          while ($urandom_range(3) == 0) begin
            in_valid <= 1'b0;
            @(posedge clk);
            #1 check(!win_shift && !win_valid, "no window without input");
          end
          img[r][c] = int'($urandom_range(255));
          in_valid <= 1'b1;
          in_pix   <= pixel_t'(img[r][c]);
          @(posedge clk);
          in_valid <= 1'b0;
          #1;
          check(win_shift, "win_shift one clock after input");
          if (r >= 2 && c >= 2) begin
            nvalid++;
            check(win_valid, $sformatf("window at (%0d,%0d) flagged valid", r, c));
            check(int'(ctr_row) == r - 1 && int'(ctr_col) == c - 1,
                  $sformatf("centre (%0d,%0d) exp (%0d,%0d)", ctr_row, ctr_col, r-1, c-1));
            for (int k = 0; k < 9; k++)
              check(int'(win[k+1]) == img[r - k/3][c - k%3],
                    $sformatf("frame %0d (%0d,%0d) P%0d got %0d exp %0d",
                              f, r, c, k+1, win[k+1], img[r - k/3][c - k%3]));
          end else begin
            check(!win_valid, $sformatf("border window (%0d,%0d) not valid", r, c));
          end
        end
      check(nvalid == (W-2)*(H-2), "valid windows per frame");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sobel_operator
// Feeds the Sobel operator the windows a 3-row strip produces as it slides
// one column per shift, in both forms (shared-sum and direct), and checks
// grad and the edge decision against the mask definitions. The strip mixes
// random columns with flat regions, full-scale steps and a diagonal corner,
// so gradients of 0 and the largest reachable value 1530 both occur;
// the threshold varies, including the paper's 400 and values equal to the
// gradient (strict '>'). The first two windows after each restart are
// flagged invalid, as the window generator does at a row start.
module tb_sobel_operator;
  import fuzzy_edge_pkg::*;
  import fuzzy_ref_pkg::*;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    win_shift = 1'b0, win_valid = 1'b0;
  window_t win = '0;
  grad_t   threshold = 11'd400;
  logic    ev_r, eb_r, ev_d, eb_d;
  grad_t   g_r, g_d;
  int      checks = 0, failures = 0;
  int      n_edge = 0, n_noedge = 0, n_max = 0, n_tie = 0;

  sobel_operator #(.REUSE_SUMS(1'b1)) dut_reuse (
    .clk, .rst_n, .win_shift, .win_valid, .win, .threshold,
    .edge_valid(ev_r), .edge_bit(eb_r), .grad(g_r));
  sobel_operator #(.REUSE_SUMS(1'b0)) dut_direct (
    .clk, .rst_n, .win_shift, .win_valid, .win, .threshold,
    .edge_valid(ev_d), .edge_bit(eb_d), .grad(g_d));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  // col[k][dy]: strip column k, dy = 0 top row .. 2 bottom row
  int col [$];

  initial begin
    int strip [$][3];
    int n [3][3];
    int exp_g, t, seg;
    int cur [3];
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int run = 0; run < 40; run++) begin
      strip.delete();
      for (int k = 0; k < 40; k++) begin
        seg = (k / 8) % 4;
        case (seg)
          0: cur = '{$urandom_range(255), $urandom_range(255), $urandom_range(255)};
          1: cur = '{100, 100, 100};
          2: cur = (k % 2) ? '{0, 0, 0} : '{255, 255, 255};
          default: case (k % 3)   // diagonal corner: largest reachable gradient
            0: cur = '{0, 0, 0};
            1: cur = '{0, 255, 255};
            default: cur = '{255, 255, 255};
          endcase
        endcase
        strip.push_back(cur);
      end
      for (int k = 0; k < strip.size(); k++) begin
        // window: newest column k is P1/P4/P7 (bottom..top rows)
        for (int j = 0; j < 3; j++) begin
          win[1 + j] <= pixel_t'(k - j >= 0 ? strip[k - j][2] : 0);
          win[4 + j] <= pixel_t'(k - j >= 0 ? strip[k - j][1] : 0);
          win[7 + j] <= pixel_t'(k - j >= 0 ? strip[k - j][0] : 0);
        end
        t = (run % 4 == 0) ? 400 : int'($urandom_range(2047));
        if (k >= 2) begin
          for (int dy = 0; dy < 3; dy++)
            for (int dx = 0; dx < 3; dx++)
              n[dy][dx] = strip[k - 2 + dx][dy];
          exp_g = sobel_ref(n);
          if (run % 4 == 1) t = exp_g;          // tie: must not be an edge
        end
        threshold <= grad_t'(t);
        win_shift <= 1'b1;
        win_valid <= (k >= 2);
        @(posedge clk);
        win_shift <= 1'b0;
        win_valid <= 1'b0;
        #1;
        check(ev_r == (k >= 2) && ev_d == (k >= 2), "edge_valid follows win_valid");
        if (k >= 2) begin
          check(int'(g_r) == exp_g, $sformatf("reuse grad %0d exp %0d", g_r, exp_g));
          check(int'(g_d) == exp_g, $sformatf("direct grad %0d exp %0d", g_d, exp_g));
          check(eb_r == (exp_g > t) && eb_d == (exp_g > t),
                $sformatf("edge g=%0d t=%0d got %0b/%0b", exp_g, t, eb_r, eb_d));
          if (exp_g > t) n_edge++; else n_noedge++;
          if (exp_g == 1530) n_max++;
          if (exp_g == t) n_tie++;
        end
        // random idle cycles keep the stored sums in place
        repeat ($urandom_range(2)) begin
          @(posedge clk);
          #1 check(!ev_r && !ev_d, "no output without a shift");
        end
      end
    end
    check(n_edge > 0 && n_noedge > 0 && n_max > 0 && n_tie > 0, "all cases seen");
    $display("edges=%0d non-edges=%0d max-gradient=%0d ties=%0d", n_edge, n_noedge, n_max, n_tie);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

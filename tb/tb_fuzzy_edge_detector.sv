// tb_fuzzy_edge_detector
// End-to-end test of the colour edge detector at its full 256x256 size.
// A synthetic low-contrast colour scene (shaded background, rectangles and
// discs whose contrast differs per channel, small noise) is streamed through
// four frames:
//   frame 0  fuzzy on,  T = 400, no input gaps          (latency checked)
//   frame 1  fuzzy off, T = 400, random input gaps      (same scene)
//   frame 2  fuzzy on,  T = 400, random input gaps      (new scene)
//   frame 3  fuzzy on,  T = 250, no input gaps          (threshold changed
//                                                        during an idle gap)
// Frames 0-1-2 follow each other with no idle cycle, so the line buffers
// still hold the previous frame when a new one starts.
// Every edge-map pixel is compared with a reference computed in the
// testbench (floating-point polynomial, Sobel masks, '>' T, OR of the
// three channels): position, the three channel bits and the combined bit,
// and its latency of 4 clocks after the input pixel that completes its
// window. Each mechanism is counted and a failure is counted for one that
// never happened: enhancement on and off, input stalls, back-to-back
// frames, edges found in a single channel only, edges in several channels,
// edges that only the enhanced image shows, and a threshold change.
module tb_fuzzy_edge_detector;
  import fuzzy_edge_pkg::*;
  import fuzzy_ref_pkg::*;

  localparam int W = 256;
  localparam int H = 256;
  localparam int NF = 4;
  localparam int PER_FRAME = (W - 2) * (H - 2);

  logic   clk = 1'b0, rst_n = 1'b0;
  logic   fuzzy_en = 1'b1, pix_valid = 1'b0;
  grad_t  threshold = 11'd400;
  pixel_t pix_r = '0, pix_g = '0, pix_b = '0;
  logic   edge_valid, edge_bit;
  logic [2:0] ch_edge;
  logic [7:0] edge_row, edge_col;

  fuzzy_edge_detector dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // Scene, expected per-channel edge bits, input timestamps
  byte unsigned img   [NF][3][H][W];
  bit           exp_e [NF][3][H][W];
  longint       t_in  [NF][H][W];
  int           lut   [256];
  bit           f_en  [NF] = '{1, 0, 1, 1};
  int           f_thr [NF] = '{400, 400, 400, 250};
  bit           f_gap [NF] = '{0, 1, 1, 0};

  // Mechanism counters
  int n_fuzzy_on = 0, n_fuzzy_off = 0, n_stall = 0, n_b2b = 0;
  int n_single = 0, n_multi = 0, n_fuzzy_only = 0, n_thr_change = 0;

  function automatic int scene(int seed, int ch, int r, int c);
    int v, dr, dc;
    v = 95 + (c + r) / 16 + seed * 3;                    // shaded background
    // rectangle: strong in R, weak in G, absent in B
    if (r >= 40 + seed*7 && r < 120 && c >= 30 && c < 110)
      v += (ch == 0) ? 70 : (ch == 1) ? 25 : 0;
    // disc: strong in B only
    dr = r - 170; dc = c - (150 + seed * 5);
    if (dr*dr + dc*dc < 45*45) v += (ch == 2) ? 60 : 12;
    // low-contrast bar, visible in all channels
    if (c >= 200 && c < 230 && r >= 20 && r < 240) v += 50;
    v += int'($urandom_range(6));                        // noise
    if (v > 255) v = 255;
    return v;
  endfunction

  function automatic void build_frame(int f);
    int n [3][3];
    int seed;
    seed = (f == 1) ? 0 : f;               // frame 1 repeats frame 0's scene
    for (int ch = 0; ch < 3; ch++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          img[f][ch][r][c] = (f == 1) ? img[0][ch][r][c]
                                      : byte'(scene(seed, ch, r, c));
    for (int ch = 0; ch < 3; ch++)
      for (int r = 1; r < H - 1; r++)
        for (int c = 1; c < W - 1; c++) begin
          for (int dy = 0; dy < 3; dy++)
            for (int dx = 0; dx < 3; dx++) begin
              n[dy][dx] = int'(img[f][ch][r-1+dy][c-1+dx]);
              if (f_en[f]) n[dy][dx] = lut[n[dy][dx]];
            end
          exp_e[f][ch][r][c] = (sobel_ref(n) > f_thr[f]);
        end
  endfunction

  // Driver
  initial begin
    for (int x = 0; x < 256; x++) lut[x] = fuzzy_ref(x);
    for (int f = 0; f < NF; f++) build_frame(f);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      if (f == 3) begin
        // idle gap so no pixel of frame 2 is still in flight
        pix_valid <= 1'b0;
        repeat (8) @(posedge clk);
        threshold <= grad_t'(f_thr[f]);
        n_thr_change++;
      end
      fuzzy_en <= f_en[f];
      if (f_en[f]) n_fuzzy_on++; else n_fuzzy_off++;
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          if (f_gap[f]) begin
            while ($urandom_range(4) == 0) begin
              pix_valid <= 1'b0;
              n_stall++;
              @(posedge clk);
            end
          end
          if (r == 0 && c == 0 && f > 0 && f < 3) n_b2b++;
          pix_valid <= 1'b1;
          pix_r <= img[f][0][r][c];
          pix_g <= img[f][1][r][c];
          pix_b <= img[f][2][r][c];
          t_in[f][r][c] = cycle;
          @(posedge clk);
        end
    end
    pix_valid <= 1'b0;
  end

  // Monitor
  initial begin
    int cnt, f, r, c, exp_r, exp_c;
    bit [2:0] e3;
    cnt = 0;
    while (cnt < NF * PER_FRAME) begin
      @(posedge clk);
      #1;
      if (edge_valid) begin
        f = cnt / PER_FRAME;
        exp_r = 1 + (cnt % PER_FRAME) / (W - 2);
        exp_c = 1 + (cnt % PER_FRAME) % (W - 2);
        r = int'(edge_row);
        c = int'(edge_col);
        check(r == exp_r && c == exp_c,
              $sformatf("frame %0d output %0d at (%0d,%0d) exp (%0d,%0d)",
                        f, cnt, r, c, exp_r, exp_c));
        e3 = {exp_e[f][2][exp_r][exp_c], exp_e[f][1][exp_r][exp_c],
              exp_e[f][0][exp_r][exp_c]};
        check(ch_edge == e3, $sformatf("frame %0d (%0d,%0d) channels %03b exp %03b",
                                       f, exp_r, exp_c, ch_edge, e3));
        check(edge_bit == (e3 != 0), $sformatf("frame %0d (%0d,%0d) edge", f, exp_r, exp_c));
        // cycle stamps are taken one clock before the pixel is sampled
        check(cycle - t_in[f][exp_r+1][exp_c+1] == 64'd5,
              $sformatf("latency %0d", cycle - t_in[f][exp_r+1][exp_c+1] - 1));
        if ($countones(e3) == 1) n_single++;
        if ($countones(e3) > 1)  n_multi++;
        if (f == 0 && edge_bit && !(|{exp_e[1][2][exp_r][exp_c], exp_e[1][1][exp_r][exp_c],
                                      exp_e[1][0][exp_r][exp_c]}))
          n_fuzzy_only++;
        cnt++;
      end
    end
    repeat (10) @(posedge clk);
    check(!edge_valid, "no extra outputs");
    $display("fuzzy_on_frames=%0d fuzzy_off_frames=%0d stall_cycles=%0d back_to_back=%0d",
             n_fuzzy_on, n_fuzzy_off, n_stall, n_b2b);
    $display("single_channel_edges=%0d multi_channel_edges=%0d fuzzy_only_edges=%0d threshold_changes=%0d",
             n_single, n_multi, n_fuzzy_only, n_thr_change);
    check(n_fuzzy_on > 0,   "fuzzy enhancement used");
    check(n_fuzzy_off > 0,  "fuzzy bypass used");
    check(n_stall > 0,      "input stalls happened");
    check(n_b2b > 0,        "back-to-back frames happened");
    check(n_single > 0,     "single-channel edges combined");
    check(n_multi > 0,      "multi-channel edges combined");
    check(n_fuzzy_only > 0, "edges found only with enhancement");
    check(n_thr_change > 0, "threshold changed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

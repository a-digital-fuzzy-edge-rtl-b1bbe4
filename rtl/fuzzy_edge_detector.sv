// fuzzy_edge_detector
// Edge detector for colour images built on fuzzy contrast enhancement and
// the Sobel operator. An RGB pixel stream in raster order (one pixel per
// clock, as delivered by a CMOS sensor in RGB mode) is split into its three
// channels. Each channel passes through its own pipeline, as in the paper:
//   fuzzy_preprocessor  - polynomial contrast enhancement
//   window_generator    - two line FIFOs + shift registers -> 3x3 window
//   sobel_operator      - |Gx| + |Gy| > threshold -> channel edge bit
// and rgb_combine merges the three channel bits into one edge-map bit.
// fuzzy_en = 0 bypasses the enhancement (plain Sobel on the raw channels);
// the threshold is a run-time input (the paper's experiments use 400).
//
// Interface: pix_valid qualifies pix_r/g/b; gaps in pix_valid simply hold
// the pipeline. Outputs: edge_valid marks one edge-map bit edge_bit with its
// position edge_row/edge_col (the centre of its 3x3 window) and the per-
// channel bits ch_edge[0]=R, [1]=G, [2]=B. Only the (IMG_W-2)x(IMG_H-2)
// interior pixels are produced (border handling is this design's choice).
//
// Timing: the edge bit of the window completed by input pixel k appears
// 4 clocks after pixel k is presented (fuzzy 1, window 1, Sobel 1, combine
// 1), i.e. the edge of pixel (r, c) follows the input of pixel (r+1, c+1).
// Throughput is one pixel per clock.
module fuzzy_edge_detector
  import fuzzy_edge_pkg::*;
#(
  parameter int unsigned IMG_W      = 256,
  parameter int unsigned IMG_H      = 256,
  parameter bit          REUSE_SUMS = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fuzzy_en,
  input  grad_t             threshold,
  input  logic              pix_valid,
  input  pixel_t            pix_r,
  input  pixel_t            pix_g,
  input  pixel_t            pix_b,
  output logic              edge_valid,
  output logic              edge_bit,
  output logic [NUM_CH-1:0] ch_edge,
  output logic [$clog2(IMG_H)-1:0] edge_row,
  output logic [$clog2(IMG_W)-1:0] edge_col
);

  localparam int unsigned RW = $clog2(IMG_H);
  localparam int unsigned CW = $clog2(IMG_W);

  pixel_t [NUM_CH-1:0] ch_pix;
  assign ch_pix[CH_R] = pix_r;
  assign ch_pix[CH_G] = pix_g;
  assign ch_pix[CH_B] = pix_b;

  logic [NUM_CH-1:0] sob_valid, sob_edge;
  logic [RW-1:0]     ctr_row [NUM_CH];
  logic [CW-1:0]     ctr_col [NUM_CH];

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic    fz_valid;
    pixel_t  fz_pix;
    logic    w_shift, w_valid;
    window_t w;
    grad_t   grad_unused;

    fuzzy_preprocessor u_fuzzy (
      .clk, .rst_n, .fuzzy_en,
      .in_valid (pix_valid),
      .in_pix   (ch_pix[c]),
      .out_valid(fz_valid),
      .out_pix  (fz_pix)
    );

    window_generator #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_win (
      .clk, .rst_n,
      .in_valid (fz_valid),
      .in_pix   (fz_pix),
      .win_shift(w_shift),
      .win_valid(w_valid),
      .win      (w),
      .ctr_row  (ctr_row[c]),
      .ctr_col  (ctr_col[c])
    );

    sobel_operator #(.REUSE_SUMS(REUSE_SUMS)) u_sobel (
      .clk, .rst_n,
      .win_shift (w_shift),
      .win_valid (w_valid),
      .win       (w),
      .threshold,
      .edge_valid(sob_valid[c]),
      .edge_bit      (sob_edge[c]),
      .grad      (grad_unused)
    );
  end

  // Centre position, delayed by the Sobel register stage
  logic [RW-1:0] row_q;
  logic [CW-1:0] col_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row_q <= '0;
      col_q <= '0;
    end else if (g_ch[CH_R].w_shift && g_ch[CH_R].w_valid) begin
      row_q <= ctr_row[CH_R];
      col_q <= ctr_col[CH_R];
    end
  end

  rgb_combine u_combine (
    .clk, .rst_n,
    .in_valid (sob_valid[CH_R]),
    .ch_edge  (sob_edge),
    .out_valid(edge_valid),
    .edge_bit
  );

  // Channel bits and position aligned with the combined bit
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ch_edge  <= '0;
      edge_row <= '0;
      edge_col <= '0;
    end else if (sob_valid[CH_R]) begin
      ch_edge  <= sob_edge;
      edge_row <= row_q;
      edge_col <= col_q;
    end
  end

  // The three channel pipelines run in lock step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               sob_valid == {NUM_CH{sob_valid[CH_R]}});

endmodule

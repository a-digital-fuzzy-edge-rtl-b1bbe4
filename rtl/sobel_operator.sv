// sobel_operator
// Sobel edge decision for one colour channel. With the window P1..P9
// (P1 newest, P1-P2-P3 current row, P7-P8-P9 two rows up) it forms
//   Gx = (P1 + 2 P2 + P3) - (P7 + 2 P8 + P9)   (difference between rows)
//   Gy = (P1 + 2 P4 + P7) - (P3 + 2 P6 + P9)   (difference between columns)
// and outputs edge_bit = (|Gx| + |Gy| > threshold). The L1 norm in place of the
// square root and the strict '>' compare follow the paper.
//
// REUSE_SUMS = 1 (default) is the paper's shared-sum scheme: because the
// window moves by one column per pixel, the sums it needs for the two older
// columns were already formed on the two previous shifts and are kept in
// registers. Per pixel only seven add/subtracts are done, all on the newest
// column P1, P4, P7:
//   d   = P1 - P7                     vertical difference of the new column
//   ns  = d + d'                      neighbouring sum   (d' = d one shift ago)
//   Gx  = ns + ns'                    partial sum = d + 2d' + d''
//   nsa = P1 + P4, nsb = P4 + P7      neighbouring sums down the new column
//   ps  = nsa + nsb                   partial sum P1 + 2 P4 + P7
//   Gy  = ps - ps''                   interlaced difference (ps two shifts ago)
// The exact grouping is this design's reading of the paper's neighbouring
// sums / partial sums / interlaced differences. The other six window entries
// are not read in this mode. The stored terms advance on every win_shift, so
// the result is right whenever the two previous shifts were the two previous
// columns of the same rows, which holds for every window the window
// generator flags valid. REUSE_SUMS = 0 evaluates the formulas directly
// from all nine entries; both modes give identical results.
//
// Timing: edge_valid/edge_bit/grad are registered, one clock after a window with
// win_valid.
module sobel_operator
  import fuzzy_edge_pkg::*;
#(
  parameter bit REUSE_SUMS = 1'b1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    win_shift,
  input  logic    win_valid,
  input  window_t win,
  input  grad_t   threshold,
  output logic    edge_valid,
  output logic    edge_bit,
  output grad_t   grad
);

  typedef logic signed [GRAD_W:0] sgrad_t;   // 12-bit signed, holds +-1020

  sgrad_t gx, gy;

  function automatic sgrad_t ext(input pixel_t p);
    return sgrad_t'({1'b0, p});
  endfunction

  if (REUSE_SUMS) begin : g_reuse
    sgrad_t d, ns, nsa, nsb, ps;
    sgrad_t d_q1, ns_q1, ps_q1, ps_q2;

    always_comb begin
      d   = ext(win[1]) - ext(win[7]);
      ns  = d + d_q1;
      gx  = ns + ns_q1;
      nsa = ext(win[1]) + ext(win[4]);
      nsb = ext(win[4]) + ext(win[7]);
      ps  = nsa + nsb;
      gy  = ps - ps_q2;
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        d_q1  <= '0;
        ns_q1 <= '0;
        ps_q1 <= '0;
        ps_q2 <= '0;
      end else if (win_shift) begin
        d_q1  <= d;
        ns_q1 <= ns;
        ps_q1 <= ps;
        ps_q2 <= ps_q1;
      end
    end
  end else begin : g_direct
    always_comb begin
      gx = (ext(win[1]) + (ext(win[2]) <<< 1) + ext(win[3]))
         - (ext(win[7]) + (ext(win[8]) <<< 1) + ext(win[9]));
      gy = (ext(win[1]) + (ext(win[4]) <<< 1) + ext(win[7]))
         - (ext(win[3]) + (ext(win[6]) <<< 1) + ext(win[9]));
    end
  end

  sgrad_t abs_gx, abs_gy, mag;
  always_comb begin
    abs_gx = gx[GRAD_W] ? -gx : gx;
    abs_gy = gy[GRAD_W] ? -gy : gy;
    mag    = abs_gx + abs_gy;   // <= 2040, sign bit stays 0
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      edge_valid <= 1'b0;
      edge_bit       <= 1'b0;
      grad       <= '0;
    end else begin
      edge_valid <= win_shift && win_valid;
      if (win_shift && win_valid) begin
        grad <= mag[GRAD_W-1:0];
        edge_bit <= (mag[GRAD_W-1:0] > threshold);
      end
    end
  end

endmodule

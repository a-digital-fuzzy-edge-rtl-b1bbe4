// fuzzy_preprocessor
// Contrast enhancement of one colour channel ahead of edge detection.
// Each 8-bit value x is replaced by the fixed fourth-order polynomial
//   f(x) = -2.0454098505641e-7 x^4 + 7.615967514125e-5 x^3
//          - 0.0041249658333 x^2 + 0.4911541875107 x
// an S-shaped curve (f(0)=0, f(255)=255) that darkens dark values and
// brightens bright ones. The polynomial and its coefficients are the paper's;
// it is hard-coded, independent of any threshold.
//
// Implementation: the 256 results are computed at elaboration by a constant
// function in fixed point (coefficients scaled by 2^48, sum rounded to
// nearest) and held as a ROM indexed by x. The curve overshoots to about
// 256.04 near x = 250, so results are clamped to 0..255 (own choice).
// fuzzy_en = 0 passes the raw value, so the same hardware also gives the
// non-fuzzy results the paper compares against (own choice of control).
//
// Interface/timing: one value per clock when in_valid is high; out_valid and
// out_pix follow one clock later (one register stage, own choice).
module fuzzy_preprocessor
  import fuzzy_edge_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   fuzzy_en,
  input  logic   in_valid,
  input  pixel_t in_pix,
  output logic   out_valid,
  output pixel_t out_pix
);

  typedef pixel_t [255:0] lut_t;

  // Polynomial coefficients times 2^48, rounded.
  localparam longint C1 = 64'sd138247613490915;
  localparam longint C2 = -64'sd1161074661860;
  localparam longint C3 = 64'sd21437042787;
  localparam longint C4 = -64'sd57573169;
  localparam int     FRAC = 48;

  function automatic lut_t build_lut();
    lut_t   t;
    longint x, acc, r;
    for (int i = 0; i < 256; i++) begin
      x   = longint'(i);
      // Horner form: ((C4*x + C3)*x + C2)*x + C1)*x
      acc = (((C4 * x + C3) * x + C2) * x + C1) * x;
      r   = (acc + (64'sd1 <<< (FRAC - 1))) >>> FRAC;
      if (r < 0)        t[i] = '0;
      else if (r > 255) t[i] = 8'd255;
      else              t[i] = pixel_t'(r);
    end
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  pixel_t enhanced;
  always_comb enhanced = fuzzy_en ? LUT[in_pix] : in_pix;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pix   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_pix <= enhanced;
    end
  end

endmodule

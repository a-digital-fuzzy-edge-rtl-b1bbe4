// window_generator
// Builds 3x3 pixel windows from a raster-order stream carrying one pixel per
// clock. As in the paper, three 3-stage shift registers hold the window rows
// and two line FIFOs of IMG_W-3 entries (253 for 256-pixel rows) carry pixels
// from one row to the next: the input enters P1 and moves P1->P2->P3, P3 feeds
// the first FIFO, whose output enters P4 (P4->P5->P6), P6 feeds the second
// FIFO, whose output enters P7 (P7->P8->P9). Each row chain thus delays by
// exactly IMG_W pixels, so P4 is the pixel above P1 and P7 the one above P4.
//
// Added by this design: row/column counters of the newest pixel. A window is
// flagged win_valid only when all nine entries lie inside the current image
// (newest pixel at row >= 2 and column >= 2); border pixels get no window,
// so the edge map covers the (IMG_W-2)x(IMG_H-2) interior. ctr_row/ctr_col
// give the position of the centre P5. Frames follow each other directly; the
// counters wrap after IMG_W*IMG_H pixels.
//
// Timing: on a clock edge with in_valid high, the window shifts; win_shift,
// win_valid, win and the centre position are valid in the following cycle
// (one register stage). Without in_valid nothing moves.
module window_generator
  import fuzzy_edge_pkg::*;
#(
  parameter int unsigned IMG_W = 256,
  parameter int unsigned IMG_H = 256
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  pixel_t  in_pix,
  output logic    win_shift,
  output logic    win_valid,
  output window_t win,
  output logic [$clog2(IMG_H)-1:0] ctr_row,
  output logic [$clog2(IMG_W)-1:0] ctr_col
);

  localparam int unsigned FIFO_DEPTH = IMG_W - 3;
  localparam int unsigned RW = $clog2(IMG_H);
  localparam int unsigned CW = $clog2(IMG_W);

  pixel_t fifo1_out, fifo2_out;

  line_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(PIX_W)) u_fifo1 (
    .clk, .rst_n, .shift(in_valid), .din(win[3]), .dout(fifo1_out)
  );

  line_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(PIX_W)) u_fifo2 (
    .clk, .rst_n, .shift(in_valid), .din(win[6]), .dout(fifo2_out)
  );

  // Shift registers P1..P9
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      win <= '0;
    end else if (in_valid) begin
      win[1] <= in_pix;
      win[2] <= win[1];
      win[3] <= win[2];
      win[4] <= fifo1_out;
      win[5] <= win[4];
      win[6] <= win[5];
      win[7] <= fifo2_out;
      win[8] <= win[7];
      win[9] <= win[8];
    end
  end

  // Position of the next incoming pixel
  logic [RW-1:0] row;
  logic [CW-1:0] col;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row       <= '0;
      col       <= '0;
      win_shift <= 1'b0;
      win_valid <= 1'b0;
      ctr_row   <= '0;
      ctr_col   <= '0;
    end else begin
      win_shift <= in_valid;
      win_valid <= in_valid && (row >= RW'(2)) && (col >= CW'(2));
      if (in_valid) begin
        ctr_row <= row - 1'b1;
        ctr_col <= col - 1'b1;
        if (col == CW'(IMG_W - 1)) begin
          col <= '0;
          row <= (row == RW'(IMG_H - 1)) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  // A valid window is always a freshly shifted one, and only an input
  // strobe shifts the window.
  a_valid_shift: assert property (@(posedge clk) disable iff (!rst_n)
                                  win_valid |-> win_shift);
  a_shift_follows_input: assert property (@(posedge clk) disable iff (!rst_n)
                                          win_shift == $past(in_valid));

endmodule

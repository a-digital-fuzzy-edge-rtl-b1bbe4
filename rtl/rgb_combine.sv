// rgb_combine
// Merges the three per-channel edge decisions into the final edge map: a
// pixel is an edge pixel when at least one of its R, G or B channels was
// found to be an edge (the ">= 1" rule of the paper's block diagram, an OR
// of the three bits). The register stage is this design's choice.
//
// Interface/timing: ch_edge[0]=R, [1]=G, [2]=B, valid with in_valid; edge_bit and
// out_valid appear one clock later.
module rgb_combine
  import fuzzy_edge_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [NUM_CH-1:0] ch_edge,
  output logic              out_valid,
  output logic              edge_bit
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      edge_bit      <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) edge_bit <= |ch_edge;
    end
  end

endmodule

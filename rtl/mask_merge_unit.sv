// mask_merge_unit -- merges the leader-pixel results of the two PRTUs into one
// contribution mask per mini-tile (MMU of Fig. 7).
//
// A mini-tile is marked as contributed when any of its leader pixels passes.
// Sparse sampling (one batch): PR A holds the top-left leader pixel of every
// mini-tile and PR B the bottom-right one, with PR pixel i lying in mini-tile i, so
// mask = a | b. Dense sampling (two batches): each PR is the four corners of one
// mini-tile; the first batch covers mini-tiles 0 (PR A) and 1 (PR B) and is held in a
// register, the second covers mini-tiles 2 and 3 and releases the merged mask. The
// assignment of PRs to PRTUs and the batch order are this design's choice (the paper
// gives the two-batch scheme, Fig. 7(b), but not the order).
// Timing: one cycle, registered; out_valid only when a Gaussian's mask is complete.
module mask_merge_unit
  import flicker_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  batch_e     kind,
  input  logic [3:0] pr_a,
  input  logic [3:0] pr_b,
  output logic       out_valid,
  output logic [3:0] mask
);
  logic [1:0] first_half;   // mini-tiles 0 and 1 from the first dense batch

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_half <= '0;
      out_valid  <= 1'b0;
      mask       <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        unique case (kind)
          BATCH_SPARSE: begin
            out_valid <= 1'b1;
            mask      <= pr_a | pr_b;
          end
          BATCH_DENSE_FIRST: begin
            first_half <= {|pr_b, |pr_a};
          end
          BATCH_DENSE_SECOND: begin
            out_valid <= 1'b1;
            mask      <= {|pr_b, |pr_a, first_half};
          end
          default: ;
        endcase
      end
    end
  end
endmodule

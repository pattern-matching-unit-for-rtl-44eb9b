// argmax_unit: running maximum of the dot-product scores of one voxel.
//
// clear starts a new voxel. Every in_valid score is compared with the best so
// far and replaces it when strictly larger, so among equal scores the first
// one seen wins. best_valid stays low until the first score arrives.
// A score arriving together with clear becomes the first of the new voxel.
//
// Keeping the maximum and the tissue parameters of its entry follows the
// paper; the tie rule is this design's own.
// Timing: best_* reflects every score accepted up to the previous cycle.
module argmax_unit
  import puma_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                in_valid,
  input  score_t              in_score,
  input  logic [PARAM_W-1:0]  in_param,
  output logic                best_valid,
  output score_t              best_score,
  output logic [PARAM_W-1:0]  best_param
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_valid <= 1'b0;
      best_score <= '0;
      best_param <= '0;
    end else if (in_valid && (clear || !best_valid || in_score > best_score)) begin
      best_valid <= 1'b1;
      best_score <= in_score;
      best_param <= in_param;
    end else if (clear) begin
      best_valid <= 1'b0;
      best_score <= '0;
      best_param <= '0;
    end
  end

endmodule

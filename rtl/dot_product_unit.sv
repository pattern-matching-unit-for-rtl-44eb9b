// dot_product_unit: complex scalar product of a voxel with a dictionary entry.
//
// For the voxel x and an entry d, both 8 complex SVD coefficients, it computes
//     s = sum_i conj(d_i) * x_i
//       = sum_i (dr_i*xr_i + di_i*xi_i) + j * sum_i (dr_i*xi_i - di_i*xr_i)
// and the score |s|^2 = Re(s)^2 + Im(s)^2, which selects the same entry as
// the largest |s| without a square root. One entry enters per cycle.
//
// The paper picks "the entry that maximizes the scalar product". That entries
// are stored already normalised (so no division by the entry norm is needed),
// the use of |s|^2 and the fixed-point widths are this design's own.
// Timing: fully pipelined, LATENCY = 3 cycles from in_valid to out_valid; the
// entry's tissue-parameter index travels with it.
module dot_product_unit
  import puma_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  cvec_t               voxel,
  input  dict_entry_t         entry,
  output logic                out_valid,
  output score_t              out_score,
  output logic [PARAM_W-1:0]  out_param
);

  localparam int unsigned P_W = 2 * COMP_W + 1;   // sum of two products

  logic                        v1, v2;
  logic signed [P_W-1:0]       re1 [N_COEF];
  logic signed [P_W-1:0]       im1 [N_COEF];
  logic [PARAM_W-1:0]          p1, p2;
  logic signed [ACC_W-1:0]     re2, im2;

  // Stage 1: products
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
    end else begin
      v1 <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    p1 <= entry.param;
    for (int i = 0; i < N_COEF; i++) begin
      re1[i] <= P_W'(entry.coef[i].re * voxel[i].re) + P_W'(entry.coef[i].im * voxel[i].im);
      im1[i] <= P_W'(entry.coef[i].re * voxel[i].im) - P_W'(entry.coef[i].im * voxel[i].re);
    end
  end

  // Stage 2: sums
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;
  end

  always_ff @(posedge clk) begin
    logic signed [ACC_W-1:0] sr, si;
    sr = '0;
    si = '0;
    for (int i = 0; i < N_COEF; i++) begin
      sr = sr + ACC_W'(re1[i]);
      si = si + ACC_W'(im1[i]);
    end
    re2 <= sr;
    im2 <= si;
    p2  <= p1;
  end

  // Stage 3: squared magnitude
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v2;
  end

  always_ff @(posedge clk) begin
    out_score <= SCORE_W'(re2 * re2) + SCORE_W'(im2 * im2);
    out_param <= p2;
  end

endmodule

// voxel_binner: converts a full-resolution voxel into AM bin indices.
//
// A voxel is 8 complex SVD coefficients, i.e. 16 real components; component
// k = 2i is the real part of coefficient i and k = 2i+1 its imaginary part.
// Every component has known bounds, so it is binned uniformly between a
// programmed lower bound min_k and that bound plus the component's range:
//     bin_k = clamp( floor( (x_k - min_k) * scale_k / 2^16 ), 0, N_BINS-1 )
// with scale_k = floor(N_BINS * 2^16 / range_k) loaded by the host. Values
// below the lower bound go to bin 0, values above the range to the last bin.
//
// That each component becomes one integer out of 15 bins, using known bounds,
// follows the paper; uniform bins, the reciprocal-scale arithmetic (to avoid a
// divider) and the configuration port are this design's own.
// Timing: one register stage, out_valid follows in_valid by one cycle.
module voxel_binner
  import puma_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  // per-component bin configuration
  input  logic                      cfg_we,
  input  logic [$clog2(N_COMP)-1:0] cfg_idx,
  input  comp_t                     cfg_min,
  input  logic [15:0]               cfg_scale,
  // data
  input  logic                      in_valid,
  input  cvec_t                     in_coef,
  output logic                      out_valid,
  output bins_t                     out_bins
);

  comp_t       min_r   [N_COMP];
  logic [15:0] scale_r [N_COMP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_COMP; k++) begin
        min_r[k]   <= '0;
        scale_r[k] <= '0;
      end
    end else if (cfg_we) begin
      min_r[cfg_idx]   <= cfg_min;
      scale_r[cfg_idx] <= cfg_scale;
    end
  end

  function automatic bin_t bin_of(input comp_t x, input comp_t lo, input logic [15:0] sc);
    logic signed [COMP_W:0] d;
    logic [COMP_W+15:0]     p;
    logic [COMP_W-1:0]      q;
    d = {x[COMP_W-1], x} - {lo[COMP_W-1], lo};
    if (d < 0) return '0;
    p = (COMP_W+16)'(unsigned'(d[COMP_W-1:0])) * (COMP_W+16)'(sc);
    q = p[COMP_W+15:16];
    if (q >= COMP_W'(N_BINS - 1)) return BIN_W'(N_BINS - 1);
    return BIN_W'(q);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_bins  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < N_COEF; i++) begin
          out_bins[2*i]   <= bin_of(in_coef[i].re, min_r[2*i],   scale_r[2*i]);
          out_bins[2*i+1] <= bin_of(in_coef[i].im, min_r[2*i+1], scale_r[2*i+1]);
        end
    end
  end

endmodule

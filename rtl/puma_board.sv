// puma_board: pattern-matching board for MR-fingerprinting reconstruction.
//
// The board pairs a large Associative Memory (AM) with two FPGAs. input_fpga
// bins each voxel (8 complex SVD coefficients) into the AM pattern format and
// broadcasts it on 8 buses to N_MEZZ mezzanines of CHIPS_PER_MEZZ AM chips,
// which compare it with every stored pattern in one cycle each word. The
// matched pattern addresses, {mezzanine, chip, pattern in chip}, are merged and
// read out to output_fpga, which looks up each pattern's list of
// full-resolution dictionary entries, fetches them from the external
// dictionary memory, computes the dot products with the full-resolution voxel
// and returns the entry with the largest one. A voxel that matches no pattern
// is compared with the whole original dictionary instead.
//
// Interface: host voxel stream (vox_*), result stream (res_*), configuration
// and load ports for the binning bounds (bin_cfg_*), the AM bank (am_wr_*,
// address {mezzanine, chip, column}), the AM threshold and pattern width,
// the pattern list table (lt_*) and the original dictionary location, and
// the read port of the dictionary memory (mem_*), which is outside the board.
//
// Board size (4 mezzanines of 16 chips, 8 buses, 16-bit words) follows the
// paper; the number of columns per chip is not given there and is set to 256
// here, which holds 8192 two-column patterns against the ~6000 of the paper's
// trial. Voxels are handled one at a time: the next voxel is accepted when
// the previous result has been taken.
module puma_board
  import puma_pkg::*;
#(
  parameter int unsigned N_MEZZ         = 4,
  parameter int unsigned CHIPS_PER_MEZZ = 16,
  parameter int unsigned NCOLS          = 256,
  parameter int unsigned FIFO_DEPTH     = 16,
  localparam int unsigned CA_W  = $clog2(NCOLS),
  localparam int unsigned CH_W  = $clog2(CHIPS_PER_MEZZ),
  localparam int unsigned MZ_W  = $clog2(N_MEZZ),
  localparam int unsigned MO_W  = CA_W + CH_W,       // address out of a mezzanine
  localparam int unsigned PA_W  = MO_W + MZ_W        // board pattern address
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host voxel stream
  input  logic                      vox_valid,
  input  voxel_t                    vox,
  output logic                      vox_ready,
  // results
  output logic                      res_valid,
  output result_t                   res,
  input  logic                      res_ready,
  // configuration
  input  logic                      bin_cfg_we,
  input  logic [$clog2(N_COMP)-1:0] bin_cfg_idx,
  input  comp_t                     bin_cfg_min,
  input  logic [15:0]               bin_cfg_scale,
  input  grp_mode_e                 grp_mode,
  input  logic [THR_W-1:0]          threshold,
  input  logic                      am_wr_en,
  input  logic [PA_W-1:0]           am_wr_addr,     // {mezzanine, chip, column}
  input  am_words_t                 am_wr_words,
  input  logic                      lt_we,
  input  logic [PA_W-1:0]           lt_idx,         // {mezzanine, chip, pattern}
  input  logic [ADDR_W-1:0]         lt_start,
  input  logic [CNT_W-1:0]          lt_count,
  input  logic [ADDR_W-1:0]         orig_base,
  input  logic [CNT_W-1:0]          orig_count,
  // dictionary memory read port
  output logic                      mem_req_valid,
  output logic [ADDR_W-1:0]         mem_req_addr,
  input  logic                      mem_req_ready,
  input  logic                      mem_rsp_valid,
  input  dict_entry_t               mem_rsp_data
);

  logic              fv_valid, fv_ready;
  voxel_t            fv;
  logic              ev_init, ev_end;
  logic [N_BUS-1:0]  bus_valid;
  am_words_t         bus_word;

  input_fpga u_in (
    .clk, .rst_n,
    .vox_valid, .vox, .vox_ready,
    .cfg_we (bin_cfg_we), .cfg_idx (bin_cfg_idx), .cfg_min (bin_cfg_min), .cfg_scale (bin_cfg_scale),
    .fv_valid, .fv, .fv_ready,
    .ev_init, .bus_valid, .bus_word, .ev_end
  );

  logic [N_MEZZ-1:0] mz_valid, mz_ready, mz_done;
  logic [MO_W-1:0]   mz_addr [N_MEZZ];

  for (genvar m = 0; m < N_MEZZ; m++) begin : g_mezz
    am_mezzanine #(.NCHIPS(CHIPS_PER_MEZZ), .NCOLS(NCOLS)) u_mezz (
      .clk, .rst_n, .grp_mode, .threshold,
      .wr_en    (am_wr_en && (am_wr_addr[PA_W-1 -: MZ_W] == MZ_W'(m))),
      .wr_chip  (am_wr_addr[MO_W-1 -: CH_W]),
      .wr_col   (am_wr_addr[CA_W-1:0]),
      .wr_words (am_wr_words),
      .ev_init, .bus_valid, .bus_word, .ev_end,
      .rd_valid (mz_valid[m]), .rd_addr (mz_addr[m]), .rd_ready (mz_ready[m]),
      .done     (mz_done[m])
    );
  end

  logic            m_valid, m_ready, m_done;
  logic [PA_W-1:0] m_addr;

  match_merge #(.N(N_MEZZ), .IN_W(MO_W)) u_merge (
    .clk, .rst_n, .ev_init,
    .in_valid (mz_valid), .in_addr (mz_addr), .in_ready (mz_ready), .in_done (mz_done),
    .out_valid (m_valid), .out_addr (m_addr), .out_ready (m_ready), .out_done (m_done)
  );

  output_fpga #(.NPAT(1 << PA_W), .FIFO_DEPTH(FIFO_DEPTH)) u_out (
    .clk, .rst_n,
    .fv_valid, .fv, .fv_ready,
    .am_ev_end (ev_end),
    .m_valid, .m_addr, .m_ready, .m_done,
    .lt_we, .lt_idx, .lt_start, .lt_count,
    .orig_base, .orig_count,
    .mem_req_valid, .mem_req_addr, .mem_req_ready, .mem_rsp_valid, .mem_rsp_data,
    .res_valid, .res, .res_ready
  );

endmodule

// am_mezzanine: one mezzanine card of NCHIPS (16) AM chips.
//
// All chips see the same configuration, the same event signals and the same
// 8 input buses, so an input word is compared with every pattern of the card
// in one cycle. A pattern-bank write selects its chip with wr_chip. The chips'
// matched-pattern streams are merged by a round-robin match_merge; the address
// leaving the card is {chip index, pattern address in the chip}.
//
// The 16 chips per mezzanine follow the paper; the shared-bus fan-out and the
// merged readout are this design's reading of "input data are received and
// distributed to the AM chips" and "all the matched patterns are readout".
// Latency: one cycle more than a chip on the readout side.
module am_mezzanine
  import puma_pkg::*;
#(
  parameter int unsigned NCHIPS = 16,
  parameter int unsigned NCOLS  = 256,
  localparam int unsigned CA_W  = $clog2(NCOLS),
  localparam int unsigned CH_W  = $clog2(NCHIPS),
  localparam int unsigned OUT_W = CA_W + CH_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  grp_mode_e          grp_mode,
  input  logic [THR_W-1:0]   threshold,
  input  logic               wr_en,
  input  logic [CH_W-1:0]    wr_chip,
  input  logic [CA_W-1:0]    wr_col,
  input  am_words_t          wr_words,
  input  logic               ev_init,
  input  logic [N_BUS-1:0]   bus_valid,
  input  am_words_t          bus_word,
  input  logic               ev_end,
  output logic               rd_valid,
  output logic [OUT_W-1:0]   rd_addr,
  input  logic               rd_ready,
  output logic               done
);

  logic [NCHIPS-1:0] c_valid, c_ready, c_done;
  logic [CA_W-1:0]   c_addr [NCHIPS];

  for (genvar i = 0; i < NCHIPS; i++) begin : g_chip
    am_chip #(.NCOLS(NCOLS)) u_chip (
      .clk, .rst_n, .grp_mode, .threshold,
      .wr_en    (wr_en && (wr_chip == CH_W'(i))),
      .wr_col, .wr_words,
      .ev_init, .bus_valid, .bus_word, .ev_end,
      .rd_valid (c_valid[i]),
      .rd_addr  (c_addr[i]),
      .rd_ready (c_ready[i]),
      .done     (c_done[i])
    );
  end

  match_merge #(.N(NCHIPS), .IN_W(CA_W)) u_merge (
    .clk, .rst_n, .ev_init,
    .in_valid (c_valid), .in_addr (c_addr), .in_ready (c_ready), .in_done (c_done),
    .out_valid(rd_valid), .out_addr(rd_addr), .out_ready(rd_ready), .out_done(done)
  );

endmodule

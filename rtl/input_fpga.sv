// input_fpga: the board's input stage.
//
// It accepts one voxel at a time from the host, passes the full-resolution
// voxel to the output stage in the same cycle, bins the 16 components with
// voxel_binner and plays them to the AM chips as one event:
//   cycle 0  accept  (host and output stage handshake; binner samples)
//   cycle 1  ev_init (all hit flip-flops cleared)
//   cycle 2  every bus i carries the word of component 2i   (real part)
//   cycle 3  every bus i carries the word of component 2i+1 (imaginary part)
//   cycle 4  ev_end  (chips evaluate and start their readout)
// A word is {component index, bin} (see puma_pkg::am_word), so the two words
// a bus receives can only set the flip-flop of their own column. In the
// two-column pattern format, column 0 of a pattern holds the real parts and
// column 1 the imaginary parts of the 8 coefficients.
//
// That input data are received and distributed to the AM chips by an FPGA,
// that a pair of integers per coefficient is held in two words, and the 8 buses
// follow the paper. The 5-cycle event sequence, the word tagging and waiting for
// the output stage before accepting the next voxel are this design's own.
// Bits 15:12 and 7:4 of every bus word are constant zero by this word format,
// and fv is the host voxel wired straight through; both are intended.
module input_fpga
  import puma_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  // host voxel stream
  input  logic                      vox_valid,
  input  voxel_t                    vox,
  output logic                      vox_ready,
  // binning configuration
  input  logic                      cfg_we,
  input  logic [$clog2(N_COMP)-1:0] cfg_idx,
  input  comp_t                     cfg_min,
  input  logic [15:0]               cfg_scale,
  // full-resolution voxel to the output stage
  output logic                      fv_valid,
  output voxel_t                    fv,
  input  logic                      fv_ready,
  // AM event
  output logic                      ev_init,
  output logic [N_BUS-1:0]          bus_valid,
  output am_words_t                 bus_word,
  output logic                      ev_end
);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_W0, S_W1, S_END} state_e;
  state_e state;

  logic  accept;
  logic  bin_valid;
  bins_t bin_q;

  assign vox_ready = (state == S_IDLE) && fv_ready;
  assign fv_valid  = (state == S_IDLE) && vox_valid;
  assign fv        = vox;
  assign accept    = vox_valid && vox_ready;

  voxel_binner u_binner (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_min, .cfg_scale,
    .in_valid (accept), .in_coef (vox.coef),
    .out_valid(bin_valid), .out_bins (bin_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else unique case (state)
      S_IDLE: if (accept) state <= S_INIT;
      S_INIT: state <= S_W0;
      S_W0:   state <= S_W1;
      S_W1:   state <= S_END;
      S_END:  state <= S_IDLE;
      default: state <= S_IDLE;
    endcase
  end

  always_comb begin
    ev_init   = (state == S_INIT);
    ev_end    = (state == S_END);
    bus_valid = (state == S_W0 || state == S_W1) ? '1 : '0;
    bus_word  = '0;
    for (int i = 0; i < N_BUS; i++) begin
      if (state == S_W0) bus_word[i] = am_word(2*i,   bin_q[2*i]);
      if (state == S_W1) bus_word[i] = am_word(2*i+1, bin_q[2*i+1]);
    end
  end

  a_bins_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_INIT) |-> bin_valid);

endmodule

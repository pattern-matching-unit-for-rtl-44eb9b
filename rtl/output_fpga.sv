// output_fpga: the board's output stage, refining AM matches to one entry.
//
// For each voxel it
//   1. takes the full-resolution voxel from the input stage (fv_*),
//   2. after the AM event has ended (am_ev_end), collects the matched pattern
//      addresses from the AM readout into a small FIFO, stalling the readout
//      when the FIFO is full,
//   3. for each pattern reads {start, count} from pattern_list_table and
//      streams that list of full-resolution entries from the dictionary
//      memory, one request per cycle while the memory accepts,
//   4. sends every returned entry through dot_product_unit and keeps the best
//      score in argmax_unit,
//   5. when the AM readout is done and no pattern matched, streams instead the
//      whole original dictionary (orig_base, orig_count): the standard method,
//   6. when every request has come back through the pipeline, emits the result.
// Patterns are processed while the readout is still running.
//
// The flow (matched patterns -> their entry lists -> dot products -> maximum,
// and the full-dictionary fallback for a voxel without match) follows the
// paper. The FIFO, the one-voxel-at-a-time sequencing, the memory handshake
// (requests with valid/ready, in-order responses that cannot be stalled) and
// the result format are this design's own.
module output_fpga
  import puma_pkg::*;
#(
  parameter int unsigned NPAT       = 16384,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned PA_W = $clog2(NPAT)
) (
  input  logic               clk,
  input  logic               rst_n,
  // full-resolution voxel
  input  logic               fv_valid,
  input  voxel_t             fv,
  output logic               fv_ready,
  input  logic               am_ev_end,
  // AM readout
  input  logic               m_valid,
  input  logic [PA_W-1:0]    m_addr,
  output logic               m_ready,
  input  logic               m_done,
  // pattern list table load
  input  logic               lt_we,
  input  logic [PA_W-1:0]    lt_idx,
  input  logic [ADDR_W-1:0]  lt_start,
  input  logic [CNT_W-1:0]   lt_count,
  // location of the original (un-noised) dictionary
  input  logic [ADDR_W-1:0]  orig_base,
  input  logic [CNT_W-1:0]   orig_count,
  // dictionary memory read port
  output logic               mem_req_valid,
  output logic [ADDR_W-1:0]  mem_req_addr,
  input  logic               mem_req_ready,
  input  logic               mem_rsp_valid,
  input  dict_entry_t        mem_rsp_data,
  // result
  output logic               res_valid,
  output result_t            res,
  input  logic               res_ready
);

  localparam int unsigned FA_W = $clog2(FIFO_DEPTH);

  typedef enum logic [2:0] {S_IDLE, S_WAIT_END, S_RUN, S_DRAIN, S_OUT} state_e;
  state_e state;

  voxel_t             vox_q;
  logic [ADDR_W-1:0]  cur;
  logic [CNT_W-1:0]   remaining;
  logic               lookup_pend;
  logic               fallback;
  logic [15:0]        n_patterns;
  logic [CNT_W-1:0]   n_dots;
  logic [CNT_W:0]     inflight;

  // pattern FIFO
  logic [PA_W-1:0]    fifo [FIFO_DEPTH];
  logic [FA_W-1:0]    wp, rp;
  logic [FA_W:0]      fcnt;
  logic               push, pop, fempty, ffull;

  assign fempty  = (fcnt == 0);
  assign ffull   = (fcnt == (FA_W+1)'(FIFO_DEPTH));
  assign m_ready = (state == S_RUN) && !ffull;
  assign push    = m_valid && m_ready;

  // list table
  logic               lt_rd_valid;
  logic [ADDR_W-1:0]  lt_rd_start;
  logic [CNT_W-1:0]   lt_rd_count;

  pattern_list_table #(.NPAT(NPAT)) u_table (
    .clk, .rst_n,
    .wr_en (lt_we), .wr_idx (lt_idx), .wr_start (lt_start), .wr_count (lt_count),
    .rd_en (pop), .rd_idx (fifo[rp]),
    .rd_valid (lt_rd_valid), .rd_start (lt_rd_start), .rd_count (lt_rd_count)
  );

  // request issue and list walking
  logic list_active;
  logic issue;
  assign list_active   = (remaining != 0);
  assign mem_req_valid = (state == S_RUN) && list_active;
  assign mem_req_addr  = cur;
  assign issue         = mem_req_valid && mem_req_ready;
  assign pop           = (state == S_RUN) && !list_active && !lookup_pend && !fempty;

  // dot products and maximum
  logic               dp_valid;
  score_t             dp_score;
  logic [PARAM_W-1:0] dp_param;
  logic               best_valid;
  score_t             best_score;
  logic [PARAM_W-1:0] best_param;
  logic               start_vox;

  assign fv_ready  = (state == S_IDLE);
  assign start_vox = fv_valid && fv_ready;

  dot_product_unit u_dot (
    .clk, .rst_n,
    .in_valid (mem_rsp_valid), .voxel (vox_q.coef), .entry (mem_rsp_data),
    .out_valid (dp_valid), .out_score (dp_score), .out_param (dp_param)
  );

  argmax_unit u_max (
    .clk, .rst_n, .clear (start_vox),
    .in_valid (dp_valid), .in_score (dp_score), .in_param (dp_param),
    .best_valid, .best_score, .best_param
  );

  always_ff @(posedge clk) begin
    if (push) fifo[wp] <= m_addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp   <= '0;
      rp   <= '0;
      fcnt <= '0;
    end else begin
      if (push) wp <= FA_W'((int'(wp) + 1) % FIFO_DEPTH);
      if (pop)  rp <= FA_W'((int'(rp) + 1) % FIFO_DEPTH);
      fcnt <= fcnt + (FA_W+1)'(push) - (FA_W+1)'(pop);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      vox_q       <= '0;
      cur         <= '0;
      remaining   <= '0;
      lookup_pend <= 1'b0;
      fallback    <= 1'b0;
      n_patterns  <= '0;
      n_dots      <= '0;
      inflight    <= '0;
    end else begin
      inflight <= inflight + (CNT_W+1)'(issue) - (CNT_W+1)'(dp_valid);
      if (dp_valid) n_dots <= n_dots + 1'b1;
      unique case (state)
        S_IDLE: if (start_vox) begin
          vox_q       <= fv;
          remaining   <= '0;
          lookup_pend <= 1'b0;
          fallback    <= 1'b0;
          n_patterns  <= '0;
          n_dots      <= '0;
          state       <= S_WAIT_END;
        end
        S_WAIT_END: if (am_ev_end) state <= S_RUN;
        S_RUN: begin
          if (issue) begin
            cur       <= cur + 1'b1;
            remaining <= remaining - 1'b1;
          end else if (lookup_pend) begin
            if (lt_rd_valid) begin
              cur         <= lt_rd_start;
              remaining   <= lt_rd_count;
              lookup_pend <= 1'b0;
            end
          end else if (pop) begin
            lookup_pend <= 1'b1;
            n_patterns  <= n_patterns + 1'b1;
          end else if (!list_active && fempty && m_done) begin
            if (n_patterns == 0 && !fallback) begin
              fallback  <= 1'b1;
              cur       <= orig_base;
              remaining <= orig_count;
            end else begin
              state <= S_DRAIN;
            end
          end
        end
        S_DRAIN: if (inflight == 0) state <= S_OUT;
        S_OUT:   if (res_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign res_valid      = (state == S_OUT);
  assign res.id         = vox_q.id;
  assign res.param      = best_param;
  assign res.score      = best_valid ? best_score : '0;
  assign res.matched    = (n_patterns != 0);
  assign res.n_patterns = n_patterns;
  assign res.n_dots     = n_dots;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && ffull));
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_req_valid && !mem_req_ready) |=> (mem_req_valid && $stable(mem_req_addr)));
  a_no_stray_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> (state == S_RUN || state == S_DRAIN));

endmodule

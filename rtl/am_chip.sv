// am_chip: one Associative Memory chip.
//
// The bank is NCOLS columns of N_BUS (8) words. Word b of every column sits on
// input bus b and has its own comparator and hit flip-flop. While an event is
// open, every word presented on bus b is compared in the same clock cycle with
// word b of all columns; a comparator that finds equality sets its flip-flop,
// and the flip-flop stays set until the next event starts. When the event is
// closed the chip counts the set flip-flops of each pattern and declares the
// pattern matched when the count is at least the programmed threshold. A
// pattern is one column (8 words), two neighbouring columns (16 words) or four
// (32 words), chosen by grp_mode; pattern g spans columns g*n .. g*n+n-1.
// The matched patterns are then read out lowest address first, one per cycle.
//
// The column/word/bus/flip-flop structure, the threshold rule and the 1/2/4
// column grouping follow the paper. The paper says both that a pattern matches
// when the count "is greater than a predefined threshold" and that a threshold
// of 6 lets "two words of a column miss the match"; this design uses
// count >= threshold, which fits the second. The event protocol (ev_init,
// bus_valid, ev_end), the whole-column load port, the per-column "loaded" bit
// that keeps unprogrammed columns from matching and the readout handshake are
// this design's own.
//
// Timing: a word presented in cycle t sets flip-flops visible in t+1. ev_end
// must come at least one cycle after the last word. The first matched address
// appears in the cycle after ev_end, then one per accepted cycle. done rises
// the cycle after the last address is accepted (or after ev_end when nothing
// matched) and stays high until the next ev_init.
module am_chip
  import puma_pkg::*;
#(
  parameter int unsigned NCOLS = 256,
  localparam int unsigned CA_W = $clog2(NCOLS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  grp_mode_e            grp_mode,
  input  logic [THR_W-1:0]     threshold,
  // pattern bank load: one whole column per cycle
  input  logic                 wr_en,
  input  logic [CA_W-1:0]      wr_col,
  input  am_words_t            wr_words,
  // event input
  input  logic                 ev_init,    // clear all hit flip-flops
  input  logic [N_BUS-1:0]     bus_valid,  // bus b carries a word this cycle
  input  am_words_t            bus_word,
  input  logic                 ev_end,     // evaluate patterns, start readout
  // matched-pattern readout
  output logic                 rd_valid,
  output logic [CA_W-1:0]      rd_addr,    // pattern (group) address
  input  logic                 rd_ready,
  output logic                 done
);

  am_words_t            bank   [NCOLS];
  logic [NCOLS-1:0]     loaded;
  logic [N_BUS-1:0]     hit    [NCOLS];
  logic [NCOLS-1:0]     match_vec;
  logic [NCOLS-1:0]     pend;
  logic                 busy;

  // Pattern bank
  always_ff @(posedge clk) begin
    if (wr_en) bank[wr_col] <= wr_words;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      loaded <= '0;
    else if (wr_en)  loaded[wr_col] <= 1'b1;
  end

  // Comparators and hit flip-flops
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCOLS; c++) hit[c] <= '0;
    end else if (ev_init) begin
      for (int c = 0; c < NCOLS; c++) hit[c] <= '0;
    end else begin
      for (int c = 0; c < NCOLS; c++)
        for (int b = 0; b < N_BUS; b++)
          if (bus_valid[b] && loaded[c] && bank[c][b] == bus_word[b])
            hit[c][b] <= 1'b1;
    end
  end

  // Majority logic: count set flip-flops per pattern and compare with threshold
  always_comb begin
    logic [3:0] cnt [NCOLS];
    logic [5:0] sum;
    logic       all_loaded;
    for (int c = 0; c < NCOLS; c++) cnt[c] = 4'($countones(hit[c]));
    match_vec = '0;
    for (int g = 0; g < NCOLS; g++) begin
      sum = '0;
      all_loaded = 1'b0;
      unique case (grp_mode)
        GRP_1COL: begin
          sum = 6'(cnt[g]);
          all_loaded = loaded[g];
        end
        GRP_2COL: if (g < NCOLS / 2) begin
          sum = 6'(cnt[2*g]) + 6'(cnt[2*g+1]);
          all_loaded = &loaded[2*g +: 2];
        end
        GRP_4COL: if (g < NCOLS / 4) begin
          sum = 6'(cnt[4*g]) + 6'(cnt[4*g+1]) + 6'(cnt[4*g+2]) + 6'(cnt[4*g+3]);
          all_loaded = &loaded[4*g +: 4];
        end
        default: ;
      endcase
      match_vec[g] = all_loaded && (sum >= threshold);
    end
  end

  // Readout: lowest pending address first
  always_comb begin
    rd_addr = '0;
    for (int i = NCOLS - 1; i >= 0; i--)
      if (pend[i]) rd_addr = CA_W'(i);
  end
  assign rd_valid = busy && (|pend);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else if (ev_init) begin
      pend <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else if (ev_end) begin
      pend <= match_vec;
      busy <= 1'b1;
      done <= 1'b0;
    end else if (busy) begin
      if (rd_valid && rd_ready) pend[rd_addr] <= 1'b0;
      if (!(|pend)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  a_no_word_at_end: assert property (@(posedge clk) disable iff (!rst_n)
    !(ev_end && (|bus_valid)));
  a_init_end_apart: assert property (@(posedge clk) disable iff (!rst_n)
    !(ev_init && ev_end));
  a_addr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_valid && !rd_ready && !ev_init) |=> (rd_valid && $stable(rd_addr)));

endmodule

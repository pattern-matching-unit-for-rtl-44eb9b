// tb_am_chip: self-checking test of one AM chip.
//
// A 16-column chip is loaded with random words from a 4-value alphabet, so
// partial and full matches are frequent. Each event drives 1 to 3 words per
// bus, then ev_end. A reference model in the testbench keeps its own copy of
// the bank, computes which flip-flops must be set and which patterns reach the
// threshold in the selected grouping (1, 2 or 4 columns), and the readout must
// deliver exactly those addresses in ascending order. It also checks that the
// first address appears in the cycle after ev_end, that an unloaded column
// never matches, that a stalled readout holds its address, and that done
// rises after the last address.
module tb_am_chip;
  import puma_pkg::*;

  localparam int unsigned NCOLS = 16;
  localparam int unsigned CA_W  = $clog2(NCOLS);

  logic clk = 0, rst_n = 0;
  grp_mode_e grp_mode;
  logic [THR_W-1:0] threshold;
  logic wr_en;
  logic [CA_W-1:0] wr_col;
  am_words_t wr_words;
  logic ev_init, ev_end;
  logic [N_BUS-1:0] bus_valid;
  am_words_t bus_word;
  logic rd_valid, rd_ready, done;
  logic [CA_W-1:0] rd_addr;

  int checks = 0, failures = 0;
  int n_full = 0, n_partial = 0, n_none = 0;
  int mode_seen [3];

  am_chip #(.NCOLS(NCOLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  am_words_t ref_bank [NCOLS];
  logic      ref_loaded [NCOLS];
  logic [N_BUS-1:0] ref_hit [NCOLS];

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load_col(input int c, input am_words_t w);
    @(negedge clk);
    wr_en = 1; wr_col = CA_W'(c); wr_words = w;
    @(negedge clk);
    wr_en = 0;
    ref_bank[c] = w;
    ref_loaded[c] = 1;
  endtask

  task automatic run_event(input grp_mode_e mode, input int thr, input bit stall);
    int gsize, ngroups, nwords, cnt;
    int expected [$];
    int got [$];
    bit all_l;
    am_word_t w;
    grp_mode = mode;
    threshold = THR_W'(thr);
    gsize = (mode == GRP_1COL) ? 1 : (mode == GRP_2COL) ? 2 : 4;
    ngroups = NCOLS / gsize;
    @(negedge clk);
    ev_init = 1;
    for (int c = 0; c < NCOLS; c++) ref_hit[c] = '0;
    @(negedge clk);
    ev_init = 0;
    nwords = 1 + $urandom_range(0, 2);
    for (int k = 0; k < nwords; k++) begin
      for (int b = 0; b < N_BUS; b++) begin
        bus_valid[b] = ($urandom_range(0, 7) != 0);
        w = am_word_t'($urandom_range(0, 3));
        bus_word[b] = w;
        if (bus_valid[b])
          for (int c = 0; c < NCOLS; c++)
            if (ref_loaded[c] && ref_bank[c][b] == w) ref_hit[c][b] = 1;
      end
      @(negedge clk);
    end
    bus_valid = '0;
    ev_end = 1;
    for (int g = 0; g < ngroups; g++) begin
      cnt = 0;
      all_l = 1;
      for (int c = g * gsize; c < (g + 1) * gsize; c++) begin
        cnt += $countones(ref_hit[c]);
        all_l &= ref_loaded[c];
      end
      if (all_l && cnt >= thr) begin
        expected.push_back(g);
        if (cnt == 8 * gsize) n_full++; else n_partial++;
      end
    end
    if (expected.size() == 0) n_none++;
    mode_seen[int'(mode)]++;
    @(negedge clk);
    ev_end = 0;
    // cycle after ev_end: first address must be there if anything matched
    check(rd_valid == (expected.size() != 0), "rd_valid in cycle after ev_end");
    check(!done, "done low while reading out");
    for (int t = 0; t < 200 && !done; t++) begin
      if (stall && rd_valid) begin
        logic [CA_W-1:0] a;
        a = rd_addr;
        rd_ready = 0;
        @(negedge clk);
        check(rd_valid && rd_addr == a, "address held while stalled");
        rd_ready = 1;
      end
      if (rd_valid) got.push_back(int'(rd_addr));
      @(negedge clk);
    end
    check(done, "done after readout");
    check(got.size() == expected.size(), $sformatf("match count %0d vs %0d", got.size(), expected.size()));
    for (int i = 0; i < expected.size() && i < got.size(); i++)
      check(got[i] == expected[i], $sformatf("address %0d: got %0d expected %0d", i, got[i], expected[i]));
  endtask

  initial begin
    am_words_t w;
    wr_en = 0; wr_col = '0; wr_words = '0;
    ev_init = 0; ev_end = 0; bus_valid = '0; bus_word = '0;
    rd_ready = 1; grp_mode = GRP_1COL; threshold = 6'd8;
    for (int c = 0; c < NCOLS; c++) begin ref_loaded[c] = 0; ref_hit[c] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load all but column 13
    for (int c = 0; c < NCOLS; c++) begin
      if (c == 13) continue;
      for (int b = 0; b < N_BUS; b++) w[b] = am_word_t'($urandom_range(0, 3));
      load_col(c, w);
    end
    // directed: exact hit on column 2 in single-column mode
    @(negedge clk);
    ev_init = 1; @(negedge clk); ev_init = 0;
    grp_mode = GRP_1COL; threshold = 6'd8;
    bus_valid = '1; bus_word = ref_bank[2];
    @(negedge clk);
    bus_valid = '0; ev_end = 1;
    @(negedge clk);
    ev_end = 0;
    check(rd_valid, "exact match of column 2 seen one cycle after ev_end");
    while (rd_valid && rd_addr != 2) @(negedge clk);
    check(rd_valid && rd_addr == 2, "column 2 read out");
    while (!done) @(negedge clk);
    // random events in all three groupings
    for (int n = 0; n < 300; n++) begin
      grp_mode_e m;
      int thr;
      m = grp_mode_e'($urandom_range(0, 2));
      case (m)
        GRP_1COL: thr = $urandom_range(6, 8);
        GRP_2COL: thr = $urandom_range(10, 16);
        default:  thr = $urandom_range(20, 32);
      endcase
      run_event(m, thr, (n % 5) == 0);
    end
    $display("full=%0d partial=%0d none=%0d modes=%0d/%0d/%0d", n_full, n_partial, n_none,
             mode_seen[0], mode_seen[1], mode_seen[2]);
    check(n_full > 0 && n_partial > 0 && n_none > 0, "full, partial and no-match events all seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

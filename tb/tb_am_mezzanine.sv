// tb_am_mezzanine: self-checking test of a mezzanine of AM chips.
//
// Four 8-column chips are loaded through the chip-select of the write port
// with random words from a small alphabet, some columns being copied into
// several chips. Random events in the 1- and 2-column groupings are played on
// the shared buses. A reference model predicts the matched {chip, pattern}
// addresses; the merged readout must deliver exactly that set, each chip's
// addresses in ascending order, under random readout stalls, and then done.
module tb_am_mezzanine;
  import puma_pkg::*;

  localparam int unsigned NCHIPS = 4, NCOLS = 8, CA_W = 3, CH_W = 2;

  logic clk = 0, rst_n = 0;
  grp_mode_e grp_mode;
  logic [THR_W-1:0] threshold;
  logic wr_en;
  logic [CH_W-1:0] wr_chip;
  logic [CA_W-1:0] wr_col;
  am_words_t wr_words;
  logic ev_init, ev_end, rd_valid, rd_ready, done;
  logic [N_BUS-1:0] bus_valid;
  am_words_t bus_word;
  logic [CA_W+CH_W-1:0] rd_addr;

  int checks = 0, failures = 0, n_multi_chip = 0;

  am_mezzanine #(.NCHIPS(NCHIPS), .NCOLS(NCOLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  am_words_t ref_bank [NCHIPS][NCOLS];
  logic [N_BUS-1:0] ref_hit [NCHIPS][NCOLS];

  initial begin
    am_words_t w;
    int gsize, thr, cnt, nexp, ngot, last [NCHIPS], chips_hit;
    bit expm [NCHIPS][NCOLS];
    bit gotm [NCHIPS][NCOLS];
    wr_en = 0; wr_chip = '0; wr_col = '0; wr_words = '0; ev_init = 0; ev_end = 0;
    bus_valid = '0; bus_word = '0; rd_ready = 1; grp_mode = GRP_1COL; threshold = 6'd8;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCOLS; c++) begin
      for (int b = 0; b < N_BUS; b++) w[b] = am_word_t'($urandom_range(0, 2));
      for (int ch = 0; ch < NCHIPS; ch++) begin
        if (ch != 0 && $urandom_range(0, 1) == 0)
          for (int b = 0; b < N_BUS; b++) w[b] = am_word_t'($urandom_range(0, 2));
        ref_bank[ch][c] = w;
        wr_en = 1; wr_chip = CH_W'(ch); wr_col = CA_W'(c); wr_words = w;
        @(negedge clk);
      end
    end
    wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      grp_mode = (n % 2 == 0) ? GRP_1COL : GRP_2COL;
      gsize = (n % 2 == 0) ? 1 : 2;
      thr = (gsize == 1) ? $urandom_range(6, 8) : $urandom_range(12, 16);
      threshold = THR_W'(thr);
      ev_init = 1;
      for (int ch = 0; ch < NCHIPS; ch++) for (int c = 0; c < NCOLS; c++) begin
        ref_hit[ch][c] = '0; expm[ch][c] = 0; gotm[ch][c] = 0;
      end
      @(negedge clk);
      ev_init = 0;
      for (int k = 0; k < 2; k++) begin
        for (int b = 0; b < N_BUS; b++) begin
          bus_valid[b] = 1;
          bus_word[b] = am_word_t'($urandom_range(0, 2));
          for (int ch = 0; ch < NCHIPS; ch++) for (int c = 0; c < NCOLS; c++)
            if (ref_bank[ch][c][b] == bus_word[b]) ref_hit[ch][c][b] = 1;
        end
        @(negedge clk);
      end
      bus_valid = '0;
      ev_end = 1;
      nexp = 0; chips_hit = 0;
      for (int ch = 0; ch < NCHIPS; ch++) begin
        bit any;
        any = 0;
        for (int g = 0; g < NCOLS / gsize; g++) begin
          cnt = 0;
          for (int c = g * gsize; c < (g + 1) * gsize; c++) cnt += $countones(ref_hit[ch][c]);
          if (cnt >= thr) begin expm[ch][g] = 1; nexp++; any = 1; end
        end
        if (any) chips_hit++;
        last[ch] = -1;
      end
      if (chips_hit > 1) n_multi_chip++;
      @(negedge clk);
      ev_end = 0;
      ngot = 0;
      for (int t = 0; t < 300 && !done; t++) begin
        rd_ready = ($urandom_range(0, 2) != 0);
        #1;
        if (rd_valid && rd_ready) begin
          int ch, g;
          ch = int'(rd_addr[CA_W+CH_W-1 -: CH_W]);
          g = int'(rd_addr[CA_W-1:0]);
          check(expm[ch][g] && !gotm[ch][g], $sformatf("event %0d: chip %0d pattern %0d expected once", n, ch, g));
          check(g > last[ch], "ascending order within a chip");
          last[ch] = g;
          gotm[ch][g] = 1;
          ngot++;
        end
        @(negedge clk);
      end
      check(done, "done after readout");
      check(ngot == nexp, $sformatf("event %0d: %0d of %0d matches read out", n, ngot, nexp));
    end
    check(n_multi_chip > 0, "events matching in several chips at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

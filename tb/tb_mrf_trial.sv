// tb_mrf_trial: the T1/T2 reconstruction workload on the default board.
//
// The board is used at its default size (64 chips of 256 columns) and loaded
// with 6000 two-column patterns, the pattern count of the T1/T2 brain trial,
// spread over all 64 chips. The patterns and their entry lists are synthetic:
// random bin vectors with 1 to 4 full-resolution entries each (the trial's
// lists hold up to 45000 entries, far too many to simulate), and an original
// dictionary of 512 random entries for the fallback. 300 voxels follow the
// trial's mix of outcomes: most derive from a pattern with 0 to 3 components
// moved by one bin (full match, partial match at 14 of 16 words, or no match),
// the rest are unrelated (no match). Every result is checked against a
// reference model; at the end the matched fraction and the number of dot
// products are printed next to what the exhaustive search would need.
module tb_mrf_trial;
  import puma_pkg::*;

  localparam int N_MEZZ = 4, CPM = 16, NCOLS = 256;
  localparam int PA_W = $clog2(NCOLS) + $clog2(CPM) + $clog2(N_MEZZ);
  localparam int NVOX = 300;
  localparam int WATCHDOG = 2000000;

  puma_board dut (.*);

  logic clk = 0, rst_n = 0;
  logic vox_valid, vox_ready, res_valid, res_ready;
  voxel_t vox;
  result_t res;
  logic bin_cfg_we;
  logic [$clog2(N_COMP)-1:0] bin_cfg_idx;
  comp_t bin_cfg_min;
  logic [15:0] bin_cfg_scale;
  grp_mode_e grp_mode;
  logic [THR_W-1:0] threshold;
  logic am_wr_en, lt_we;
  logic [PA_W-1:0] am_wr_addr, lt_idx;
  am_words_t am_wr_words;
  logic [ADDR_W-1:0] lt_start, orig_base;
  logic [CNT_W-1:0] lt_count, orig_count;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [ADDR_W-1:0] mem_req_addr;
  dict_entry_t mem_rsp_data;
  logic mwr_en;
  logic [ADDR_W-1:0] mwr_addr;
  dict_entry_t mwr_data;

  int checks = 0, failures = 0;
  int n_full = 0, n_partial = 0, n_multi = 0, n_fallback = 0, n_stall = 0, n_mem_stall = 0;
  int n_chips_multi = 0;
  longint tot_dots = 0;

  dict_mem_model #(.DEPTH(32768), .LATENCY(4), .STALL(1)) u_mem (
    .clk, .rst_n, .wr_en (mwr_en), .wr_addr (mwr_addr), .wr_data (mwr_data),
    .req_valid (mem_req_valid), .req_addr (mem_req_addr), .req_ready (mem_req_ready),
    .rsp_valid (mem_rsp_valid), .rsp_data (mem_rsp_data)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // readout stalled because the output stage's pattern FIFO is full
  always @(posedge clk) begin
    if (dut.m_valid && !dut.m_ready && dut.fv_ready == 1'b0) n_stall++;
    if (mem_req_valid && !mem_req_ready) n_mem_stall++;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int LO = -1600, RG = 3200;
  localparam int SC = (N_BINS * 65536) / RG;
  localparam int NP = 6000;         // patterns loaded, as in the trial
  localparam int THR = 14;          // two of the 16 words may miss
  localparam int ORIG_N = 512;      // original dictionary entries (scaled down)

  function automatic int ref_bin(input int x);
    longint q;
    if (x < LO) return 0;
    q = (longint'(x - LO) * SC) >>> 16;
    return (q > N_BINS - 1) ? N_BINS - 1 : int'(q);
  endfunction

  function automatic int val_in_bin(input int b);
    int x;
    x = LO + ((2 * b + 1) * RG) / 30 + $urandom_range(0, 100) - 50;
    while (ref_bin(x) < b) x++;
    while (ref_bin(x) > b) x--;
    return x;
  endfunction

  function automatic logic [127:0] ref_score(input cvec_t x, input cvec_t d);
    longint sr, si;
    logic signed [127:0] a, b;
    sr = 0; si = 0;
    for (int i = 0; i < N_COEF; i++) begin
      sr += longint'(d[i].re) * longint'(x[i].re) + longint'(d[i].im) * longint'(x[i].im);
      si += longint'(d[i].re) * longint'(x[i].im) - longint'(d[i].im) * longint'(x[i].re);
    end
    a = 128'(sr);
    b = 128'(si);
    return a * a + b * b;
  endfunction

  int pbin [NP][N_COMP];
  int p_mz [NP], p_ch [NP], p_g [NP];
  int l_start [NP], l_count [NP];
  dict_entry_t dict [32768];

  function automatic cvec_t vec_from_bins(input int b [N_COMP]);
    cvec_t c;
    for (int i = 0; i < N_COEF; i++) begin
      c[i].re = comp_t'(val_in_bin(b[2*i]));
      c[i].im = comp_t'(val_in_bin(b[2*i+1]));
    end
    return c;
  endfunction

  task automatic put_entry(input int a, input cvec_t c, input int param);
    dict[a].coef = c;
    dict[a].param = PARAM_W'(param);
    mwr_en = 1; mwr_addr = ADDR_W'(a); mwr_data = dict[a];
    @(negedge clk);
    mwr_en = 0;
  endtask

  initial begin
    int next, vb [N_COMP], hits, nmatch, ndots, best_p, t0, kind, p, exp_pat [NP], nchips;
    logic [127:0] best_s, s;
    bit bv;
    voxel_t v;
    vox_valid = 0; vox = '0; res_ready = 0;
    bin_cfg_we = 0; bin_cfg_idx = '0; bin_cfg_min = '0; bin_cfg_scale = '0;
    grp_mode = GRP_2COL; threshold = THR_W'(THR);
    am_wr_en = 0; am_wr_addr = '0; am_wr_words = '0;
    lt_we = 0; lt_idx = '0; lt_start = '0; lt_count = '0;
    mwr_en = 0; mwr_addr = '0; mwr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // binning bounds
    for (int k = 0; k < N_COMP; k++) begin
      bin_cfg_we = 1; bin_cfg_idx = 4'(k); bin_cfg_min = comp_t'(LO); bin_cfg_scale = 16'(SC);
      @(negedge clk);
    end
    bin_cfg_we = 0;
    // patterns: 0..7 random, 8..11 differ from pattern 0 in one component each
    for (int q = 0; q < NP; q++) begin
      for (int k = 0; k < N_COMP; k++) pbin[q][k] = $urandom_range(0, N_BINS - 1);
      p_mz[q] = (q % (N_MEZZ * CPM)) / CPM;
      p_ch[q] = q % CPM;
      p_g[q]  = q / (N_MEZZ * CPM);
    end
    // AM bank: column 2g real parts, column 2g+1 imaginary parts
    for (int q = 0; q < NP; q++)
      for (int h = 0; h < 2; h++) begin
        am_wr_en = 1;
        am_wr_addr = PA_W'((p_mz[q] * CPM + p_ch[q]) * NCOLS + 2 * p_g[q] + h);
        for (int i = 0; i < N_BUS; i++) am_wr_words[i] = am_word(2*i + h, bin_t'(pbin[q][2*i + h]));
        @(negedge clk);
      end
    am_wr_en = 0;
    // dictionary: original entries first, then the list of every pattern
    for (int a = 0; a < ORIG_N; a++) begin
      for (int k = 0; k < N_COMP; k++) vb[k] = $urandom_range(0, N_BINS - 1);
      put_entry(a, vec_from_bins(vb), 100000 + a);
    end
    next = ORIG_N;
    for (int q = 0; q < NP; q++) begin
      l_start[q] = next;
      l_count[q] = $urandom_range(1, 4);
      for (int e = 0; e < l_count[q]; e++) begin
        for (int k = 0; k < N_COMP; k++) vb[k] = pbin[q][k];
        put_entry(next, vec_from_bins(vb), q * 100 + e);
        next++;
      end
      lt_we = 1;
      lt_idx = PA_W'((p_mz[q] * CPM + p_ch[q]) * NCOLS + p_g[q]);
      lt_start = ADDR_W'(l_start[q]); lt_count = CNT_W'(l_count[q]);
      @(negedge clk);
    end
    lt_we = 0;
    orig_base = '0; orig_count = CNT_W'(ORIG_N);
    // voxels
    for (int n = 0; n < NVOX; n++) begin
      kind = (n % 10 < 3) ? 2 : (n % 10 < 6) ? 0 : 1;
      p = $urandom_range(0, NP - 1);
      for (int k = 0; k < N_COMP; k++) vb[k] = pbin[p][k];
      if (kind == 1) begin               // 1 to 3 components one bin off
        int nmove, k1;
        nmove = $urandom_range(1, 3);
        for (int j = 0; j < nmove; j++) begin
          k1 = (n + 5 * j) % N_COMP;
          vb[k1] = (vb[k1] == N_BINS - 1) ? vb[k1] - 1 : vb[k1] + 1;
        end
      end
      if (kind == 2)                     // unrelated voxel
        for (int k = 0; k < N_COMP; k++) vb[k] = $urandom_range(0, N_BINS - 1);
      v.coef = vec_from_bins(vb);
      v.id = VOX_W'(n);
      // reference: matched patterns and the best entry
      nmatch = 0; ndots = 0; bv = 0; best_s = 0; best_p = 0;
      for (int q = 0; q < NP; q++) begin
        hits = 0;
        for (int k = 0; k < N_COMP; k++) if (ref_bin(k % 2 == 0 ? int'(v.coef[k/2].re) : int'(v.coef[k/2].im)) == pbin[q][k]) hits++;
        exp_pat[q] = (hits >= THR);
        if (exp_pat[q]) begin
          nmatch++;
          for (int a = l_start[q]; a < l_start[q] + l_count[q]; a++) begin
            s = ref_score(v.coef, dict[a].coef);
            ndots++;
            if (!bv || s > best_s) begin bv = 1; best_s = s; best_p = int'(dict[a].param); end
          end
        end
      end
      if (nmatch == 0)
        for (int a = 0; a < ORIG_N; a++) begin
          s = ref_score(v.coef, dict[a].coef);
          ndots++;
          if (!bv || s > best_s) begin bv = 1; best_s = s; best_p = int'(dict[a].param); end
        end
      nchips = 0;
      for (int q = 0; q < NP; q++) if (exp_pat[q]) nchips++;
      // run it
      vox = v; vox_valid = 1;
      #1;
      while (!vox_ready) begin @(negedge clk); #1; end
      t0 = $time;
      @(negedge clk);
      vox_valid = 0;
      res_ready = 1;
      for (int t = 0; t < 5000 && !res_valid; t++) @(negedge clk);
      check(res_valid, $sformatf("voxel %0d: result", n));
      check(res.id == v.id, "voxel id");
      check(int'(res.n_patterns) == nmatch, $sformatf("voxel %0d kind %0d: %0d patterns, expected %0d", n, kind, res.n_patterns, nmatch));
      check(res.matched == (nmatch != 0), "matched flag");
      check(int'(res.n_dots) == ndots, $sformatf("voxel %0d: %0d dot products, expected %0d", n, res.n_dots, ndots));
      check(128'(res.score) == best_s && int'(res.param) == best_p,
            $sformatf("voxel %0d: best entry %0d, expected %0d", n, res.param, best_p));
      if (kind == 0 && nmatch > 0) n_full++;
      if (kind == 1 && nmatch > 0) n_partial++;
      tot_dots += ndots;
      if (nmatch > 1) n_multi++;
      if (nmatch == 0) n_fallback++;
      if (nchips > 1) n_chips_multi++;
      @(negedge clk);
      res_ready = 0;
    end
    $display("full=%0d partial=%0d multi=%0d fallback=%0d readout_stall=%0d mem_stall=%0d",
             n_full, n_partial, n_multi, n_fallback, n_stall, n_mem_stall);
    $display("voxels matched: %0d of %0d; dot products: %0d, exhaustive search over the %0d noised entries: %0d",
             NVOX - n_fallback, NVOX, tot_dots, next - ORIG_N, NVOX * (next - ORIG_N));
    check(n_full > 0, "full match happened");
    check(n_partial > 0, "partial match happened");
    check(n_fallback > 0, "no-match fallback to the full dictionary happened");
    check(n_mem_stall > 0, "dictionary memory stalled requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_output_fpga: self-checking test of the output stage.
//
// A 1024-entry dictionary memory model (random stalls, latency 4) holds an
// original dictionary of 64 entries at address 0 and pattern lists behind it.
// 32 of the 64 pattern addresses get a list of 0 to 12 entries. For each
// voxel the testbench plays the AM readout itself: a random set of pattern
// addresses, sent at random times, then done; sometimes none, which must make
// the stage scan the original dictionary. The result (best tissue index,
// score, matched flag, pattern and dot-product counts) is compared with a
// reference that walks the same lists. The FIFO is only 4 deep so that the
// readout stall is exercised; both it and the fallback are counted.
module tb_output_fpga;
  import puma_pkg::*;

  localparam int unsigned NPAT = 64, PA_W = 6;
  localparam int ORIG_N = 64;

  logic clk = 0, rst_n = 0;
  logic fv_valid, fv_ready, am_ev_end;
  voxel_t fv;
  logic m_valid, m_ready, m_done;
  logic [PA_W-1:0] m_addr;
  logic lt_we;
  logic [PA_W-1:0] lt_idx;
  logic [ADDR_W-1:0] lt_start, orig_base;
  logic [CNT_W-1:0] lt_count, orig_count;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [ADDR_W-1:0] mem_req_addr;
  dict_entry_t mem_rsp_data;
  logic res_valid, res_ready;
  result_t res;
  logic mwr_en;
  logic [ADDR_W-1:0] mwr_addr;
  dict_entry_t mwr_data;

  int checks = 0, failures = 0;
  int n_fallback = 0, n_matched = 0, n_fifo_stall = 0, n_mem_stall = 0, n_empty_list = 0;

  output_fpga #(.NPAT(NPAT), .FIFO_DEPTH(4)) dut (.*);

  dict_mem_model #(.DEPTH(1024), .LATENCY(4), .STALL(1)) u_mem (
    .clk, .rst_n, .wr_en (mwr_en), .wr_addr (mwr_addr), .wr_data (mwr_data),
    .req_valid (mem_req_valid), .req_addr (mem_req_addr), .req_ready (mem_req_ready),
    .rsp_valid (mem_rsp_valid), .rsp_data (mem_rsp_data)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (m_valid && !m_ready) n_fifo_stall++;
    if (mem_req_valid && !mem_req_ready) n_mem_stall++;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  dict_entry_t dict [1024];
  int l_start [NPAT], l_count [NPAT];

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

  initial begin
    dict_entry_t e;
    voxel_t v;
    int next, np, pats [16], ndots, best_p;
    logic [127:0] best_s, s;
    bit bv;
    fv_valid = 0; fv = '0; am_ev_end = 0; m_valid = 0; m_addr = '0; m_done = 0;
    lt_we = 0; lt_idx = '0; lt_start = '0; lt_count = '0; res_ready = 0;
    orig_base = '0; orig_count = CNT_W'(ORIG_N);
    mwr_en = 0; mwr_addr = '0; mwr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // dictionary contents
    for (int a = 0; a < 1024; a++) begin
      for (int i = 0; i < N_COEF; i++) begin
        e.coef[i].re = comp_t'($urandom_range(0, 4000) - 2000);
        e.coef[i].im = comp_t'($urandom_range(0, 4000) - 2000);
      end
      e.param = PARAM_W'(a * 7 + 3);
      dict[a] = e;
      mwr_en = 1; mwr_addr = ADDR_W'(a); mwr_data = e;
      @(negedge clk);
    end
    mwr_en = 0;
    // pattern lists: even pattern addresses get a list
    next = ORIG_N;
    for (int p = 0; p < NPAT; p++) begin
      l_start[p] = 0; l_count[p] = 0;
      if (p % 2 == 0) begin
        l_start[p] = next;
        l_count[p] = $urandom_range(0, 12);
        if (l_count[p] == 0) n_empty_list++;
        next += l_count[p];
        lt_we = 1; lt_idx = PA_W'(p); lt_start = ADDR_W'(l_start[p]); lt_count = CNT_W'(l_count[p]);
        @(negedge clk);
      end
    end
    lt_we = 0;
    for (int n = 0; n < 150; n++) begin
      // voxel
      for (int i = 0; i < N_COEF; i++) begin
        v.coef[i].re = comp_t'($urandom_range(0, 4000) - 2000);
        v.coef[i].im = comp_t'($urandom_range(0, 4000) - 2000);
      end
      v.id = VOX_W'(n);
      np = (n % 5 == 0) ? 0 : $urandom_range(1, 10);
      for (int k = 0; k < np; k++) pats[k] = $urandom_range(0, NPAT - 1);
      // reference
      bv = 0; best_s = 0; best_p = 0; ndots = 0;
      if (np == 0) begin
        for (int a = 0; a < ORIG_N; a++) begin
          s = ref_score(v.coef, dict[a].coef);
          ndots++;
          if (!bv || s > best_s) begin bv = 1; best_s = s; best_p = int'(dict[a].param); end
        end
      end else begin
        for (int k = 0; k < np; k++)
          for (int a = l_start[pats[k]]; a < l_start[pats[k]] + l_count[pats[k]]; a++) begin
            s = ref_score(v.coef, dict[a].coef);
            ndots++;
            if (!bv || s > best_s) begin bv = 1; best_s = s; best_p = int'(dict[a].param); end
          end
      end
      // hand over the voxel
      fv = v; fv_valid = 1;
      #1;
      check(fv_ready, "output stage idle between voxels");
      @(negedge clk);
      fv_valid = 0;
      @(negedge clk);
      am_ev_end = 1;
      @(negedge clk);
      am_ev_end = 0;
      // AM readout
      for (int k = 0; k < np; k++) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        m_valid = 1; m_addr = PA_W'(pats[k]);
        #1;
        while (!m_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        m_valid = 0;
      end
      m_done = 1;
      // result
      res_ready = 1;
      for (int t = 0; t < 3000 && !res_valid; t++) @(negedge clk);
      check(res_valid, "result produced");
      check(res.id == v.id, "voxel id");
      check(res.matched == (np != 0), "matched flag");
      check(int'(res.n_patterns) == np, $sformatf("voxel %0d patterns %0d vs %0d", n, res.n_patterns, np));
      check(int'(res.n_dots) == ndots, $sformatf("voxel %0d dots %0d vs %0d", n, res.n_dots, ndots));
      check(128'(res.score) == best_s && (!bv || int'(res.param) == best_p),
            $sformatf("voxel %0d best param %0d vs %0d", n, res.param, best_p));
      if (np == 0) n_fallback++; else n_matched++;
      @(negedge clk);
      res_ready = 0;
      m_done = 0;
      check(!res_valid, "result taken");
    end
    $display("fallback=%0d matched=%0d fifo_stall=%0d mem_stall=%0d empty_lists=%0d",
             n_fallback, n_matched, n_fifo_stall, n_mem_stall, n_empty_list);
    check(n_fallback > 0, "full-dictionary fallback exercised");
    check(n_fifo_stall > 0, "readout stalled by a full FIFO");
    check(n_mem_stall > 0, "memory backpressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

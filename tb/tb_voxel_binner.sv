// tb_voxel_binner: self-checking test of the component binning.
//
// Each of the 16 components gets its own random lower bound and range; the
// scale is derived as floor(15 * 2^16 / range). Random voxels, including
// values below the lower bound and above the range, are binned and compared
// with an integer reference computed in the testbench. Checks the
// one-cycle latency and that all 15 bins, bin 0 from clamping and the last
// bin from clamping are reached.
module tb_voxel_binner;
  import puma_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_we;
  logic [$clog2(N_COMP)-1:0] cfg_idx;
  comp_t cfg_min;
  logic [15:0] cfg_scale;
  logic in_valid, out_valid;
  cvec_t in_coef;
  bins_t out_bins;

  int checks = 0, failures = 0;
  int bin_hist [N_BINS];
  int n_low = 0, n_high = 0;

  voxel_binner dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int lo [N_COMP], sc [N_COMP], rg [N_COMP];

  function automatic int ref_bin(input int x, input int k);
    longint d, q;
    d = x - lo[k];
    if (d < 0) return 0;
    q = (d * sc[k]) >>> 16;
    if (q > N_BINS - 1) return N_BINS - 1;
    return int'(q);
  endfunction

  initial begin
    int x [N_COMP];
    int e;
    cfg_we = 0; cfg_idx = '0; cfg_min = '0; cfg_scale = '0; in_valid = 0; in_coef = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < N_COMP; k++) begin
      rg[k] = $urandom_range(200, 40000);
      lo[k] = $urandom_range(0, 20000) - 10000 - rg[k] / 2;
      sc[k] = (N_BINS * 65536) / rg[k];
      @(negedge clk);
      cfg_we = 1; cfg_idx = 4'(k); cfg_min = comp_t'(lo[k]); cfg_scale = 16'(sc[k]);
    end
    @(negedge clk);
    cfg_we = 0;
    for (int n = 0; n < 2000; n++) begin
      for (int k = 0; k < N_COMP; k++) begin
        x[k] = lo[k] - rg[k] / 8 + $urandom_range(0, rg[k] + rg[k] / 4);
        if (x[k] > 32767) x[k] = 32767;
        if (x[k] < -32768) x[k] = -32768;
      end
      for (int i = 0; i < N_COEF; i++) begin
        in_coef[i].re = comp_t'(x[2*i]);
        in_coef[i].im = comp_t'(x[2*i+1]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      check(out_valid, "out_valid one cycle after in_valid");
      for (int k = 0; k < N_COMP; k++) begin
        e = ref_bin(x[k], k);
        check(int'(out_bins[k]) == e, $sformatf("component %0d value %0d: bin %0d expected %0d", k, x[k], out_bins[k], e));
        bin_hist[e]++;
        if (x[k] < lo[k]) n_low++;
        if (x[k] >= lo[k] + rg[k]) n_high++;
      end
      if (n % 2 == 1) begin
        @(negedge clk);
        check(!out_valid, "out_valid drops without input");
      end
    end
    for (int b = 0; b < N_BINS; b++) check(bin_hist[b] > 0, $sformatf("bin %0d reached", b));
    check(n_low > 0 && n_high > 0, "clamping below and above exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

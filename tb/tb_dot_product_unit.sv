// tb_dot_product_unit: self-checking test of the complex dot product.
//
// Random voxels and entries, full-range and small, are streamed one per cycle
// with random gaps. The reference |sum conj(d_i) x_i|^2 is computed with
// 64-bit integers for the real and imaginary sums and a 128-bit square sum.
// Checks the 3-cycle latency, the score and the parameter index carried along.
module tb_dot_product_unit;
  import puma_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  cvec_t voxel;
  dict_entry_t entry;
  score_t out_score;
  logic [PARAM_W-1:0] out_param;

  int checks = 0, failures = 0, n_out = 0;

  dot_product_unit dut (.*);

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

  // expected results by issue cycle
  logic [127:0] exp_score [0:4095];
  int           exp_param [0:4095];
  bit           exp_v     [0:4095];

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
    int amp;
    in_valid = 0; voxel = '0; entry = '0;
    for (int t = 0; t < 4096; t++) exp_v[t] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      in_valid = ($urandom_range(0, 3) != 0);
      amp = (t % 3 == 0) ? 32767 : 300;
      for (int i = 0; i < N_COEF; i++) begin
        voxel[i].re = comp_t'($urandom_range(0, 2 * amp) - amp);
        voxel[i].im = comp_t'($urandom_range(0, 2 * amp) - amp);
        entry.coef[i].re = comp_t'($urandom_range(0, 2 * amp) - amp);
        entry.coef[i].im = comp_t'($urandom_range(0, 2 * amp) - amp);
      end
      if (t == 5) begin   // extreme corner: all -32768
        for (int i = 0; i < N_COEF; i++) begin
          voxel[i] = '{re: -32768, im: -32768};
          entry.coef[i] = '{re: -32768, im: 32767};
        end
      end
      entry.param = PARAM_W'($urandom);
      exp_v[t] = in_valid;
      exp_score[t] = ref_score(voxel, entry.coef);
      exp_param[t] = int'(entry.param);
      @(negedge clk);
      if (t >= 3) begin
        check(out_valid == exp_v[t-2], $sformatf("out_valid three cycles after in_valid (t=%0d)", t));
        if (exp_v[t-2] && out_valid) begin
          check(128'(out_score) == exp_score[t-2], $sformatf("score at t=%0d", t));
          check(int'(out_param) == exp_param[t-2], "parameter index carried");
          n_out++;
        end
      end
    end
    check(n_out > 1000, "enough results compared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

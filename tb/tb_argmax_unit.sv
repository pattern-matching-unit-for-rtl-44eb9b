// tb_argmax_unit: self-checking test of the running maximum.
//
// Voxels of random length, with random gaps and many tied scores, are fed to
// the unit; a clear starts each voxel, sometimes together with its first
// score. After each voxel the best score and the parameter index of the
// first entry reaching it must match a reference; a cleared unit without
// scores must report best_valid low.
module tb_argmax_unit;
  import puma_pkg::*;

  logic clk = 0, rst_n = 0;
  logic clear, in_valid, best_valid;
  score_t in_score, best_score;
  logic [PARAM_W-1:0] in_param, best_param;

  int checks = 0, failures = 0, n_ties = 0, n_same_cycle = 0;

  argmax_unit dut (.*);

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

  initial begin
    int len, best_s, best_p, s;
    bit bv;
    clear = 0; in_valid = 0; in_score = '0; in_param = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 500; v++) begin
      len = $urandom_range(0, 30);
      bv = 0; best_s = 0; best_p = 0;
      clear = 1;
      if (len > 0 && (v % 3 == 0)) begin
        // first score arrives together with clear
        s = $urandom_range(0, 20);
        in_valid = 1; in_score = score_t'(s); in_param = PARAM_W'(1000 + v);
        bv = 1; best_s = s; best_p = 1000 + v;
        len--;
        n_same_cycle++;
      end
      @(negedge clk);
      clear = 0; in_valid = 0;
      for (int k = 0; k < len; k++) begin
        if ($urandom_range(0, 3) == 0) @(negedge clk);
        s = $urandom_range(0, 20);
        in_valid = 1; in_score = score_t'(s); in_param = PARAM_W'($urandom_range(0, 200000));
        if (bv && s == best_s) n_ties++;
        if (!bv || s > best_s) begin bv = 1; best_s = s; best_p = int'(in_param); end
        @(negedge clk);
        in_valid = 0;
      end
      check(best_valid == bv, "best_valid");
      if (bv) check(best_score == score_t'(best_s) && best_param == PARAM_W'(best_p),
                    $sformatf("voxel %0d best %0d/%0d got %0d/%0d", v, best_s, best_p, best_score, best_param));
    end
    check(n_ties > 0 && n_same_cycle > 0, "ties and clear-with-score exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

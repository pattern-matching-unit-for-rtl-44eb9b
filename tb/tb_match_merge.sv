// tb_match_merge: self-checking test of the readout merge.
//
// Three behavioural sources each hold a random queue of addresses, present the
// head with valid, drop it on ready and raise done when empty. The output is
// stalled at random. The test checks that every address comes out exactly
// once, tagged with its source index, in source order; that a stalled output
// holds its value; that out_done rises only when everything has been
// delivered; and that with all sources busy no source is served twice in a
// row (round robin).
module tb_match_merge;
  localparam int unsigned N = 3, IN_W = 4, IDX_W = 2, OUT_W = IN_W + IDX_W;

  logic clk = 0, rst_n = 0, ev_init = 0;
  logic [N-1:0] in_valid, in_ready, in_done;
  logic [IN_W-1:0] in_addr [N];
  logic out_valid, out_ready, out_done;
  logic [OUT_W-1:0] out_addr;

  int checks = 0, failures = 0, n_stall = 0, n_rr = 0;

  match_merge #(.N(N), .IN_W(IN_W)) dut (.*);

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

  // per-source address lists: entries head..len-1 are still to be sent
  int src_data [N][64];
  int head [N], len [N], exp_head [N];

  for (genvar i = 0; i < N; i++) begin : g_src
    assign in_addr[i] = (head[i] < len[i]) ? IN_W'(src_data[i][head[i] % 64]) : '0;
  end

  task automatic drive_src();
    for (int i = 0; i < N; i++) begin
      in_valid[i] = (head[i] < len[i]);
      in_done[i]  = (head[i] >= len[i]);
    end
  endtask

  initial begin
    int total, got, last_src, src, busy_all;
    logic [OUT_W-1:0] held;
    logic held_v;
    logic [N-1:0] pop_now;
    out_ready = 0;
    for (int i = 0; i < N; i++) begin head[i] = 0; len[i] = 0; exp_head[i] = 0; end
    drive_src();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      total = 0;
      for (int i = 0; i < N; i++) begin
        int n;
        n = (round == 0) ? 10 : $urandom_range(0, 8);
        head[i] = 0;
        exp_head[i] = 0;
        len[i] = n;
        for (int k = 0; k < n; k++) src_data[i][k] = $urandom_range(0, 15);
        total += n;
      end
      drive_src();
      got = 0;
      last_src = -1;
      held_v = 0;
      for (int t = 0; t < 500 && !(out_done && got == total); t++) begin
        if (held_v) begin
          check(out_valid && out_addr == held, "output held while stalled");
          n_stall++;
        end
        out_ready = ($urandom_range(0, 3) != 0);
        #1;
        for (int i = 0; i < N; i++) pop_now[i] = in_valid[i] && in_ready[i];
        busy_all = (head[0] < len[0]) && (head[1] < len[1]) && (head[2] < len[2]);
        held_v = out_valid && !out_ready;
        held = out_addr;
        if (out_valid && out_ready) begin
          src = int'(out_addr[OUT_W-1 -: IDX_W]);
          check(src < N, "source index in range");
          if (src < N) begin
            check(exp_head[src] < len[src], "no extra address");
            if (exp_head[src] < len[src]) begin
              check(int'(out_addr[IN_W-1:0]) == src_data[src][exp_head[src]], $sformatf("address and order per source t=%0t src=%0d got %0d exp %0d", $time, src, out_addr[IN_W-1:0], src_data[src][exp_head[src]]));
              exp_head[src]++;
            end
          end
          got++;
        end
        if (out_done) check(got == total, "done only when all delivered");
        @(posedge clk);
        #1;
        // source side: the item granted in this cycle leaves the queue
        for (int i = 0; i < N; i++)
          if (pop_now[i]) begin
            if (busy_all && last_src == i) check(0, "round robin: same source twice while all busy");
            else if (busy_all) n_rr++;
            last_src = i;
            head[i]++;
          end
        drive_src();
        @(negedge clk);
      end
      check(got == total, $sformatf("all %0d addresses delivered (%0d)", total, got));
      check(out_done, "out_done after round");
    end
    check(n_stall > 0, "output stalls exercised");
    check(n_rr > 0, "round robin exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

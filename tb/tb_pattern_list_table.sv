// tb_pattern_list_table: self-checking test of the pattern -> list table.
//
// A 256-entry table is written at random indices with random {start, count};
// reads at random indices must return what was last written there one cycle
// later, and an index never written must read as an empty list.
module tb_pattern_list_table;
  import puma_pkg::*;

  localparam int unsigned NPAT = 256;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en, rd_valid;
  logic [7:0] wr_idx, rd_idx;
  logic [ADDR_W-1:0] wr_start, rd_start;
  logic [CNT_W-1:0] wr_count, rd_count;

  int checks = 0, failures = 0, n_empty = 0, n_full = 0;

  pattern_list_table #(.NPAT(NPAT)) dut (.*);

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

  int ref_start [NPAT], ref_count [NPAT];
  bit ref_w [NPAT];

  initial begin
    int i;
    wr_en = 0; rd_en = 0; wr_idx = '0; rd_idx = '0; wr_start = '0; wr_count = '0;
    for (int k = 0; k < NPAT; k++) ref_w[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      wr_en = ($urandom_range(0, 2) == 0);
      wr_idx = 8'($urandom_range(0, NPAT - 1));
      wr_start = ADDR_W'($urandom);
      wr_count = CNT_W'($urandom_range(1, 45000));
      rd_en = 1;
      rd_idx = 8'($urandom_range(0, NPAT - 1));
      i = int'(rd_idx);
      if (wr_en && wr_idx == rd_idx) rd_en = 0;   // no read-during-write to the same entry
      @(negedge clk);
      if (rd_en) begin
        check(rd_valid, "rd_valid one cycle after rd_en");
        if (ref_w[i]) begin
          check(rd_start == ADDR_W'(ref_start[i]) && rd_count == CNT_W'(ref_count[i]), $sformatf("entry %0d", i));
          n_full++;
        end else begin
          check(rd_count == 0, $sformatf("unwritten entry %0d reads empty", i));
          n_empty++;
        end
      end else begin
        check(!rd_valid, "no rd_valid without rd_en");
      end
      if (wr_en) begin
        ref_w[int'(wr_idx)] = 1;
        ref_start[int'(wr_idx)] = int'(wr_start);
        ref_count[int'(wr_idx)] = int'(wr_count);
      end
    end
    check(n_empty > 0 && n_full > 0, "written and unwritten entries read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

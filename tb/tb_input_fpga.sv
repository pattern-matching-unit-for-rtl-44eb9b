// tb_input_fpga: self-checking test of the input stage.
//
// Bins are configured so that bin = floor((x + 1600) / 213.33..) clamped to
// 0..14 (range -1600..1600). Random voxels are offered while the output stage
// randomly withholds fv_ready. For every accepted voxel the test checks the
// pass-through of the full-resolution voxel, and then cycle by cycle the AM
// event: ev_init in the next cycle, bus i carrying {2i, bin} and then
// {2i+1, bin}, ev_end, and the return to idle; that is 5 cycles per voxel.
// It also checks that no voxel is accepted while fv_ready is low or while an
// event is being played.
module tb_input_fpga;
  import puma_pkg::*;

  logic clk = 0, rst_n = 0;
  logic vox_valid, vox_ready;
  voxel_t vox, fv;
  logic cfg_we;
  logic [$clog2(N_COMP)-1:0] cfg_idx;
  comp_t cfg_min;
  logic [15:0] cfg_scale;
  logic fv_valid, fv_ready;
  logic ev_init, ev_end;
  logic [N_BUS-1:0] bus_valid;
  am_words_t bus_word;

  int checks = 0, failures = 0, n_accept = 0, n_block = 0;

  input_fpga dut (.*);

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

  localparam int LO = -1600, RG = 3200;
  localparam int SC = (N_BINS * 65536) / RG;

  function automatic int ref_bin(input int x);
    longint q;
    if (x < LO) return 0;
    q = (longint'(x - LO) * SC) >>> 16;
    return (q > N_BINS - 1) ? N_BINS - 1 : int'(q);
  endfunction

  initial begin
    voxel_t v;
    int x [N_COMP];
    vox_valid = 0; vox = '0; cfg_we = 0; cfg_idx = '0; cfg_min = '0; cfg_scale = '0; fv_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < N_COMP; k++) begin
      @(negedge clk);
      cfg_we = 1; cfg_idx = 4'(k); cfg_min = comp_t'(LO); cfg_scale = 16'(SC);
    end
    @(negedge clk);
    cfg_we = 0;
    for (int n = 0; n < 300; n++) begin
      v.id = VOX_W'(n);
      for (int k = 0; k < N_COMP; k++) x[k] = $urandom_range(0, 3600) - 1800;
      for (int i = 0; i < N_COEF; i++) begin
        v.coef[i].re = comp_t'(x[2*i]);
        v.coef[i].im = comp_t'(x[2*i+1]);
      end
      vox = v;
      vox_valid = 1;
      // output stage busy for a random number of cycles
      fv_ready = 0;
      repeat ($urandom_range(0, 2)) begin
        #1;
        check(!vox_ready, "no accept while output stage busy");
        n_block++;
        @(negedge clk);
      end
      fv_ready = 1;
      #1;
      check(vox_ready && fv_valid && fv == v, "voxel accepted and passed through");
      n_accept++;
      @(negedge clk);
      vox_valid = 1;   // keep offering: must not be taken during the event
      check(ev_init && !ev_end && bus_valid == '0 && !vox_ready, "cycle 1: ev_init");
      @(negedge clk);
      check(bus_valid == '1 && !ev_init && !ev_end && !vox_ready, "cycle 2: buses valid");
      for (int i = 0; i < N_BUS; i++)
        check(bus_word[i] == am_word(2*i, bin_t'(ref_bin(x[2*i]))), $sformatf("cycle 2 bus %0d word", i));
      @(negedge clk);
      check(bus_valid == '1 && !vox_ready, "cycle 3: buses valid");
      for (int i = 0; i < N_BUS; i++)
        check(bus_word[i] == am_word(2*i+1, bin_t'(ref_bin(x[2*i+1]))), $sformatf("cycle 3 bus %0d word", i));
      @(negedge clk);
      check(ev_end && bus_valid == '0 && !vox_ready, "cycle 4: ev_end");
      vox_valid = 0;
      @(negedge clk);
      check(!ev_end && !ev_init && bus_valid == '0, "back to idle after 5 cycles");
    end
    check(n_block > 0, "output-stage backpressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

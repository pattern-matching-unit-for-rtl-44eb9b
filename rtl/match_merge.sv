// match_merge: readout interconnect that merges N matched-pattern streams.
//
// Each input is a valid/ready stream of pattern addresses plus a "done" level
// that says the source has nothing more to send for the current event. A
// round-robin arbiter picks one valid input per cycle and moves its address,
// prefixed with the input index, into a one-entry output register. The merged
// done is high when every input is done and the output register is empty, so
// it can be chained: a chip feeds a mezzanine merge, mezzanines feed the board
// merge, and the address grows by the index bits at each level.
//
// The paper only says that all matched patterns are read out and processed by
// an FPGA; the arbitration scheme, the register stage and the address prefix
// are this design's own. Latency is one cycle per merge level; one address per
// cycle passes when the output is not stalled.
module match_merge #(
  parameter int unsigned N    = 4,
  parameter int unsigned IN_W = 8,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned OUT_W = IN_W + IDX_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  ev_init,        // start of event: drop anything held
  input  logic [N-1:0]          in_valid,
  input  logic [IN_W-1:0]       in_addr  [N],
  output logic [N-1:0]          in_ready,
  input  logic [N-1:0]          in_done,
  output logic                  out_valid,
  output logic [OUT_W-1:0]      out_addr,
  input  logic                  out_ready,
  output logic                  out_done
);

  logic [IDX_W-1:0] rr_ptr;     // input with highest priority this cycle
  logic [IDX_W-1:0] grant;
  logic             any;
  logic             take;

  always_comb begin
    int unsigned j;
    grant = '0;
    any   = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      j = (int'(rr_ptr) + k) % N;
      if (!any && in_valid[j]) begin
        any   = 1'b1;
        grant = IDX_W'(j);
      end
    end
  end

  assign take = any && (!out_valid || out_ready);

  always_comb begin
    in_ready = '0;
    if (take) in_ready[grant] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_addr  <= '0;
      rr_ptr    <= '0;
    end else if (ev_init) begin
      out_valid <= 1'b0;
      rr_ptr    <= '0;
    end else begin
      if (take) begin
        out_valid <= 1'b1;
        out_addr  <= {grant, in_addr[grant]};
        rr_ptr    <= IDX_W'((int'(grant) + 1) % N);
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  assign out_done = (&in_done) && !out_valid;

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready && !ev_init) |=> (out_valid && $stable(out_addr)));
  a_done_quiet: assert property (@(posedge clk) disable iff (!rst_n)
    out_done |-> !out_valid);

endmodule

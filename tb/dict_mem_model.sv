// dict_mem_model: behavioural model of the external dictionary memory.
//
// Not synthesizable logic of the board: it stands for the memory device that
// holds the full-resolution dictionary. DEPTH entries, filled through a
// testbench write port. Read requests use valid/ready; when STALL is set the
// model refuses requests at random (about one cycle in four). Every accepted
// request is answered in order exactly LATENCY cycles later on rsp_valid /
// rsp_data, with no way to stall the response. Addresses wrap modulo DEPTH.
module dict_mem_model
  import puma_pkg::*;
#(
  parameter int unsigned DEPTH   = 1024,
  parameter int unsigned LATENCY = 4,
  parameter bit          STALL   = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_en,
  input  logic [ADDR_W-1:0]  wr_addr,
  input  dict_entry_t        wr_data,
  input  logic               req_valid,
  input  logic [ADDR_W-1:0]  req_addr,
  output logic               req_ready,
  output logic               rsp_valid,
  output dict_entry_t        rsp_data
);

  dict_entry_t mem [DEPTH];
  logic        pipe_v [LATENCY];
  dict_entry_t pipe_d [LATENCY];

  always_ff @(posedge clk) begin
    if (wr_en) mem[int'(wr_addr) % DEPTH] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) req_ready <= 1'b1;
    else        req_ready <= !STALL || ($urandom_range(0, 3) != 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) pipe_v[i] <= 1'b0;
    end else begin
      pipe_v[0] <= req_valid && req_ready;
      for (int i = 1; i < LATENCY; i++) pipe_v[i] <= pipe_v[i-1];
    end
  end

  always_ff @(posedge clk) begin
    pipe_d[0] <= mem[int'(req_addr) % DEPTH];
    for (int i = 1; i < LATENCY; i++) pipe_d[i] <= pipe_d[i-1];
  end

  assign rsp_valid = pipe_v[LATENCY-1];
  assign rsp_data  = pipe_d[LATENCY-1];

endmodule

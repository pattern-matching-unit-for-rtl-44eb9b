// pattern_list_table: maps an AM pattern address to its dictionary-entry list.
//
// Offline, every dictionary entry (with its noised copies) is binned into a
// pattern; the entries that fall into the same pattern form that pattern's
// list. The lists are stored back to back in the dictionary memory, so a list
// is fully described by the address of its first entry and its length. This
// table holds {start, count} for every pattern address of the board. Entries
// never written read as an empty list (count 0), so a stray match costs nothing.
//
// That each pattern carries the list of entries that generated it follows the
// paper (lists of 1 to 45000 entries in its trial); contiguous storage and the
// {start, count} format are this design's own.
// Timing: synchronous read, rd_valid / rd_start / rd_count one cycle after rd_en.
module pattern_list_table
  import puma_pkg::*;
#(
  parameter int unsigned NPAT = 16384,
  localparam int unsigned PA_W = $clog2(NPAT)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_en,
  input  logic [PA_W-1:0]    wr_idx,
  input  logic [ADDR_W-1:0]  wr_start,
  input  logic [CNT_W-1:0]   wr_count,
  input  logic               rd_en,
  input  logic [PA_W-1:0]    rd_idx,
  output logic               rd_valid,
  output logic [ADDR_W-1:0]  rd_start,
  output logic [CNT_W-1:0]   rd_count
);

  typedef struct packed {
    logic [ADDR_W-1:0] start;
    logic [CNT_W-1:0]  count;
  } list_t;

  list_t            mem [NPAT];
  logic [NPAT-1:0]  written;
  list_t            q;
  logic             q_written;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= '{start: wr_start, count: wr_count};
    if (rd_en) q <= mem[rd_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      written   <= '0;
      rd_valid  <= 1'b0;
      q_written <= 1'b0;
    end else begin
      if (wr_en) written[wr_idx] <= 1'b1;
      rd_valid <= rd_en;
      if (rd_en) q_written <= written[rd_idx];
    end
  end

  assign rd_start = q.start;
  assign rd_count = q_written ? q.count : '0;

endmodule

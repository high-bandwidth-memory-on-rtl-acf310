// select_buffer: the on-chip index memory of the range-selection engine,
// indexes[PARALLELISM][BUFFER_SIZE] of 32-bit words (64 KiB at the default
// 16 x 1024). It is split into one column memory per lane so that all lanes
// of the Select Core write and all readers of the Gather stage read in the
// same cycle. Each column has one write port and one read port with a
// registered (one-cycle) read, which maps onto Block RAM or Ultra RAM.
// The paper places the indexes in on-chip memory written in parallel by the
// lanes; the one-cycle read is this design's.
module select_buffer
  import hbm_pkg::*;
#(
  parameter int unsigned BUFFER_SIZE = 1024
) (
  input  logic                           clk,
  input  logic [PARALLELISM-1:0]         wr_en,
  input  logic [$clog2(BUFFER_SIZE)-1:0] wr_addr [PARALLELISM],
  input  logic [WORD_W-1:0]              wr_data [PARALLELISM],
  input  logic [$clog2(BUFFER_SIZE)-1:0] rd_addr,
  output logic [WORD_W-1:0]              rd_data [PARALLELISM]
);
  for (genvar l = 0; l < PARALLELISM; l++) begin : g_col
    logic [WORD_W-1:0] mem [BUFFER_SIZE];
    always_ff @(posedge clk) begin
      if (wr_en[l]) mem[wr_addr[l]] <= wr_data[l];
      rd_data[l] <= mem[rd_addr];
    end
  end
endmodule

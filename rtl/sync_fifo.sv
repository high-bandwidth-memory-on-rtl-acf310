// sync_fifo: single-clock first-word-fall-through FIFO.
//
// The FIFOs drawn after DMA Read, before DMA Write and as the samples FIFO
// of the SGD engine are all this module. Storage is a plain array (block RAM
// or LUT RAM on an FPGA); the head entry is presented on rd_data whenever
// empty is low and is removed by rd_en. A write and a read may happen in the
// same cycle, also when full (the read frees the slot). `count` gives the
// occupancy so that producers can reserve space ahead (the DMA read engine
// only requests what fits). Depth must be a power of two. The paper only
// names these FIFOs; depth and behaviour are this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     full,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  assign empty   = (count == 0);
  assign full    = (count == DEPTH[AW:0]);
  assign rd_data = mem[rd_ptr];

  wire do_wr = wr_en && (!full || rd_en);
  wire do_rd = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      count <= count + ($clog2(DEPTH)+1)'(do_wr) - ($clog2(DEPTH)+1)'(do_rd);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (!full || rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);
endmodule

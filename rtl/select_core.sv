// select_core: the Select Core of the range-selection engine. Sixteen lanes
// each take one 32-bit signed integer of the incoming 512-bit line, test
// lower < x < upper (strict on both sides, as in the selection algorithm),
// and on a match write the item's index into the lane's own column of the
// index buffer at the lane's running match count, then increment the count.
// Because every lane owns its column and counter, all sixteen can write in
// the same cycle: one line is consumed per cycle, never stalled.
//
// Interface: clear (one cycle) zeroes the match counters before a new
// chunk and may come with the chunk's first line; job_start zeroes the item index. in_valid presents a line; buffer
// writes come out one cycle later (registered). num_matches is the per-lane
// count of the current chunk. The index of the item in word w of the n-th
// line since job_start is 16*n + w.
// The paper gives the lanes, the column-per-lane buffer and the rate; the
// signed strict compare and the index format are this design's.
module select_core
  import hbm_pkg::*;
#(
  parameter int unsigned BUFFER_SIZE = 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           job_start,
  input  logic                           clear,
  input  logic signed [WORD_W-1:0]       lower,
  input  logic signed [WORD_W-1:0]       upper,
  input  logic                           in_valid,
  input  line_t                          in_line,
  // index buffer write ports, one per lane
  output logic [PARALLELISM-1:0]         wr_en,
  output logic [$clog2(BUFFER_SIZE)-1:0] wr_addr [PARALLELISM],
  output logic [WORD_W-1:0]              wr_data [PARALLELISM],
  output logic [$clog2(BUFFER_SIZE):0]   num_matches [PARALLELISM]
);
  localparam int unsigned BW = $clog2(BUFFER_SIZE);

  logic [WORD_W-1:0] item_base;   // index of word 0 of the next line

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      item_base <= '0;
      wr_en     <= '0;
      for (int l = 0; l < PARALLELISM; l++) begin
        num_matches[l] <= '0;
        wr_addr[l]     <= '0;
        wr_data[l]     <= '0;
      end
    end else begin
      wr_en <= '0;
      if (job_start) item_base <= '0;
      else if (in_valid) item_base <= item_base + PARALLELISM;
      for (int l = 0; l < PARALLELISM; l++) begin
        // clear may coincide with the first line of the next chunk
        if (in_valid && ($signed(in_line[l]) > lower) && ($signed(in_line[l]) < upper)) begin
          wr_en[l]       <= 1'b1;
          wr_addr[l]     <= clear ? '0 : BW'(num_matches[l]);
          wr_data[l]     <= item_base + WORD_W'(l);
          num_matches[l] <= clear ? (BW+1)'(1) : num_matches[l] + 1'b1;
        end else if (clear) begin
          num_matches[l] <= '0;
        end
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                  in_valid && !clear |-> num_matches[0] < (BW+1)'(BUFFER_SIZE));
endmodule

// select_gather: the Gather stage (egress pipeline) of the range-selection
// engine. After a chunk has been scanned, lane l holds num_matches[l]
// indexes in its column of the index buffer. Gather reads row r of all
// sixteen columns in one cycle (the "R" readers) and builds one 512-bit
// line: word l is lane l's r-th index, or the dummy word 0xFFFFFFFF when
// lane l has fewer than r+1 matches. Rows run from 0 to max(num_matches)-1,
// so a chunk produces as many lines as its busiest lane has matches.
//
// Timing: start (one cycle) with num_matches stable; one row read is issued
// per cycle while the 4-entry output FIFO has room, so lines leave at one
// per cycle when out_ready stays high. done pulses after the last line has
// been taken. The dummy padding is the paper's; the dummy value is this
// design's choice.
module select_gather
  import hbm_pkg::*;
#(
  parameter int unsigned BUFFER_SIZE = 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [$clog2(BUFFER_SIZE):0]   num_matches [PARALLELISM],
  output logic                           busy,
  output logic                           done,
  // buffer read port (data one cycle after the address)
  output logic [$clog2(BUFFER_SIZE)-1:0] rd_addr,
  input  logic [WORD_W-1:0]              rd_data [PARALLELISM],
  // result lines
  output logic                           out_valid,
  output line_t                          out_line,
  input  logic                           out_ready
);
  localparam int unsigned BW = $clog2(BUFFER_SIZE);

  logic [BW:0] rows, row;
  logic        pending;            // a read was issued last cycle
  logic [BW:0] pending_row;
  logic [2:0]  fifo_count;
  logic        fifo_full, fifo_empty;
  line_t       assembled;

  // row count = max over lanes
  logic [BW:0] max_matches;
  always_comb begin
    max_matches = '0;
    for (int l = 0; l < PARALLELISM; l++)
      if (num_matches[l] > max_matches) max_matches = num_matches[l];
  end

  wire issue = busy && (row < rows) && (32'(fifo_count) + (pending ? 1 : 0) < 4);
  assign rd_addr = BW'(row);

  always_comb begin
    for (int l = 0; l < PARALLELISM; l++)
      assembled[l] = (pending_row < num_matches[l]) ? rd_data[l] : DUMMY_WORD;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      rows        <= '0;
      row         <= '0;
      pending     <= 1'b0;
      pending_row <= '0;
    end else begin
      done    <= 1'b0;
      pending <= issue;
      if (issue) begin
        pending_row <= row;
        row         <= row + 1'b1;
      end
      if (start) begin
        busy <= 1'b1;
        rows <= max_matches;
        row  <= '0;
      end else if (busy && row == rows && !pending && fifo_empty) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  sync_fifo #(.WIDTH(LINE_W), .DEPTH(4)) u_out (
    .clk, .rst_n,
    .wr_en(pending), .wr_data(assembled), .full(fifo_full),
    .rd_en(out_valid && out_ready), .rd_data(out_line), .empty(fifo_empty),
    .count(fifo_count)
  );
  assign out_valid = !fifo_empty;

  logic unused_full;
  assign unused_full = fifo_full;
endmodule

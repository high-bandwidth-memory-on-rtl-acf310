// dma_write: writes a stream of 512-bit lines to consecutive addresses over
// one AXI3 write channel (the "DMA Write" box and the FIFO above it in the
// engine figures).
//
// start (one cycle) latches the byte address where the first line goes.
// Lines enter through in_* (valid/ready) into a FIFO. As soon as 16 lines
// that no burst has claimed yet are in the FIFO, a 16-beat burst is issued;
// after flush (one cycle, "no more lines will come") a shorter final burst
// takes what is left. Bursts never cross a 4 KiB boundary. The lengths of
// issued bursts wait in a small queue so the W channel knows where wlast
// goes; W beats flow as soon as their burst address is out, so a steady
// stream is written at one line per cycle. done pulses once every burst has
// its B response after a flush. lines_written counts lines since start.
// The paper gives the function only; the burst policy is this design's.
module dma_write
  import hbm_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic              flush,
  output logic              busy,
  output logic              done,
  output logic [31:0]       lines_written,
  // line stream in
  input  logic              in_valid,
  input  logic [LINE_W-1:0] in_data,
  output logic              in_ready,
  // AXI3 write channels
  output logic              awvalid,
  output logic [ADDR_W-1:0] awaddr,
  output logic [3:0]        awlen,
  input  logic              awready,
  output logic              wvalid,
  output logic [LINE_W-1:0] wdata,
  output logic              wlast,
  input  logic              wready,
  input  logic              bvalid,
  output logic              bready
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  logic [CW-1:0]     fifo_count;
  logic              fifo_full, fifo_empty;
  logic [CW-1:0]     unclaimed;        // lines in the FIFO not covered by a burst
  logic [ADDR_W-1:0] next_addr;
  logic              flushing;
  logic [15:0]       b_pending;
  logic [3:0]        beat;
  logic [3:0]        len_head;
  logic              lq_empty, lq_full;
  logic [2:0]        lq_count_unused;

  logic [6:0]  page_room;
  logic [CW:0] burst;
  always_comb begin
    page_room = 7'd64 - {1'b0, next_addr[11:6]};
    burst = (CW+1)'(unclaimed);
    if (burst > MAX_BURST) burst = MAX_BURST;
    if (burst > (CW+1)'(page_room)) burst = (CW+1)'(page_room);
  end

  wire in_fire = in_valid && in_ready;
  wire aw_fire = awvalid && awready;
  wire w_fire  = wvalid && wready;
  wire b_fire  = bvalid && bready;
  wire issue   = busy && (!awvalid || aw_fire) && !lq_full &&
                 ((unclaimed >= MAX_BURST) || (burst == (CW+1)'(page_room) && unclaimed != 0) ||
                  (flushing && unclaimed != 0));

  assign in_ready = !fifo_full && busy;
  assign bready   = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy          <= 1'b0;
      done          <= 1'b0;
      flushing      <= 1'b0;
      awvalid       <= 1'b0;
      awaddr        <= '0;
      awlen         <= '0;
      next_addr     <= '0;
      unclaimed     <= '0;
      b_pending     <= '0;
      beat          <= '0;
      lines_written <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy          <= 1'b1;
        flushing      <= 1'b0;
        next_addr     <= base_addr;
        lines_written <= '0;
      end
      if (flush) flushing <= 1'b1;
      if (aw_fire) awvalid <= 1'b0;
      if (issue) begin
        awvalid   <= 1'b1;
        awaddr    <= next_addr;
        awlen     <= 4'(burst - 1);
        next_addr <= next_addr + ADDR_W'(burst) * LINE_BYTES;
      end
      unclaimed <= unclaimed + CW'(in_fire) - (issue ? CW'(burst) : '0);
      b_pending <= b_pending + 16'(issue) - 16'(b_fire);
      if (w_fire) begin
        beat          <= wlast ? '0 : beat + 1'b1;
        lines_written <= lines_written + 1;
      end
      if (busy && flushing && !start && fifo_empty && unclaimed == 0 && !awvalid &&
          b_pending == 0 && lq_empty) begin
        busy     <= 1'b0;
        flushing <= 1'b0;
        done     <= 1'b1;
      end
    end
  end

  // burst length queue: one entry per issued burst, popped at wlast
  sync_fifo #(.WIDTH(4), .DEPTH(4)) u_lenq (
    .clk, .rst_n,
    .wr_en(issue), .wr_data(4'(burst - 1)), .full(lq_full),
    .rd_en(w_fire && wlast), .rd_data(len_head), .empty(lq_empty),
    .count(lq_count_unused)
  );

  sync_fifo #(.WIDTH(LINE_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(in_fire), .wr_data(in_data), .full(fifo_full),
    .rd_en(w_fire), .rd_data(wdata), .empty(fifo_empty),
    .count(fifo_count)
  );

  // a claimed burst's lines are already in the FIFO, so W never waits on data
  assign wvalid = !lq_empty && !fifo_empty;
  assign wlast  = (beat == len_head);

  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
                 awvalid && !awready |=> awvalid && $stable(awaddr));
endmodule

// dma_read: streams a run of 512-bit lines from one AXI3 read channel into
// a FIFO (the "DMA Read" box and the FIFO under it in the engine figures).
//
// start (one cycle) latches a byte address and a line count. The module then
// issues INCR bursts of up to 16 beats, never crossing a 4 KiB boundary, and
// keeps issuing while the FIFO can hold every beat already requested plus the
// next burst, so reads stay in flight back to back and the port runs at one
// line per cycle when the consumer keeps up. Read data is pushed into the FIFO
// as it arrives and presented on out_* (valid/ready, first word fall through).
// busy stays high until the last requested beat has arrived; the FIFO may
// still hold data then. The paper gives the function (read input from the HBM
// into a 512-bit FIFO); burst policy and FIFO depth are this design's choice.
module dma_read
  import hbm_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic [31:0]       num_lines,
  output logic              busy,
  // AXI3 read address / data channels
  output logic              arvalid,
  output logic [ADDR_W-1:0] araddr,
  output logic [3:0]        arlen,
  input  logic              arready,
  input  logic              rvalid,
  input  logic [LINE_W-1:0] rdata,
  input  logic              rlast,
  output logic              rready,
  // line stream out
  output logic              out_valid,
  output logic [LINE_W-1:0] out_data,
  input  logic              out_ready
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  logic [ADDR_W-1:0] next_addr;
  logic [31:0]       lines_to_request;
  logic [31:0]       lines_to_receive;
  logic [CW:0]       in_flight;           // requested but not yet received beats
  logic [CW-1:0]     fifo_count;
  logic              fifo_full, fifo_empty;

  // burst length: min(16, remaining, lines left in this 4 KiB page)
  logic [6:0]  page_room;
  logic [31:0] burst;
  always_comb begin
    page_room = 7'd64 - {1'b0, next_addr[11:6]};
    burst = lines_to_request;
    if (burst > MAX_BURST) burst = MAX_BURST;
    if (burst > 32'(page_room)) burst = 32'(page_room);
  end

  // space check: everything in flight plus this burst must fit in the FIFO
  wire can_issue = (lines_to_request != 0) &&
                   ((32'(fifo_count) + 32'(in_flight) + burst) <= FIFO_DEPTH);

  wire ar_fire = arvalid && arready;
  wire r_fire  = rvalid && rready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arvalid          <= 1'b0;
      araddr           <= '0;
      arlen            <= '0;
      next_addr        <= '0;
      lines_to_request <= '0;
      lines_to_receive <= '0;
      in_flight        <= '0;
    end else begin
      if (start) begin
        next_addr        <= base_addr;
        lines_to_request <= num_lines;
        lines_to_receive <= num_lines;
      end else begin
        if (ar_fire) arvalid <= 1'b0;
        if ((!arvalid || ar_fire) && can_issue) begin
          arvalid          <= 1'b1;
          araddr           <= next_addr;
          arlen            <= 4'(burst - 1);
          next_addr        <= next_addr + ADDR_W'(burst * LINE_BYTES);
          lines_to_request <= lines_to_request - burst;
        end
        if (r_fire) lines_to_receive <= lines_to_receive - 1;
      end
      // beats move into in_flight when the burst is issued (registered
      // arvalid), leave it when they arrive
      in_flight <= in_flight
                   + (((!arvalid || ar_fire) && can_issue && !start) ? (CW+1)'(burst) : '0)
                   - (CW+1)'(r_fire);
    end
  end

  assign busy   = (lines_to_receive != 0) || arvalid;
  assign rready = !fifo_full;   // cannot be full: space was reserved

  sync_fifo #(.WIDTH(LINE_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(r_fire), .wr_data(rdata), .full(fifo_full),
    .rd_en(out_valid && out_ready), .rd_data(out_data), .empty(fifo_empty),
    .count(fifo_count)
  );
  assign out_valid = !fifo_empty;

  // rlast is not needed: beats are counted
  logic unused_rlast;
  assign unused_rlast = rlast;

  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
                 arvalid && !arready |=> arvalid && $stable(araddr) && $stable(arlen));
endmodule

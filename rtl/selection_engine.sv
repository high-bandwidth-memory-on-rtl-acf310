// selection_engine: range-selection compute engine on one 512-bit HBM-shim
// port. It scans a column of 32-bit signed integers and writes out the
// indexes i for which lower < input[i] < upper, plus the number of matches.
//
// Two pipelines share the port and are run one after the other by the
// scheduler (the FSM in this module):
//  * ingress: dma_read -> FIFO -> select_core, which writes matching indexes
//    into select_buffer (16 columns, one per lane, BUFFER_SIZE deep);
//  * egress: select_gather -> dma_write, which turns the buffered indexes
//    into 512-bit lines, padding short lanes with the dummy 0xFFFFFFFF.
// The scheduler switches to egress after BUFFER_SIZE input lines (or at the
// end of the input), since then a lane may have filled its column, and back
// to ingress when the chunk's results have been written. dma_read keeps
// prefetching into its FIFO during egress. Results of all chunks are written
// contiguously from the output address.
//
// Configuration words: 0 input byte address, 1 number of input lines
// (16 items each), 2 lower bound, 3 upper bound, 4 output byte address.
// Results: result0 = number of matches, result1 = result lines written.
// A stop request ends the job at the next chunk boundary: results so far
// are written, input already requested is read and dropped. Throughput: one input line per cycle during ingress.
// The paper gives the two pipelines, the scheduler and BUFFER_SIZE; the FSM
// states, register layout and stop handling are this design's.
module selection_engine
  import hbm_pkg::*;
#(
  parameter int unsigned BUFFER_SIZE = 1024,
  parameter int unsigned FIFO_DEPTH  = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic        start,
  input  logic        stop,
  output logic        busy,
  output logic        done,
  output logic [31:0] result [2],
  output axi512_req_t m_req,
  input  axi512_rsp_t m_rsp
);
  localparam int unsigned BW = $clog2(BUFFER_SIZE);

  typedef enum logic [2:0] {S_IDLE, S_INGRESS, S_DRAIN, S_EGRESS, S_FLUSH} state_e;
  state_e state;

  logic [31:0] lines_left, chunk_lines, total_matches;
  logic        stop_req;
  logic [1:0]  drain_cnt;
  logic        w_done_q;

  // ingress
  logic        in_valid, in_ready;
  line_t       in_line;
  logic        core_clear, take;
  logic [PARALLELISM-1:0] wr_en;
  logic [BW-1:0]     wr_addr [PARALLELISM];
  logic [WORD_W-1:0] wr_data [PARALLELISM];
  logic [BW:0]       num_matches [PARALLELISM];
  // egress
  logic [BW-1:0]     rd_addr;
  logic [WORD_W-1:0] rd_data [PARALLELISM];
  logic              g_start, g_busy, g_done, g_valid, g_ready;
  line_t             g_line;
  logic              w_flush, w_busy, w_done;
  logic [31:0]       lines_written;
  logic              rd_busy;

  assign take     = (state == S_INGRESS) && in_valid && (lines_left != 0) &&
                    (chunk_lines != BUFFER_SIZE);
  // after a stop, input still arriving is drained and dropped in S_FLUSH
  assign in_ready = take || (state == S_FLUSH);

  dma_read #(.FIFO_DEPTH(FIFO_DEPTH)) u_rd (
    .clk, .rst_n,
    .start, .base_addr(ADDR_W'(cfg[0])), .num_lines(cfg[1]), .busy(rd_busy),
    .arvalid(m_req.arvalid), .araddr(m_req.araddr), .arlen(m_req.arlen),
    .arready(m_rsp.arready), .rvalid(m_rsp.rvalid), .rdata(m_rsp.rdata),
    .rlast(m_rsp.rlast), .rready(m_req.rready),
    .out_valid(in_valid), .out_data(in_line), .out_ready(in_ready)
  );

  select_core #(.BUFFER_SIZE(BUFFER_SIZE)) u_core (
    .clk, .rst_n, .job_start(start), .clear(core_clear),
    .lower(cfg[2]), .upper(cfg[3]),
    .in_valid(take), .in_line,
    .wr_en, .wr_addr, .wr_data, .num_matches
  );

  select_buffer #(.BUFFER_SIZE(BUFFER_SIZE)) u_buf (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data
  );

  select_gather #(.BUFFER_SIZE(BUFFER_SIZE)) u_gather (
    .clk, .rst_n, .start(g_start), .num_matches, .busy(g_busy), .done(g_done),
    .rd_addr, .rd_data,
    .out_valid(g_valid), .out_line(g_line), .out_ready(g_ready)
  );

  dma_write #(.FIFO_DEPTH(FIFO_DEPTH)) u_wr (
    .clk, .rst_n,
    .start, .base_addr(ADDR_W'(cfg[4])), .flush(w_flush),
    .busy(w_busy), .done(w_done), .lines_written,
    .in_valid(g_valid), .in_data(g_line), .in_ready(g_ready),
    .awvalid(m_req.awvalid), .awaddr(m_req.awaddr), .awlen(m_req.awlen),
    .awready(m_rsp.awready),
    .wvalid(m_req.wvalid), .wdata(m_req.wdata), .wlast(m_req.wlast),
    .wready(m_rsp.wready), .bvalid(m_rsp.bvalid), .bready(m_req.bready)
  );

  // sum of the lane counters of the chunk just scanned
  logic [31:0] chunk_sum;
  always_comb begin
    chunk_sum = '0;
    for (int l = 0; l < PARALLELISM; l++) chunk_sum += 32'(num_matches[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      lines_left    <= '0;
      chunk_lines   <= '0;
      total_matches <= '0;
      stop_req      <= 1'b0;
      drain_cnt     <= '0;
      w_done_q      <= 1'b0;
      core_clear    <= 1'b0;
      g_start       <= 1'b0;
      w_flush       <= 1'b0;
      done          <= 1'b0;
    end else begin
      core_clear <= 1'b0;
      g_start    <= 1'b0;
      w_flush    <= 1'b0;
      done       <= 1'b0;
      if (stop) stop_req <= 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          lines_left    <= cfg[1];
          chunk_lines   <= '0;
          total_matches <= '0;
          stop_req      <= 1'b0;
          core_clear    <= 1'b1;
          state         <= S_INGRESS;
        end
        S_INGRESS: begin
          if (take) begin
            lines_left  <= lines_left - 1;
            chunk_lines <= chunk_lines + 1;
          end
          if ((lines_left == 0) || (chunk_lines == BUFFER_SIZE) ||
              (take && (lines_left == 1 || chunk_lines == BUFFER_SIZE - 1))) begin
            drain_cnt <= '0;
            state     <= S_DRAIN;
          end
        end
        S_DRAIN: begin   // let the last buffer writes land
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 2'd1) begin
            g_start <= 1'b1;
            state   <= S_EGRESS;
          end
        end
        S_EGRESS: if (g_done) begin
          total_matches <= total_matches + chunk_sum;
          chunk_lines   <= '0;
          core_clear    <= 1'b1;
          if (lines_left == 0 || stop_req) begin
            w_flush <= 1'b1;
            state   <= S_FLUSH;
          end else begin
            state <= S_INGRESS;
          end
        end
        S_FLUSH: begin
          if (w_done) w_done_q <= 1'b1;
          if ((w_done || w_done_q) && !rd_busy && !in_valid) begin
            done     <= 1'b1;
            w_done_q <= 1'b0;
            state    <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign result[0] = total_matches;
  assign result[1] = lines_written;

  logic unused;
  assign unused = g_busy ^ w_busy;
endmodule

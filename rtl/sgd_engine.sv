// sgd_engine: stochastic-gradient-descent compute engine training a linear
// model (ridge regression or L2-regularised logistic regression) on one
// 512-bit HBM-shim port, then writing the model back.
//
// Dataflow: dma_read scans the dataset once per epoch. Each line is taken
// into the Dot module (sgd_dot) together with the matching model line read
// from sgd_update's model memory, and feature lines are also kept in the
// samples FIFO. Once a sample's dot product is complete, the ScalarEngine
// (sgd_scalar) forms alpha*(S(dot) - b), and Update (sgd_update) replays
// the sample from the samples FIFO to add scalar*a into the gradient. Dot
// works on the next sample while Update finishes the previous one, because
// the model does not change inside a minibatch. After B samples the
// scheduler (the FSM here) stops taking input, waits for the last gradient
// line, and has Update apply x = x - alpha*(g + 2*lambda*x). Only then is
// the next minibatch read: the model is never stale (the read-after-write
// dependency is respected), at the cost of a bubble of about two sample
// lengths per minibatch. Gradient left over from an incomplete last
// minibatch is dropped when the next epoch clears g, as in the algorithm.
//
// Data layout (this design's choice): sample i occupies 1 + n/16 lines: a
// label line (word 0 = b_i), then its n features, 16 per line; n is a
// multiple of 16 (pad with zero features), at most MAX_DIMENSIONALITY.
// Numbers are signed 32-bit fixed point with SGD_FRAC = 16 fraction bits,
// where the paper's engine uses 32-bit floats.
// Configuration words: 0 dataset byte address, 1 samples m, 2 features n,
// 3 epochs N, 4 minibatch B, 5 alpha, 6 2*alpha*lambda, 7 bit0 logistic,
// 8 model output byte address. Results: result0 = epochs run,
// result1 = samples processed. A stop request ends training after the
// current epoch; the model is written out either way.
module sgd_engine
  import hbm_pkg::*;
#(
  parameter int unsigned MAX_DIMENSIONALITY = 2048,
  parameter int unsigned FIFO_DEPTH         = 64,
  localparam int unsigned LINES = MAX_DIMENSIONALITY / PARALLELISM,
  localparam int unsigned IW    = $clog2(LINES)
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
  typedef enum logic [2:0] {E_IDLE, E_CLEAR, E_RUN, E_MUPD, E_WRITE, E_FLUSH} state_e;
  state_e state;

  logic [IW:0]  L;                          // feature lines per sample
  logic [31:0]  m_cfg, n_epochs, batch;
  logic [31:0]  taken, batch_in, batch_done, epochs, processed;
  logic [IW:0]  pos;                        // line within sample, 0 = label
  logic         stop_req;

  // dma read
  logic         rd_start, rd_busy, in_valid, in_ready;
  line_t        in_line;
  // dot input register
  logic         d_valid, d_label, d_last;
  line_t        d_line;
  logic         dot_valid;
  logic signed [31:0] dot, dot_label;
  // scalar
  logic         sc_valid;
  logic signed [31:0] sc;
  logic         scq_empty, scq_full, scq_pop;
  logic [31:0]  scq_head;
  logic [2:0]   scq_count;
  // samples FIFO
  logic         sf_empty, sf_full;
  line_t        sf_head;
  logic [$clog2(2*LINES):0] sf_count;
  // update
  logic         u_active;
  logic [IW:0]  u_pos;
  logic signed [31:0] u_s;
  logic         acc_valid;
  logic         cmd_clear_all, cmd_clear_grad, cmd_model_update, upd_busy;
  logic [IW-1:0] x_raddr;
  line_t        x_rdata;
  // write out
  logic         w_start, w_busy, w_done, w_pending, w_ready;
  logic [IW:0]  w_idx;
  logic [31:0]  lines_written;

  wire blocked = (batch_in == batch) || (taken == m_cfg);
  wire intake  = (state == E_RUN) && in_valid && !blocked && !upd_busy && !sf_full &&
                 !cmd_model_update && !cmd_clear_grad;
  wire is_feat = (pos != 0);
  assign in_ready = intake;

  dma_read #(.FIFO_DEPTH(FIFO_DEPTH)) u_rd (
    .clk, .rst_n,
    .start(rd_start), .base_addr(ADDR_W'(cfg[0])), .num_lines(m_cfg * 32'(L + 1)),
    .busy(rd_busy),
    .arvalid(m_req.arvalid), .araddr(m_req.araddr), .arlen(m_req.arlen),
    .arready(m_rsp.arready), .rvalid(m_rsp.rvalid), .rdata(m_rsp.rdata),
    .rlast(m_rsp.rlast), .rready(m_req.rready),
    .out_valid(in_valid), .out_data(in_line), .out_ready(in_ready)
  );

  assign x_raddr = (state == E_WRITE) ? IW'(w_idx) : IW'(pos - 1'b1);

  sgd_dot u_dot (
    .clk, .rst_n, .in_valid(d_valid), .in_label(d_label), .in_last(d_last),
    .in_a(d_line), .in_x(x_rdata),
    .out_valid(dot_valid), .out_dot(dot), .out_label(dot_label)
  );

  sgd_scalar u_scalar (
    .clk, .rst_n, .logreg(cfg[7][0]), .alpha(cfg[5]),
    .in_valid(dot_valid), .in_dot(dot), .in_label(dot_label),
    .out_valid(sc_valid), .out_scalar(sc)
  );

  sync_fifo #(.WIDTH(32), .DEPTH(4)) u_scq (
    .clk, .rst_n, .wr_en(sc_valid), .wr_data(sc), .full(scq_full),
    .rd_en(scq_pop), .rd_data(scq_head), .empty(scq_empty), .count(scq_count)
  );

  sync_fifo #(.WIDTH(LINE_W), .DEPTH(2*LINES)) u_samples (
    .clk, .rst_n, .wr_en(intake && is_feat), .wr_data(in_line), .full(sf_full),
    .rd_en(acc_valid), .rd_data(sf_head), .empty(sf_empty), .count(sf_count)
  );

  assign scq_pop   = !u_active && !scq_empty;
  assign acc_valid = u_active && !sf_empty;

  sgd_update #(.MAX_DIMENSIONALITY(MAX_DIMENSIONALITY)) u_upd (
    .clk, .rst_n, .num_lines(L), .alpha(cfg[5]), .c2(cfg[6]),
    .cmd_clear_all, .cmd_clear_grad, .cmd_model_update, .busy(upd_busy),
    .acc_valid, .acc_idx(IW'(u_pos)), .acc_a(sf_head), .acc_s(u_s),
    .x_raddr, .x_rdata
  );

  dma_write #(.FIFO_DEPTH(FIFO_DEPTH)) u_wr (
    .clk, .rst_n,
    .start(w_start), .base_addr(ADDR_W'(cfg[8])),
    .flush(state == E_WRITE && w_idx == L && !w_pending),
    .busy(w_busy), .done(w_done), .lines_written,
    .in_valid(w_pending), .in_data(x_rdata), .in_ready(w_ready),
    .awvalid(m_req.awvalid), .awaddr(m_req.awaddr), .awlen(m_req.awlen),
    .awready(m_rsp.awready),
    .wvalid(m_req.wvalid), .wdata(m_req.wdata), .wlast(m_req.wlast),
    .wready(m_rsp.wready), .bvalid(m_rsp.bvalid), .bready(m_req.bready)
  );

  wire batch_complete = (state == E_RUN) && blocked && (batch_done == batch_in) &&
                        !u_active && scq_empty && !d_valid && !upd_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE;
      L <= '0; m_cfg <= '0; n_epochs <= '0; batch <= '0;
      taken <= '0; batch_in <= '0; batch_done <= '0; epochs <= '0; processed <= '0;
      pos <= '0; stop_req <= 1'b0;
      rd_start <= 1'b0; d_valid <= 1'b0; d_label <= 1'b0; d_last <= 1'b0; d_line <= '0;
      u_active <= 1'b0; u_pos <= '0; u_s <= '0;
      cmd_clear_all <= 1'b0; cmd_clear_grad <= 1'b0; cmd_model_update <= 1'b0;
      w_start <= 1'b0; w_pending <= 1'b0; w_idx <= '0;
      done <= 1'b0;
    end else begin
      rd_start <= 1'b0; cmd_clear_all <= 1'b0; cmd_clear_grad <= 1'b0;
      cmd_model_update <= 1'b0; w_start <= 1'b0; done <= 1'b0;
      if (stop) stop_req <= 1'b1;

      // ---- intake into Dot ----
      d_valid <= intake;
      d_label <= !is_feat;
      d_last  <= (pos == L);
      d_line  <= in_line;
      if (intake) begin
        if (pos == L) begin
          pos      <= '0;
          taken    <= taken + 1;
          batch_in <= batch_in + 1;
        end else pos <= pos + 1'b1;
      end

      // ---- Update: replay a sample from the samples FIFO ----
      if (scq_pop) begin
        u_active <= 1'b1;
        u_s      <= scq_head;
        u_pos    <= '0;
      end
      if (acc_valid) begin
        u_pos <= u_pos + 1'b1;
        if (u_pos + 1'b1 == L) begin
          u_active   <= 1'b0;
          batch_done <= batch_done + 1;
          processed  <= processed + 1;
        end
      end

      unique case (state)
        E_IDLE: if (start) begin
          L          <= (IW+1)'(cfg[2] >> 4);
          m_cfg      <= cfg[1];
          n_epochs   <= cfg[3];
          batch      <= cfg[4];
          epochs     <= '0;
          processed  <= '0;
          stop_req   <= 1'b0;
          cmd_clear_all <= 1'b1;
          state      <= E_CLEAR;
        end
        E_CLEAR: if (!cmd_clear_all && !cmd_clear_grad && !upd_busy) begin
          taken <= '0; batch_in <= '0; batch_done <= '0; pos <= '0;
          rd_start <= 1'b1;
          state    <= E_RUN;
        end
        E_RUN: if (batch_complete) begin
          if (batch_in == batch) begin
            cmd_model_update <= 1'b1;
            state <= E_MUPD;
          end else begin
            // epoch ended inside a minibatch: remainder is dropped
            epochs <= epochs + 1;
            if (epochs + 1 == n_epochs || stop_req) begin
              w_start <= 1'b1; w_idx <= '0; state <= E_WRITE;
            end else begin
              cmd_clear_grad <= 1'b1;
              state <= E_CLEAR;
            end
          end
        end
        E_MUPD: if (!cmd_model_update && !upd_busy) begin
          batch_in   <= '0;
          batch_done <= '0;
          if (taken == m_cfg) begin
            epochs <= epochs + 1;
            if (epochs + 1 == n_epochs || stop_req) begin
              w_start <= 1'b1; w_idx <= '0; state <= E_WRITE;
            end else begin
              cmd_clear_grad <= 1'b1;
              state <= E_CLEAR;
            end
          end else state <= E_RUN;
        end
        E_WRITE: begin
          // one model line every two cycles: read, then push
          w_pending <= 1'b0;
          if (!w_pending && w_idx != L && w_ready && !w_start) begin
            w_pending <= 1'b1;
            w_idx     <= w_idx + 1'b1;
          end
          if (w_idx == L && !w_pending) state <= E_FLUSH;
        end
        E_FLUSH: if (w_done) begin
          done  <= 1'b1;
          state <= E_IDLE;
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  assign busy      = (state != E_IDLE);
  assign result[0] = epochs;
  assign result[1] = processed;

  logic unused;
  assign unused = rd_busy ^ w_busy ^ scq_full ^ (^scq_count) ^ (^sf_count) ^ (^lines_written);

  a_no_scalar_loss: assert property (@(posedge clk) disable iff (!rst_n) sc_valid |-> !scq_full);
endmodule

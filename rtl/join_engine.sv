// join_engine: hash-join compute engine (MonetDB's naively partitioned hash
// join, one partition of L per engine) on two 512-bit HBM-shim ports, one
// for reading and one for writing, so both run at full rate at once.
//
// The scheduler (the FSM here) runs two phases:
//  * build: dma_read streams S (32-bit keys) into join_build, which fills
//    the sixteen hash-table replicas of join_hash_table;
//  * probe: dma_read streams the L partition; word k of each line goes to
//    probe lane k (join_probe_lane), all lanes taking a line together; lane
//    results pass through per-lane FIFOs into join_assemble, and the
//    assembled lines go out through dma_write. Read, probe, assemble and
//    write all run concurrently.
// An output row is two lines: 16 positions in L, then the 16 matching
// positions in S, dummies (0xFFFFFFFF) where a lane has no match. S larger
// than the table is handled by software with one job per part of S.
//
// Configuration words: 0 S byte address, 1 number of S keys (at most
// HASH_TABLE_SIZE), 2 L byte address, 3 number of L lines, 4 output byte
// address, 5 bit0 handle collisions. Results: result0 = matches,
// result1 = output lines written. repeats = collision-chain steps (monitor
// only). A stop request skips the probe if it arrives during the build.
// The paper gives the structure (Build, 16 probe lanes, Assemble, two ports);
// the register layout and the collision-handling switch are this design's.
module join_engine
  import hbm_pkg::*;
#(
  parameter int unsigned HASH_TABLE_SIZE = 8192,
  parameter int unsigned FIFO_DEPTH      = 64,
  localparam int unsigned HW = $clog2(HASH_TABLE_SIZE)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic        start,
  input  logic        stop,
  output logic        busy,
  output logic        done,
  output logic [31:0] result [2],
  output logic [31:0] repeats,
  output axi512_req_t rd_req,     // shim port used for reading
  input  axi512_rsp_t rd_rsp,
  output axi512_req_t wr_req,     // shim port used for writing
  input  axi512_rsp_t wr_rsp
);
  typedef enum logic [2:0] {J_IDLE, J_BUILD, J_PROBE, J_FLUSH} state_e;
  state_e state;

  logic        rd_start, rd_busy, in_valid, in_ready;
  line_t       in_line;
  logic        b_start, b_busy, b_done, b_ready;
  logic        stop_req, handle_col;
  logic [31:0] l_left;
  logic        w_start, w_busy, w_done;
  logic [31:0] lines_written;

  // hash table ports
  logic               bkt_we, ent_we;
  logic [HW-1:0]      bkt_waddr, ent_waddr, b_bkt_raddr;
  logic [HW:0]        bkt_wdata;
  logic [HW+WORD_W:0] ent_wdata;
  logic [HW-1:0]      bkt_raddr [PARALLELISM], p_bkt_raddr [PARALLELISM];
  logic [HW:0]        bkt_rdata [PARALLELISM];
  logic [HW-1:0]      ent_raddr [PARALLELISM];
  logic [HW+WORD_W:0] ent_rdata [PARALLELISM];

  // probe lanes
  logic [PARALLELISM-1:0] p_in_ready, p_out_valid, p_match, p_last, a_ready, p_idle;
  logic [WORD_W-1:0]      p_sidx [PARALLELISM], p_lidx [PARALLELISM];
  logic [31:0]            p_repeats [PARALLELISM];
  logic                   a_valid, a_ready_out, a_empty;
  line_t                  a_line;
  logic [31:0]            match_count, l_line_no;
  logic                   clear_stats;

  wire building = (state == J_BUILD);
  wire probing  = (state == J_PROBE);
  wire all_lanes_ready = (p_in_ready == '1);
  wire feed = probing && in_valid && all_lanes_ready && (l_left != 0);

  assign in_ready = building ? b_ready : feed;

  dma_read #(.FIFO_DEPTH(FIFO_DEPTH)) u_rd (
    .clk, .rst_n,
    .start(rd_start),
    .base_addr(ADDR_W'(building ? cfg[0] : cfg[2])),
    .num_lines(building ? (cfg[1] + 15) >> 4 : cfg[3]),
    .busy(rd_busy),
    .arvalid(rd_req.arvalid), .araddr(rd_req.araddr), .arlen(rd_req.arlen),
    .arready(rd_rsp.arready), .rvalid(rd_rsp.rvalid), .rdata(rd_rsp.rdata),
    .rlast(rd_rsp.rlast), .rready(rd_req.rready),
    .out_valid(in_valid), .out_data(in_line), .out_ready(in_ready)
  );
  assign rd_req.awvalid = 1'b0;
  assign rd_req.awaddr  = '0;
  assign rd_req.awlen   = '0;
  assign rd_req.wvalid  = 1'b0;
  assign rd_req.wdata   = '0;
  assign rd_req.wlast   = 1'b0;
  assign rd_req.bready  = 1'b1;

  join_build #(.HASH_TABLE_SIZE(HASH_TABLE_SIZE)) u_build (
    .clk, .rst_n, .start(b_start), .num_keys(cfg[1]), .busy(b_busy), .done(b_done),
    .in_valid(building && in_valid), .in_line, .in_ready(b_ready),
    .bkt_we, .bkt_waddr, .bkt_wdata, .ent_we, .ent_waddr, .ent_wdata,
    .bkt_raddr(b_bkt_raddr), .bkt_rdata(bkt_rdata[0])
  );

  always_comb begin
    bkt_raddr    = p_bkt_raddr;
    bkt_raddr[0] = building ? b_bkt_raddr : p_bkt_raddr[0];
  end

  join_hash_table #(.HASH_TABLE_SIZE(HASH_TABLE_SIZE)) u_ht (
    .clk, .bkt_we, .bkt_waddr, .bkt_wdata, .ent_we, .ent_waddr, .ent_wdata,
    .bkt_raddr, .bkt_rdata, .ent_raddr, .ent_rdata
  );

  for (genvar l = 0; l < PARALLELISM; l++) begin : g_lane
    join_probe_lane #(.HASH_TABLE_SIZE(HASH_TABLE_SIZE)) u_p (
      .clk, .rst_n, .handle_col, .clear_stats,
      .in_valid(feed), .in_key(in_line[l]), .in_lidx((l_line_no << 4) + WORD_W'(l)),
      .in_ready(p_in_ready[l]),
      .bkt_raddr(p_bkt_raddr[l]), .bkt_rdata(bkt_rdata[l]),
      .ent_raddr(ent_raddr[l]), .ent_rdata(ent_rdata[l]),
      .out_valid(p_out_valid[l]), .out_match(p_match[l]), .out_last(p_last[l]),
      .out_sidx(p_sidx[l]), .out_lidx(p_lidx[l]), .out_ready(a_ready[l]),
      .repeats(p_repeats[l]), .idle(p_idle[l])
    );
  end

  join_assemble u_asm (
    .clk, .rst_n, .clear_stats,
    .in_valid(p_out_valid), .in_match(p_match), .in_last(p_last),
    .in_sidx(p_sidx), .in_lidx(p_lidx), .in_ready(a_ready),
    .out_valid(a_valid), .out_line(a_line), .out_ready(a_ready_out),
    .match_count, .empty(a_empty)
  );

  dma_write #(.FIFO_DEPTH(FIFO_DEPTH)) u_wr (
    .clk, .rst_n,
    .start(w_start), .base_addr(ADDR_W'(cfg[4])),
    .flush(probing && l_left == 0 && p_idle == '1 && a_empty),
    .busy(w_busy), .done(w_done), .lines_written,
    .in_valid(a_valid), .in_data(a_line), .in_ready(a_ready_out),
    .awvalid(wr_req.awvalid), .awaddr(wr_req.awaddr), .awlen(wr_req.awlen),
    .awready(wr_rsp.awready),
    .wvalid(wr_req.wvalid), .wdata(wr_req.wdata), .wlast(wr_req.wlast),
    .wready(wr_rsp.wready), .bvalid(wr_rsp.bvalid), .bready(wr_req.bready)
  );
  assign wr_req.arvalid = 1'b0;
  assign wr_req.araddr  = '0;
  assign wr_req.arlen   = '0;
  assign wr_req.rready  = 1'b1;

  always_comb begin
    repeats = '0;
    for (int l = 0; l < PARALLELISM; l++) repeats += p_repeats[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= J_IDLE;
      rd_start    <= 1'b0;
      b_start     <= 1'b0;
      w_start     <= 1'b0;
      clear_stats <= 1'b0;
      stop_req    <= 1'b0;
      handle_col  <= 1'b0;
      l_left      <= '0;
      l_line_no   <= '0;
      done        <= 1'b0;
    end else begin
      rd_start    <= 1'b0;
      b_start     <= 1'b0;
      w_start     <= 1'b0;
      clear_stats <= 1'b0;
      done        <= 1'b0;
      if (stop) stop_req <= 1'b1;
      if (feed) begin
        l_left    <= l_left - 1;
        l_line_no <= l_line_no + 1;
      end
      unique case (state)
        J_IDLE: if (start) begin
          handle_col  <= cfg[5][0];
          stop_req    <= 1'b0;
          clear_stats <= 1'b1;
          rd_start    <= 1'b1;     // S lines
          b_start     <= 1'b1;
          state       <= J_BUILD;
        end
        J_BUILD: if (b_done) begin
          if (stop_req) begin
            done  <= 1'b1;
            state <= J_IDLE;
          end else begin
            l_left    <= cfg[3];
            l_line_no <= '0;
            rd_start  <= 1'b1;     // L lines (address mux follows the state)
            w_start   <= 1'b1;
            state     <= J_PROBE;
          end
        end
        J_PROBE: if (w_done) begin
          done  <= 1'b1;
          state <= J_IDLE;
        end
        default: state <= J_IDLE;
      endcase
    end
  end

  assign busy      = (state != J_IDLE);
  assign result[0] = match_count;
  assign result[1] = lines_written;

  logic unused;
  assign unused = b_busy ^ w_busy ^ rd_busy;
endmodule

// datamover: one of the two datamovers (DM 0, DM 1) that copy data between
// host memory, reached through the OpenCAPI endpoint, and the HBM, reached
// through one HBM-shim port. Compute engines never talk to the host; they
// only see the HBM, and the datamovers fill and drain it.
//
// A job is a run of 512-bit lines: dma_read pulls them from the source port
// into its FIFO, they pass straight into dma_write's FIFO, and dma_write
// bursts them out on the destination port, so both directions stream at one
// line per cycle once the pipes are full. Configuration words (from the
// control unit): 0/1 source byte address low/high, 2/3 destination byte
// address low/high, 4 number of lines, 5 bit0 direction (0: host to HBM,
// 1: HBM to host). busy is high from start to done; done pulses after the
// last write response. result0 = lines copied, result1 = cycles taken.
// The paper gives the datamovers' role; how they are built is this design's.
module datamover
  import hbm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic [31:0] result [2],
  // host memory side (OpenCAPI endpoint)
  output axi512_req_t host_req,
  input  axi512_rsp_t host_rsp,
  // HBM side (one shim port)
  output axi512_req_t hbm_req,
  input  axi512_rsp_t hbm_rsp
);
  logic              dir_q;     // 0: host -> HBM, 1: HBM -> host
  logic [31:0]       total_q, passed;
  logic [31:0]       cycles;
  logic              flushed;

  // read side signals
  logic              arvalid, rready, s_valid, s_ready, rd_busy;
  logic [ADDR_W-1:0] araddr;
  logic [3:0]        arlen;
  logic [LINE_W-1:0] s_data;
  // write side signals
  logic              awvalid, wvalid, wlast, bready, wr_busy, wr_done;
  logic [ADDR_W-1:0] awaddr;
  logic [3:0]        awlen;
  logic [LINE_W-1:0] wdata;
  logic [31:0]       lines_written;

  axi512_rsp_t src_rsp, dst_rsp;
  assign src_rsp = dir_q ? hbm_rsp : host_rsp;
  assign dst_rsp = dir_q ? host_rsp : hbm_rsp;

  wire [ADDR_W-1:0] src_addr = {cfg[1], cfg[0]};
  wire [ADDR_W-1:0] dst_addr = {cfg[3], cfg[2]};

  dma_read u_rd (
    .clk, .rst_n,
    .start, .base_addr(src_addr), .num_lines(cfg[4]), .busy(rd_busy),
    .arvalid, .araddr, .arlen, .arready(src_rsp.arready),
    .rvalid(src_rsp.rvalid), .rdata(src_rsp.rdata), .rlast(src_rsp.rlast), .rready,
    .out_valid(s_valid), .out_data(s_data), .out_ready(s_ready)
  );

  dma_write u_wr (
    .clk, .rst_n,
    .start, .base_addr(dst_addr), .flush(busy && !flushed && passed == total_q),
    .busy(wr_busy), .done(wr_done), .lines_written,
    .in_valid(s_valid), .in_data(s_data), .in_ready(s_ready),
    .awvalid, .awaddr, .awlen, .awready(dst_rsp.awready),
    .wvalid, .wdata, .wlast, .wready(dst_rsp.wready),
    .bvalid(dst_rsp.bvalid), .bready
  );

  always_comb begin
    host_req = '0;
    hbm_req  = '0;
    if (dir_q) begin
      hbm_req.arvalid  = arvalid; hbm_req.araddr = araddr; hbm_req.arlen = arlen;
      hbm_req.rready   = rready;
      host_req.awvalid = awvalid; host_req.awaddr = awaddr; host_req.awlen = awlen;
      host_req.wvalid  = wvalid;  host_req.wdata  = wdata;  host_req.wlast = wlast;
      host_req.bready  = bready;
    end else begin
      host_req.arvalid = arvalid; host_req.araddr = araddr; host_req.arlen = arlen;
      host_req.rready  = rready;
      hbm_req.awvalid  = awvalid; hbm_req.awaddr  = awaddr; hbm_req.awlen  = awlen;
      hbm_req.wvalid   = wvalid;  hbm_req.wdata   = wdata;  hbm_req.wlast  = wlast;
      hbm_req.bready   = bready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dir_q   <= 1'b0;
      total_q <= '0;
      passed  <= '0;
      busy    <= 1'b0;
      flushed <= 1'b0;
      cycles  <= '0;
    end else begin
      if (start) begin
        dir_q   <= cfg[5][0];
        total_q <= cfg[4];
        passed  <= '0;
        busy    <= 1'b1;
        flushed <= 1'b0;
        cycles  <= '0;
      end else if (busy) begin
        cycles <= cycles + 1;
        if (s_valid && s_ready) passed <= passed + 1;
        if (passed == total_q) flushed <= 1'b1;
        if (wr_done) busy <= 1'b0;
      end
    end
  end

  assign done      = wr_done;
  assign result[0] = lines_written;
  assign result[1] = cycles;

  logic unused;
  assign unused = rd_busy ^ wr_busy;
endmodule

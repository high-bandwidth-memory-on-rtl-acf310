// hbm_shim_port: one 512-bit port of the HBM-shim, built from two 256-bit
// HBM IP ports, one in each stack (port k and port k+16).
//
// A 512-bit line at shim byte address A is stored as two halves: bits
// [255:0] at address A/2 on the stack-0 port, bits [511:256] at A/2 plus the
// constant STACK1_OFFSET (4 GiB, the base of stack 1) on the stack-1 port.
// Both halves therefore sit at the same place in their own stack and no
// access ever crosses between stacks, which is the point of the shim.
// Handshakes: an address or write beat is offered to both ports and counts as
// accepted once both have taken it (each side remembers that it already did).
// A read beat or write response is passed up only when both ports have one,
// and both are then consumed together. The pairing of ports k and k+16 and
// the constant offset are the paper's; the handshake joining is this design's.
module hbm_shim_port
  import hbm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axi512_req_t s_req,     // from an engine or datamover
  output axi512_rsp_t s_rsp,
  output axi256_req_t m0_req,    // to HBM IP port k (stack 0)
  input  axi256_rsp_t m0_rsp,
  output axi256_req_t m1_req,    // to HBM IP port k+16 (stack 1)
  input  axi256_rsp_t m1_rsp
);
  logic ar_done0, ar_done1, aw_done0, aw_done1, w_done0, w_done1;

  wire [ADDR_W-1:0] ar_half = s_req.araddr >> 1;
  wire [ADDR_W-1:0] aw_half = s_req.awaddr >> 1;

  always_comb begin
    m0_req = '0;
    m1_req = '0;
    // address channels
    m0_req.arvalid = s_req.arvalid && !ar_done0;
    m1_req.arvalid = s_req.arvalid && !ar_done1;
    m0_req.araddr  = ar_half;
    m1_req.araddr  = ar_half + STACK1_OFFSET;
    m0_req.arlen   = s_req.arlen;
    m1_req.arlen   = s_req.arlen;
    m0_req.awvalid = s_req.awvalid && !aw_done0;
    m1_req.awvalid = s_req.awvalid && !aw_done1;
    m0_req.awaddr  = aw_half;
    m1_req.awaddr  = aw_half + STACK1_OFFSET;
    m0_req.awlen   = s_req.awlen;
    m1_req.awlen   = s_req.awlen;
    // write data
    m0_req.wvalid  = s_req.wvalid && !w_done0;
    m1_req.wvalid  = s_req.wvalid && !w_done1;
    m0_req.wdata   = s_req.wdata[HBM_DATA_W-1:0];
    m1_req.wdata   = s_req.wdata[LINE_W-1:HBM_DATA_W];
    m0_req.wlast   = s_req.wlast;
    m1_req.wlast   = s_req.wlast;
    // read data and write response: consume both halves together
    m0_req.rready  = s_req.rready && m1_rsp.rvalid;
    m1_req.rready  = s_req.rready && m0_rsp.rvalid;
    m0_req.bready  = s_req.bready && m1_rsp.bvalid;
    m1_req.bready  = s_req.bready && m0_rsp.bvalid;

    s_rsp.arready = (ar_done0 || m0_rsp.arready) && (ar_done1 || m1_rsp.arready);
    s_rsp.awready = (aw_done0 || m0_rsp.awready) && (aw_done1 || m1_rsp.awready);
    s_rsp.wready  = (w_done0  || m0_rsp.wready)  && (w_done1  || m1_rsp.wready);
    s_rsp.rvalid  = m0_rsp.rvalid && m1_rsp.rvalid;
    s_rsp.rdata   = {m1_rsp.rdata, m0_rsp.rdata};
    s_rsp.rlast   = m0_rsp.rlast;
    s_rsp.bvalid  = m0_rsp.bvalid && m1_rsp.bvalid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {ar_done0, ar_done1, aw_done0, aw_done1, w_done0, w_done1} <= '0;
    end else begin
      if (s_req.arvalid && s_rsp.arready) {ar_done0, ar_done1} <= '0;
      else begin
        if (m0_req.arvalid && m0_rsp.arready) ar_done0 <= 1'b1;
        if (m1_req.arvalid && m1_rsp.arready) ar_done1 <= 1'b1;
      end
      if (s_req.awvalid && s_rsp.awready) {aw_done0, aw_done1} <= '0;
      else begin
        if (m0_req.awvalid && m0_rsp.awready) aw_done0 <= 1'b1;
        if (m1_req.awvalid && m1_rsp.awready) aw_done1 <= 1'b1;
      end
      if (s_req.wvalid && s_rsp.wready) {w_done0, w_done1} <= '0;
      else begin
        if (m0_req.wvalid && m0_rsp.wready) w_done0 <= 1'b1;
        if (m1_req.wvalid && m1_rsp.wready) w_done1 <= 1'b1;
      end
    end
  end

  a_rlast_pair: assert property (@(posedge clk) disable iff (!rst_n)
                  s_rsp.rvalid |-> m0_rsp.rlast == m1_rsp.rlast);
endmodule

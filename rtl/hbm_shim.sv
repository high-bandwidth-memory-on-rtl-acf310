// hbm_shim: the HBM-shim of the system figure. It turns the 32 256-bit AXI3
// ports of the HBM IP into 16 512-bit ports: shim port k pairs HBM port k
// (stack 0) with HBM port k+16 (stack 1) through hbm_shim_port, which adds
// the constant stack-1 offset on the second port. Software then partitions
// data over the 16 shim ports at runtime (512 MiB of address space per
// port, the size of two pseudo channels, keeps each port on its own
// channels). Purely combinational paths apart from the per-port handshake
// flags; no added latency.
// The port pairing is the paper's; how handshakes are joined is this design's
// (see hbm_shim_port).
module hbm_shim
  import hbm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axi512_req_t s_req [SHIM_PORTS],
  output axi512_rsp_t s_rsp [SHIM_PORTS],
  output axi256_req_t m_req [HBM_PORTS],
  input  axi256_rsp_t m_rsp [HBM_PORTS]
);
  for (genvar k = 0; k < SHIM_PORTS; k++) begin : g_port
    hbm_shim_port u_port (
      .clk, .rst_n,
      .s_req (s_req[k]), .s_rsp (s_rsp[k]),
      .m0_req(m_req[k]), .m0_rsp(m_rsp[k]),
      .m1_req(m_req[k + SHIM_PORTS]), .m1_rsp(m_rsp[k + SHIM_PORTS])
    );
  end
endmodule

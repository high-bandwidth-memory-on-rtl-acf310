// hbm_analytics_top: the FPGA side of the HBM analytics system. The HBM IP
// (two stacks, 32 AXI3 ports of 256 bits) sits outside this module, as does
// the OpenCAPI endpoint to the host; both connect through top-level ports.
//
// Inside: the HBM-shim folds the 32 HBM ports into 16 ports of 512 bits
// (port k = HBM ports k and k+16). Shim ports 0 and 1 carry the two
// datamovers, which copy data between host memory and HBM; shim ports 2..15
// carry the compute engines. A control unit gives the host a register
// interface to configure, start and poll every datamover and engine on its
// own. Units and register blocks: unit 0, 1 = datamover 0, 1; unit 2+k =
// compute slot k (see control_unit for the register map).
//
// ENGINE selects which compute engine fills the slots, one kind per build
// as in the paper's three bitstreams: 14 range-selection engines, 7 join
// engines (engine j uses shim ports 2+2j for reading and 3+2j for writing,
// and is controlled through unit 2+2j), or 14 SGD engines. Software places
// each engine's data in the 512 MiB of shim address space that its own
// port maps onto its own HBM channels (port p: p*512 MiB upward). Engine
// configuration words hold 32-bit addresses, so every address an engine
// issues is taken relative to the start of its own port's region: the top
// adds p*512 MiB on shim port p (p >= 2). Datamovers take full 64-bit
// addresses and reach the whole HBM.
module hbm_analytics_top
  import hbm_pkg::*;
#(
  parameter engine_kind_e ENGINE             = ENG_SELECTION,
  parameter int unsigned  BUFFER_SIZE        = 1024,
  parameter int unsigned  HASH_TABLE_SIZE    = 8192,
  parameter int unsigned  MAX_DIMENSIONALITY = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  // host register interface (MMIO through OpenCAPI)
  input  logic        reg_wr,
  input  logic        reg_rd,
  input  logic [7:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        reg_rvalid,
  // host memory ports of the datamovers (through OpenCAPI)
  output axi512_req_t host_req [NUM_DM],
  input  axi512_rsp_t host_rsp [NUM_DM],
  // HBM IP ports
  output axi256_req_t hbm_req  [HBM_PORTS],
  input  axi256_rsp_t hbm_rsp  [HBM_PORTS]
);
  cfg_t        unit_cfg    [NUM_UNITS];
  logic        unit_start  [NUM_UNITS];
  logic        unit_stop   [NUM_UNITS];
  logic        unit_busy   [NUM_UNITS];
  logic        unit_done   [NUM_UNITS];
  logic [31:0] unit_result [NUM_UNITS][2];

  axi512_req_t shim_req [SHIM_PORTS];
  axi512_rsp_t shim_rsp [SHIM_PORTS];
  axi512_req_t ce_req   [SHIM_PORTS];   // engine side, port-relative addresses

  // engine ports: add the base of the port's own region
  for (genvar p = NUM_DM; p < SHIM_PORTS; p++) begin : g_base
    localparam logic [ADDR_W-1:0] BASE = ADDR_W'(p) << 29;
    always_comb begin
      shim_req[p]        = ce_req[p];
      shim_req[p].araddr = ce_req[p].araddr + BASE;
      shim_req[p].awaddr = ce_req[p].awaddr + BASE;
    end
  end

  control_unit u_ctrl (
    .clk, .rst_n, .reg_wr, .reg_rd, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .unit_cfg, .unit_start, .unit_stop, .unit_busy, .unit_done, .unit_result
  );

  hbm_shim u_shim (
    .clk, .rst_n, .s_req(shim_req), .s_rsp(shim_rsp), .m_req(hbm_req), .m_rsp(hbm_rsp)
  );

  for (genvar d = 0; d < NUM_DM; d++) begin : g_dm
    datamover u_dm (
      .clk, .rst_n, .cfg(unit_cfg[d]), .start(unit_start[d]),
      .busy(unit_busy[d]), .done(unit_done[d]), .result(unit_result[d]),
      .host_req(host_req[d]), .host_rsp(host_rsp[d]),
      .hbm_req(shim_req[d]), .hbm_rsp(shim_rsp[d])
    );
    logic unused_stop;
    assign unused_stop = unit_stop[d];
  end

  if (ENGINE == ENG_SELECTION) begin : g_sel
    for (genvar k = 0; k < NUM_CE; k++) begin : g_ce
      localparam int U = NUM_DM + k;
      selection_engine #(.BUFFER_SIZE(BUFFER_SIZE)) u_ce (
        .clk, .rst_n, .cfg(unit_cfg[U]), .start(unit_start[U]), .stop(unit_stop[U]),
        .busy(unit_busy[U]), .done(unit_done[U]), .result(unit_result[U]),
        .m_req(ce_req[U]), .m_rsp(shim_rsp[U])
      );
    end
  end else if (ENGINE == ENG_JOIN) begin : g_join
    for (genvar j = 0; j < NUM_CE / 2; j++) begin : g_ce
      localparam int U = NUM_DM + 2*j;
      logic [31:0] repeats;
      join_engine #(.HASH_TABLE_SIZE(HASH_TABLE_SIZE)) u_ce (
        .clk, .rst_n, .cfg(unit_cfg[U]), .start(unit_start[U]), .stop(unit_stop[U]),
        .busy(unit_busy[U]), .done(unit_done[U]), .result(unit_result[U]),
        .repeats,
        .rd_req(ce_req[U]), .rd_rsp(shim_rsp[U]),
        .wr_req(ce_req[U+1]), .wr_rsp(shim_rsp[U+1])
      );
      // the second unit of the pair has no engine of its own; its status
      // shows the collision-chain steps of the engine as result1
      assign unit_busy[U+1]      = 1'b0;
      assign unit_done[U+1]      = unit_done[U];
      assign unit_result[U+1][0] = unit_result[U][0];
      assign unit_result[U+1][1] = repeats;
      logic unused_pair;
      assign unused_pair = unit_start[U+1] ^ unit_stop[U+1] ^ (^unit_cfg[U+1]);
    end
  end else begin : g_sgd
    for (genvar k = 0; k < NUM_CE; k++) begin : g_ce
      localparam int U = NUM_DM + k;
      sgd_engine #(.MAX_DIMENSIONALITY(MAX_DIMENSIONALITY)) u_ce (
        .clk, .rst_n, .cfg(unit_cfg[U]), .start(unit_start[U]), .stop(unit_stop[U]),
        .busy(unit_busy[U]), .done(unit_done[U]), .result(unit_result[U]),
        .m_req(ce_req[U]), .m_rsp(shim_rsp[U])
      );
    end
  end
endmodule

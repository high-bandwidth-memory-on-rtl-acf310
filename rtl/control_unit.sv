// control_unit: the Control/Monitor block. It gives the host a register
// read/write interface through which every unit on the 16 shim ports (two
// datamovers and 14 compute engines) is configured, started and watched,
// each on its own and at any time, so software can run engines in parallel
// and build barriers itself.
//
// Register address = {unit[3:0], reg[3:0]}; units 0 and 1 are the
// datamovers, units 2..15 the compute-engine slots. Per unit:
//   0..11  configuration words (read/write), meaning defined by the unit
//   12     CTRL   write: bit0 = start, bit1 = stop request (both one-cycle
//                 pulses to the unit); reads 0
//   13     STATUS bit0 busy, bit1 done (sticky, cleared by the next start)
//   14,15  RESULT0/RESULT1 from the unit, latched when it signals done
// A read returns data one cycle after reg_rd. The paper states the function
// (asynchronous start/stop and monitoring via register read/write); the
// register map and timing are this design's.
module control_unit
  import hbm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // host register interface
  input  logic        reg_wr,
  input  logic        reg_rd,
  input  logic [7:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        reg_rvalid,
  // to / from the units
  output cfg_t        unit_cfg    [NUM_UNITS],
  output logic        unit_start  [NUM_UNITS],
  output logic        unit_stop   [NUM_UNITS],
  input  logic        unit_busy   [NUM_UNITS],
  input  logic        unit_done   [NUM_UNITS],
  input  logic [31:0] unit_result [NUM_UNITS][2]
);
  logic        done_flag [NUM_UNITS];
  logic [31:0] result_q  [NUM_UNITS][2];

  wire [3:0] sel_unit = reg_addr[7:4];
  wire [3:0] sel_reg  = reg_addr[3:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int u = 0; u < NUM_UNITS; u++) begin
        unit_cfg[u]    <= '0;
        unit_start[u]  <= 1'b0;
        unit_stop[u]   <= 1'b0;
        done_flag[u]   <= 1'b0;
        result_q[u][0] <= '0;
        result_q[u][1] <= '0;
      end
      reg_rdata  <= '0;
      reg_rvalid <= 1'b0;
    end else begin
      for (int u = 0; u < NUM_UNITS; u++) begin
        unit_start[u] <= 1'b0;
        unit_stop[u]  <= 1'b0;
        if (unit_done[u]) begin
          done_flag[u]   <= 1'b1;
          result_q[u][0] <= unit_result[u][0];
          result_q[u][1] <= unit_result[u][1];
        end
      end
      if (reg_wr) begin
        if (sel_reg < NUM_CFG) begin
          unit_cfg[sel_unit][sel_reg] <= reg_wdata;
        end else if (sel_reg == 4'(REG_CTRL)) begin
          unit_start[sel_unit] <= reg_wdata[0];
          unit_stop[sel_unit]  <= reg_wdata[1];
          if (reg_wdata[0]) done_flag[sel_unit] <= 1'b0;
        end
      end
      reg_rvalid <= reg_rd;
      if (reg_rd) begin
        unique case (sel_reg)
          4'(REG_CTRL):    reg_rdata <= '0;
          4'(REG_STATUS):  reg_rdata <= {30'd0, done_flag[sel_unit], unit_busy[sel_unit]};
          4'(REG_RESULT0): reg_rdata <= result_q[sel_unit][0];
          4'(REG_RESULT1): reg_rdata <= result_q[sel_unit][1];
          default:         reg_rdata <= unit_cfg[sel_unit][sel_reg];
        endcase
      end
    end
  end
endmodule

// sgd_update: the Update module of the SGD engine together with the on-chip
// model memory model[MAX_DIMENSIONALITY/16][16] and a gradient memory of the
// same shape (the gradient g of the algorithm; the paper's figure draws only
// the model).
//
// Operations, one at a time (busy is high during the multi-cycle ones):
//  * accumulate (acc_valid, one feature line per cycle): for line idx of
//    the current sample, g[idx] += s * a on all sixteen lanes, where s is
//    the sample's scalar from the ScalarEngine. Read-modify-write takes two
//    cycles and is pipelined; a bypass covers back-to-back use of one line.
//  * model update (cmd_model_update, num_lines cycles + 1): at the end of a
//    minibatch, x = x - alpha*g - c2*x with c2 = 2*alpha*lambda, and g = 0.
//  * clear gradient (cmd_clear_grad) and clear all (cmd_clear_all, x = 0 and
//    g = 0), num_lines cycles each.
// x_raddr/x_rdata is a one-cycle read port into the model for the Dot
// module and for writing the model out; it is only valid while busy is low.
// Fixed point as in hbm_pkg (fx_mul).
module sgd_update
  import hbm_pkg::*;
#(
  parameter int unsigned MAX_DIMENSIONALITY = 2048,
  localparam int unsigned LINES = MAX_DIMENSIONALITY / PARALLELISM,
  localparam int unsigned IW = $clog2(LINES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [IW:0]        num_lines,
  input  logic signed [31:0] alpha,
  input  logic signed [31:0] c2,
  input  logic               cmd_clear_all,
  input  logic               cmd_clear_grad,
  input  logic               cmd_model_update,
  output logic               busy,
  // gradient accumulation
  input  logic               acc_valid,
  input  logic [IW-1:0]      acc_idx,
  input  line_t              acc_a,
  input  logic signed [31:0] acc_s,
  // model read port
  input  logic [IW-1:0]      x_raddr,
  output line_t              x_rdata
);
  typedef enum logic [1:0] {U_IDLE, U_CLEAR_ALL, U_CLEAR_G, U_MODEL} mode_e;
  mode_e mode;

  line_t xmem [LINES];
  line_t gmem [LINES];

  logic [IW:0]   ctr;
  logic          mv;             // model-update read issued last cycle
  logic [IW-1:0] m_idx;
  logic          av;             // accumulate read issued last cycle
  logic [IW-1:0] a_idx;
  line_t         a_prod;
  logic          byp;
  line_t         byp_data, g_rdata, g_cur;

  logic          x_we, g_we;
  logic [IW-1:0] x_waddr, g_waddr, x_ra, g_ra;
  line_t         x_wdata, g_wdata;

  assign busy = (mode != U_IDLE) || mv;
  wire issuing_model = (mode == U_MODEL) && (ctr < num_lines);

  assign x_ra = issuing_model ? IW'(ctr) : x_raddr;
  assign g_ra = issuing_model ? IW'(ctr) : acc_idx;
  assign g_cur = byp ? byp_data : g_rdata;

  always_comb begin
    x_we = 1'b0; x_waddr = '0; x_wdata = '0;
    g_we = 1'b0; g_waddr = '0; g_wdata = '0;
    if (mode == U_CLEAR_ALL || mode == U_CLEAR_G) begin
      g_we = 1'b1; g_waddr = IW'(ctr);
      x_we = (mode == U_CLEAR_ALL); x_waddr = IW'(ctr);
    end else if (mv) begin
      x_we = 1'b1; x_waddr = m_idx;
      g_we = 1'b1; g_waddr = m_idx;
      for (int l = 0; l < PARALLELISM; l++)
        x_wdata[l] = x_rdata[l] - fx_mul(alpha, g_cur[l]) - fx_mul(c2, x_rdata[l]);
    end else if (av) begin
      g_we = 1'b1; g_waddr = a_idx;
      for (int l = 0; l < PARALLELISM; l++) g_wdata[l] = g_cur[l] + a_prod[l];
    end
  end

  always_ff @(posedge clk) begin
    if (x_we) xmem[x_waddr] <= x_wdata;
    if (g_we) gmem[g_waddr] <= g_wdata;
    x_rdata <= xmem[x_ra];
    g_rdata <= gmem[g_ra];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= U_IDLE; ctr <= '0; mv <= 1'b0; m_idx <= '0;
      av <= 1'b0; a_idx <= '0; a_prod <= '0; byp <= 1'b0; byp_data <= '0;
    end else begin
      byp      <= g_we && (g_waddr == g_ra);
      byp_data <= g_wdata;
      mv       <= issuing_model;
      m_idx    <= IW'(ctr);
      av       <= acc_valid && (mode == U_IDLE);
      a_idx    <= acc_idx;
      for (int l = 0; l < PARALLELISM; l++) a_prod[l] <= fx_mul(acc_s, acc_a[l]);
      unique case (mode)
        U_IDLE: begin
          ctr <= '0;
          if (cmd_clear_all)         mode <= U_CLEAR_ALL;
          else if (cmd_clear_grad)   mode <= U_CLEAR_G;
          else if (cmd_model_update) mode <= U_MODEL;
        end
        U_CLEAR_ALL, U_CLEAR_G: begin
          ctr <= ctr + 1'b1;
          if (ctr + 1'b1 >= num_lines) mode <= U_IDLE;
        end
        U_MODEL: begin
          ctr <= ctr + 1'b1;
          if (ctr + 1'b1 >= num_lines) mode <= U_IDLE;
        end
        default: mode <= U_IDLE;
      endcase
    end
  end

  a_acc_idle: assert property (@(posedge clk) disable iff (!rst_n) acc_valid |-> mode == U_IDLE);
endmodule

// tb_hbm_shim: the HBM-shim between 16 traffic sources and a model of the
// HBM IP (32 ports of 256 bits). On every shim port a dma_write writes NL
// distinct lines, all 16 ports at once, then a dma_read reads them back.
// Checks: the data read back; the placement of every line (low half at
// A/2 in stack 0, high half at A/2 + 4 GiB in stack 1, so the shim port k
// traffic is all on HBM ports k and k+16); equal beat counts in the two
// stacks and on each port pair; and the rate: all 16 ports together move
// 16 lines per cycle, so writing and reading NL lines per port each finish
// within NL + 60 cycles (the HBM model has a 12-cycle latency and never
// stalls).
// The pairing of ports k and k+16 and the constant stack offset are the
// paper's; the 4 GiB value of the offset is this design's.
module tb_hbm_shim;
  import hbm_pkg::*;
  localparam int NL = 600;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  axi512_req_t s_req [SHIM_PORTS];
  axi512_rsp_t s_rsp [SHIM_PORTS];
  axi256_req_t m_req [HBM_PORTS];
  axi256_rsp_t m_rsp [HBM_PORTS];
  int checks = 0, failures = 0;

  hbm_shim dut (.clk, .rst_n, .s_req, .s_rsp, .m_req, .m_rsp);
  hbm_model u_hbm (.clk, .req(m_req), .rsp(m_rsp));

  logic wstart = 0, rstart = 0, flush = 0;
  logic w_done [SHIM_PORTS], r_busy [SHIM_PORTS];
  logic [SHIM_PORTS-1:0] in_valid = '0;
  logic in_ready [SHIM_PORTS], out_valid [SHIM_PORTS];
  logic [LINE_W-1:0] out_data [SHIM_PORTS];
  int sent [SHIM_PORTS], got [SHIM_PORTS], bad [SHIM_PORTS];

  function automatic logic [LINE_W-1:0] pattern(int p, int i);
    logic [LINE_W-1:0] d;
    for (int w = 0; w < 16; w++) d[w*32 +: 32] = 32'(p * 100000 + i * 16 + w);
    return d;
  endfunction
  function automatic longint unsigned base(int p);
    return longint'(p) << 29;
  endfunction

  for (genvar p = 0; p < SHIM_PORTS; p++) begin : g_src
    logic wb, rb, wd;
    logic [31:0] lw;
    dma_write u_w (
      .clk, .rst_n, .start(wstart), .base_addr(base(p)), .flush, .busy(wb), .done(w_done[p]),
      .lines_written(lw), .in_valid(in_valid[p]), .in_data(pattern(p, sent[p])), .in_ready(in_ready[p]),
      .awvalid(s_req[p].awvalid), .awaddr(s_req[p].awaddr), .awlen(s_req[p].awlen), .awready(s_rsp[p].awready),
      .wvalid(s_req[p].wvalid), .wdata(s_req[p].wdata), .wlast(s_req[p].wlast), .wready(s_rsp[p].wready),
      .bvalid(s_rsp[p].bvalid), .bready(s_req[p].bready)
    );
    dma_read u_r (
      .clk, .rst_n, .start(rstart), .base_addr(base(p)), .num_lines(NL), .busy(r_busy[p]),
      .arvalid(s_req[p].arvalid), .araddr(s_req[p].araddr), .arlen(s_req[p].arlen), .arready(s_rsp[p].arready),
      .rvalid(s_rsp[p].rvalid), .rdata(s_rsp[p].rdata), .rlast(s_rsp[p].rlast), .rready(s_req[p].rready),
      .out_valid(out_valid[p]), .out_data(out_data[p]), .out_ready(1'b1)
    );
    always @(posedge clk) begin
      if (rst_n && in_valid[p] && in_ready[p]) sent[p] <= sent[p] + 1;
      if (rst_n && out_valid[p]) begin
        if (out_data[p] != pattern(p, got[p])) bad[p] <= bad[p] + 1;
        got[p] <= got[p] + 1;
      end
    end
    assign in_valid[p] = sent[p] < NL && wb;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    longint t0;
    int nd, wrong_place;
    for (int p = 0; p < SHIM_PORTS; p++) begin sent[p] = 0; got[p] = 0; bad[p] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); wstart = 1; t0 = $time;
    @(negedge clk); wstart = 0;
    wait (sent[0] == NL && sent[15] == NL);
    @(negedge clk); flush = 1;
    @(negedge clk); flush = 0;
    nd = 0;
    while (nd < SHIM_PORTS) begin
      @(posedge clk);
      foreach (w_done[p]) if (w_done[p]) nd++;
    end
    check(($time - t0) / 2 <= NL + 60, $sformatf("16 x %0d lines written in %0d cycles", NL, ($time - t0) / 2));
    // placement of both halves
    wrong_place = 0;
    for (int p = 0; p < SHIM_PORTS; p++)
      for (int i = 0; i < NL; i += 7) begin
        logic [LINE_W-1:0] d;
        longint unsigned a;
        d = pattern(p, i);
        a = base(p) + longint'(i) * 64;
        if (u_hbm.peek(a / 64) != d[255:0] || u_hbm.peek((a / 2 + STACK1_OFFSET) / 32) != d[511:256])
          wrong_place++;
      end
    check(wrong_place == 0, $sformatf("%0d lines not split across the stacks as expected", wrong_place));
    @(negedge clk); rstart = 1; t0 = $time;
    @(negedge clk); rstart = 0;
    wait (got[0] == NL && got[15] == NL);
    repeat (20) @(negedge clk);
    check(($time - t0) / 2 <= NL + 80, $sformatf("16 x %0d lines read in %0d cycles", NL, ($time - t0) / 2));
    for (int p = 0; p < SHIM_PORTS; p++) begin
      check(got[p] == NL && bad[p] == 0, $sformatf("port %0d read %0d lines, %0d wrong", p, got[p], bad[p]));
      check(u_hbm.beats_port[p] == u_hbm.beats_port[p + 16] && u_hbm.beats_port[p] == 2 * NL,
            $sformatf("port pair %0d beats %0d / %0d", p, u_hbm.beats_port[p], u_hbm.beats_port[p + 16]));
    end
    check(u_hbm.beats_stack[0] == u_hbm.beats_stack[1], "stack beat counts equal");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

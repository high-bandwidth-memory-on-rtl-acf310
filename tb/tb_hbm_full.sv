// tb_hbm_full: the top at its default size and parameters (selection
// build, 14 engines, 1024-line buffers, 16 shim ports over 32 HBM ports),
// with a stand-in for the HBM IP. Each engine's partition of the input is
// placed straight into HBM (as if a datamover had copied it), all 14
// engines are started through the register interface and polled until
// done.
//   Job 1, no item matches: every engine must stream its NL lines at one
//   line per cycle (the paper's 16 items per cycle per engine), so each
//   engine finishes within NL cycles plus a small fixed latency, and the
//   14 engines together consume 14 lines per cycle.
//   Job 2, about 30 % selectivity: every result line is checked against a
//   software model of the buffered selection with dummy padding.
module tb_hbm_full;
  import hbm_pkg::*;
  localparam int NL = 4096;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic        reg_wr = 0, reg_rd = 0, reg_rvalid;
  logic [7:0]  reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  axi512_req_t host_req [NUM_DM];
  axi512_rsp_t host_rsp [NUM_DM];
  axi256_req_t hbm_req [HBM_PORTS];
  axi256_rsp_t hbm_rsp [HBM_PORTS];

  hbm_analytics_top u_top (
    .clk, .rst_n, .reg_wr, .reg_rd, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .host_req, .host_rsp, .hbm_req, .hbm_rsp
  );
  hbm_model u_hbm (.clk, .req(hbm_req), .rsp(hbm_rsp));
  axi_mem_model u_host0 (.clk, .req(host_req[0]), .rsp(host_rsp[0]));
  axi_mem_model u_host1 (.clk, .req(host_req[1]), .rsp(host_rsp[1]));

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(int u, int r, logic [31:0] d);
    @(posedge clk); reg_wr <= 1; reg_addr <= 8'(u*16 + r); reg_wdata <= d;
    @(posedge clk); reg_wr <= 0;
  endtask
  task automatic rd(int u, int r, output logic [31:0] d);
    @(posedge clk); reg_rd <= 1; reg_addr <= 8'(u*16 + r);
    @(posedge clk); reg_rd <= 0;
    @(negedge clk); d = reg_rdata;
  endtask

  // a 512-bit line at shim byte address a: low half in stack 0, high half in stack 1
  task automatic put_line(longint unsigned a, logic [LINE_W-1:0] d);
    u_hbm.poke(a / 64, d[255:0]);
    u_hbm.poke(a / 64 + (64'd1 << 27), d[511:256]);
  endtask
  function automatic logic [LINE_W-1:0] get_line(longint unsigned a);
    return {u_hbm.peek(a / 64 + (64'd1 << 27)), u_hbm.peek(a / 64)};
  endfunction

  int data [NUM_CE][];
  longint t_start, t_done [NUM_CE];

  task automatic run_job(int lo, int hi, int modv);
    logic [31:0] s;
    int left;
    for (int k = 0; k < NUM_CE; k++) begin
      data[k] = new[NL*16];
      for (int n = 0; n < NL; n++) begin
        logic [LINE_W-1:0] d;
        for (int l = 0; l < 16; l++) begin
          data[k][n*16+l] = int'($urandom % modv);
          d[l*32 +: 32] = data[k][n*16+l];
        end
        put_line((longint'(NUM_DM + k) << 29) + longint'(n) * 64, d);
      end
      wr(NUM_DM+k, 0, 0); wr(NUM_DM+k, 1, NL); wr(NUM_DM+k, 2, lo); wr(NUM_DM+k, 3, hi);
      wr(NUM_DM+k, 4, 32'(256) << 20);
    end
    // start all engines back to back, then watch their done flags
    for (int k = 0; k < NUM_CE; k++) begin
      @(posedge clk); reg_wr <= 1; reg_addr <= 8'((NUM_DM+k)*16 + REG_CTRL); reg_wdata <= 1;
    end
    @(posedge clk); reg_wr <= 0;
    t_start = cyc;
    for (int k = 0; k < NUM_CE; k++) t_done[k] = -1;
    left = NUM_CE;
    while (left > 0) begin
      @(posedge clk);
      for (int k = 0; k < NUM_CE; k++)
        if (t_done[k] < 0 && u_top.unit_done[NUM_DM+k]) begin t_done[k] = cyc; left--; end
    end
    for (int k = 0; k < NUM_CE; k++) begin
      rd(NUM_DM+k, REG_STATUS, s);
      check(s[1] && !s[0], $sformatf("engine %0d status %b", k, s[1:0]));
    end
  endtask

  task automatic check_results(int lo, int hi);
    for (int k = 0; k < NUM_CE; k++) begin
      int out_n = 0, exp_m = 0;
      logic [31:0] m, nl;
      longint unsigned ob = (longint'(NUM_DM + k) << 29) + (64'd256 << 20);
      for (int c = 0; c * 1024 < NL; c++) begin
        int q [16][$];
        int rows = 0;
        for (int n = c*1024; n < NL && n < (c+1)*1024; n++)
          for (int l = 0; l < 16; l++)
            if (data[k][n*16+l] > lo && data[k][n*16+l] < hi) q[l].push_back(n*16+l);
        for (int l = 0; l < 16; l++) begin
          exp_m += q[l].size();
          if (q[l].size() > rows) rows = q[l].size();
        end
        for (int r = 0; r < rows; r++) begin
          logic [LINE_W-1:0] g = get_line(ob + longint'(out_n) * 64);
          bit ok = 1;
          for (int l = 0; l < 16; l++)
            if (g[l*32 +: 32] != ((r < q[l].size()) ? 32'(q[l][r]) : DUMMY_WORD)) ok = 0;
          check(ok, $sformatf("engine %0d line %0d", k, out_n));
          out_n++;
        end
      end
      rd(NUM_DM+k, REG_RESULT0, m); rd(NUM_DM+k, REG_RESULT1, nl);
      check(m == 32'(exp_m), $sformatf("engine %0d matches %0d exp %0d", k, m, exp_m));
      check(nl == 32'(out_n), $sformatf("engine %0d lines %0d exp %0d", k, nl, out_n));
    end
  endtask

  initial begin
    longint last;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // job 1: nothing matches -> pure streaming rate
    run_job(10, 5, 1000);
    last = 0;
    for (int k = 0; k < NUM_CE; k++) begin
      longint t;
      t = t_done[k] - t_start;
      if (t > last) last = t;
      check(t <= NL + 120, $sformatf("engine %0d took %0d cycles for %0d lines", k, t, NL));
    end
    $display("job 1: 14 engines x %0d lines in %0d cycles (%.2f lines/cycle together)",
             NL, last, real'(NUM_CE * NL) / real'(last));
    check(real'(NUM_CE * NL) / real'(last) >= 13.0, "aggregate rate >= 13 lines per cycle");
    check_results(10, 5);
    // job 2: ~30 % selectivity, content check
    run_job(100, 400, 1000);
    check_results(100, 400);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #4000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule

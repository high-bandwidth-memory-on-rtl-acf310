// tb_selection_engine: self-checking test of the range-selection engine on
// a behavioural memory. Random columns are scanned at three selectivities
// (about 30 %, 0 % and 100 %); the result lines, the match count and the
// number of lines written are compared with a model of the algorithm that
// includes the per-chunk, per-lane layout and dummy padding. The 0 % run
// also checks the rate of one input line per cycle, and a last run checks
// that a stop request ends the job early.
// BUFFER_SIZE 1024, 16 lanes, alternating ingress/egress and dummy padding
// follow the paper; data sizes are this testbench's own.
module tb_selection_engine;
  import hbm_pkg::*;

  localparam int BUF   = 1024;
  localparam int NLINE = 2500;     // 3 chunks: 1024 + 1024 + 452
  localparam longint IN_LINE  = 64'h1000;   // line addresses
  localparam longint OUT_LINE = 64'h8000;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  cfg_t        cfg;
  logic        start = 0, stop = 0, busy, done;
  logic [31:0] result [2];
  axi512_req_t m_req;
  axi512_rsp_t m_rsp;
  int checks = 0, failures = 0;

  selection_engine dut (.clk, .rst_n, .cfg, .start, .stop, .busy, .done, .result, .m_req, .m_rsp);
  axi_mem_model #(.LATENCY(20)) u_mem (.clk, .req(m_req), .rsp(m_rsp));

  int data [NLINE*16];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fill(int kind);
    for (int i = 0; i < NLINE*16; i++)
      data[i] = (kind == 0) ? int'($urandom % 1000) : (kind == 1) ? 2000 + int'($urandom % 100) : 500;
    for (int n = 0; n < NLINE; n++) begin
      logic [LINE_W-1:0] d;
      for (int l = 0; l < 16; l++) d[l*32 +: 32] = data[n*16+l];
      u_mem.poke(IN_LINE + n, d);
    end
  endtask

  task automatic run(int lo, int hi, int lines, output int cycles);
    cfg = '0;
    cfg[0] = 32'(IN_LINE * 64); cfg[1] = lines; cfg[2] = lo; cfg[3] = hi; cfg[4] = 32'(OUT_LINE * 64);
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    cycles = 0;
    while (!done) begin @(posedge clk); cycles++; end
  endtask

  task automatic verify(int lo, int hi, int lines);
    int exp_matches = 0, out_n = 0;
    for (int c = 0; c * BUF < lines; c++) begin
      int q [16][$];
      int rows = 0;
      for (int n = c*BUF; n < lines && n < (c+1)*BUF; n++)
        for (int l = 0; l < 16; l++)
          if (data[n*16+l] > lo && data[n*16+l] < hi) q[l].push_back(n*16+l);
      for (int l = 0; l < 16; l++) begin
        exp_matches += q[l].size();
        if (q[l].size() > rows) rows = q[l].size();
      end
      for (int r = 0; r < rows; r++) begin
        logic [LINE_W-1:0] got = u_mem.peek(OUT_LINE + out_n);
        bit ok = 1;
        for (int l = 0; l < 16; l++) begin
          int e = (r < q[l].size()) ? q[l][r] : -1;
          if (got[l*32 +: 32] != 32'(e)) ok = 0;
        end
        check(ok, $sformatf("result line %0d (chunk %0d row %0d)", out_n, c, r));
        out_n++;
      end
    end
    check(result[0] == 32'(exp_matches), $sformatf("matches %0d exp %0d", result[0], exp_matches));
    check(result[1] == 32'(out_n), $sformatf("lines %0d exp %0d", result[1], out_n));
  endtask

  initial begin
    int cyc;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // ~30 % selectivity, with a negative bound
    fill(0);
    run(-5, 300, NLINE, cyc);
    verify(-5, 300, NLINE);
    // 0 %: rate check, one line per cycle plus per-chunk and memory overhead
    fill(1);
    run(0, 100, NLINE, cyc);
    verify(0, 100, NLINE);
    $display("0%% selectivity: %0d lines in %0d cycles", NLINE, cyc);
    check(cyc <= NLINE + 3*16 + 80, $sformatf("rate: %0d cycles for %0d lines", cyc, NLINE));
    // 100 %: output as large as input
    fill(2);
    run(0, 1000, NLINE, cyc);
    verify(0, 1000, NLINE);
    $display("100%% selectivity: %0d cycles", cyc);
    // stop: ends after the first chunk
    fill(0);
    cfg[1] = NLINE; cfg[2] = -5; cfg[3] = 300;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0; stop <= 1; @(posedge clk); stop <= 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    verify(-5, 300, BUF);
    check(!busy, "idle after stop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

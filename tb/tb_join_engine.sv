// tb_join_engine: self-checking test of the hash-join engine on two
// behavioural memory ports. Three jobs: (1) unique S whose keys differ in
// their hash bits, collision handling off, L keys half from S: exact
// pairs expected, plus a rate check for the probe; (2) S with duplicates
// and hash collisions, collision handling on: every (L, S) pair with equal
// keys must appear; (3) L with no matches: nothing written, probe at one
// line per cycle. Output rows are compared line by line with a model of
// the lane/assemble layout (chain order, dummy padding, L line then S line).
// Build-then-probe, 16 replicas, II = 1 probing and dummy padding follow the
// paper; the sizes tested are this testbench's own.
module tb_join_engine;
  import hbm_pkg::*;

  localparam int HT = 8192;
  localparam int NS = 4096;
  localparam int NL = 600;                 // L lines
  localparam longint S_LINE = 64'h100, L_LINE = 64'h2000, O_LINE = 64'h10000;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  cfg_t        cfg;
  logic        start = 0, stop = 0, busy, done;
  logic [31:0] result [2], repeats;
  axi512_req_t rd_req, wr_req;
  axi512_rsp_t rd_rsp, wr_rsp;
  int checks = 0, failures = 0;

  join_engine dut (.clk, .rst_n, .cfg, .start, .stop, .busy, .done, .result, .repeats,
                   .rd_req, .rd_rsp, .wr_req, .wr_rsp);
  axi_mem_model #(.LATENCY(20)) u_rmem (.clk, .req(rd_req), .rsp(rd_rsp));
  axi_mem_model #(.LATENCY(20), .STALL_PCT(10)) u_wmem (.clk, .req(wr_req), .rsp(wr_rsp));

  int S [NS];
  int L [NL*16];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load();
    for (int n = 0; n < NS/16; n++) begin
      logic [LINE_W-1:0] d;
      for (int l = 0; l < 16; l++) d[l*32 +: 32] = S[n*16+l];
      u_rmem.poke(S_LINE + n, d);
    end
    for (int n = 0; n < NL; n++) begin
      logic [LINE_W-1:0] d;
      for (int l = 0; l < 16; l++) d[l*32 +: 32] = L[n*16+l];
      u_rmem.poke(L_LINE + n, d);
    end
  endtask

  task automatic run(bit hc, output int cycles);
    cfg = '0;
    cfg[0] = 32'(S_LINE*64); cfg[1] = NS; cfg[2] = 32'(L_LINE*64); cfg[3] = NL;
    cfg[4] = 32'(O_LINE*64); cfg[5] = 32'(hc);
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    cycles = 0;
    while (!done) begin @(posedge clk); cycles++; end
  endtask

  // model of the engine's output for collision handling hc
  task automatic verify(bit hc);
    int out_n = 0, nmatch = 0;
    int chain [int][$];                  // hash -> slots, newest first
    for (int i = 0; i < NS; i++) chain[S[i] & (HT-1)].push_front(i);
    for (int n = 0; n < NL; n++) begin
      int ent_s [16][$];                 // per lane: slot or -1 for no match
      int p [16];
      bit fin = 0;
      for (int k = 0; k < 16; k++) begin
        int key = L[n*16+k];
        int h = key & (HT-1);
        p[k] = 0;
        if (!chain.exists(h)) ent_s[k].push_back(-1);
        else if (!hc) ent_s[k].push_back(S[chain[h][0]] == key ? chain[h][0] : -1);
        else foreach (chain[h][j]) ent_s[k].push_back(S[chain[h][j]] == key ? chain[h][j] : -1);
      end
      while (!fin) begin
        bit all_last = 1, any = 0;
        logic [LINE_W-1:0] el = '1, es = '1;
        for (int k = 0; k < 16; k++) if (p[k] != ent_s[k].size()-1) all_last = 0;
        for (int k = 0; k < 16; k++) begin
          if (p[k] < ent_s[k].size()-1 || all_last) begin
            if (ent_s[k][p[k]] >= 0) begin
              el[k*32 +: 32] = n*16+k; es[k*32 +: 32] = ent_s[k][p[k]]; any = 1; nmatch++;
            end
            p[k]++;
          end
        end
        if (any) begin
          check(u_wmem.peek(O_LINE + out_n) == el, $sformatf("L_out line %0d (L line %0d)", out_n, n));
          check(u_wmem.peek(O_LINE + out_n + 1) == es, $sformatf("S_out line %0d (L line %0d)", out_n+1, n));
          out_n += 2;
        end
        fin = all_last;
      end
    end
    check(result[0] == 32'(nmatch), $sformatf("matches %0d exp %0d", result[0], nmatch));
    check(result[1] == 32'(out_n), $sformatf("lines %0d exp %0d", result[1], out_n));
    $display("join: %0d matches, %0d lines, %0d chain steps", nmatch, out_n, repeats);
  endtask

  initial begin
    int cyc;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // (1) unique S, distinct hash bits: S[i] = perm(i) + HT * random
    for (int i = 0; i < NS; i++) S[i] = i * 2 + HT * int'($urandom % 1000);
    S.shuffle();
    for (int i = 0; i < NL*16; i++) L[i] = ($urandom % 2) ? S[$urandom % NS] : int'($urandom);
    load();
    run(0, cyc);
    verify(0);
    $display("unique S: %0d cycles", cyc);
    // build: clear + 2 cycles per key; probe: about 2 cycles per L line
    // with matches (two output lines per row) plus latency
    check(cyc <= HT + 2*NS + 2*NL + 200, $sformatf("rate unique S: %0d cycles", cyc));
    // (2) duplicates and collisions, handling on
    for (int i = 0; i < NS; i++) S[i] = int'($urandom % 3000) + HT * int'($urandom % 3);
    for (int i = 0; i < NL*16; i++) L[i] = ($urandom % 2) ? S[$urandom % NS] : int'($urandom % 5000);
    load();
    run(1, cyc);
    verify(1);
    check(repeats > 0, "collision chains walked");
    $display("non-unique S: %0d cycles", cyc);
    // (3) no matches: probe at one line per cycle
    for (int i = 0; i < NS; i++) S[i] = i;
    for (int i = 0; i < NL*16; i++) L[i] = 100000 + i;
    load();
    run(0, cyc);
    verify(0);
    $display("no matches: %0d cycles", cyc);
    check(cyc <= HT + 2*NS + NL + 120, $sformatf("rate no match: %0d cycles", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

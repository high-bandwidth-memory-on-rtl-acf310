// sys_harness: runs one complete job of the whole system for one engine
// kind, the way host software would: fill host memory, have the two
// datamovers copy each engine's data into that engine's own HBM region,
// configure and start all engines through the register interface, poll
// until all are done, copy the results back to host memory with the
// datamovers and compare them with a software model.
//   selection: 14 engines, NSEL lines each (more than one buffer chunk),
//              about 20 % selectivity, indexes checked line by line;
//   join:      7 engines, unique S without hash collisions on even engines
//              (collision handling off) and S with duplicates on odd ones
//              (handling on); match counts and result lines checked;
//   SGD:       14 engines train on replicated copies of one dataset with
//              different step sizes (a hyperparameter search); every
//              model is checked bit for bit.
// Engine addresses are relative to the engine's own port region (the top
// adds the port base); datamover addresses are absolute.
// Mechanism counters report how often each feature of the design was used.
// The flow (datamovers copy in, engines run in parallel on their own
// regions, results copied out) follows the paper's system description;
// data sizes and the register sequence are this testbench's own.
module sys_harness
  import hbm_pkg::*;
#(
  parameter engine_kind_e ENGINE = ENG_SELECTION,
  parameter int NSEL = 1100,
  parameter int BUF  = 1024
) (
  output int  checks,
  output int  failures,
  output bit  finished
);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic        reg_wr = 0, reg_rd = 0, reg_rvalid;
  logic [7:0]  reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  axi512_req_t host_req [NUM_DM];
  axi512_rsp_t host_rsp [NUM_DM];
  axi256_req_t hbm_req [HBM_PORTS];
  axi256_rsp_t hbm_rsp [HBM_PORTS];

  hbm_analytics_top #(.ENGINE(ENGINE)) u_top (
    .clk, .rst_n, .reg_wr, .reg_rd, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .host_req, .host_rsp, .hbm_req, .hbm_rsp
  );
  hbm_model u_hbm (.clk, .req(hbm_req), .rsp(hbm_rsp));
  axi_mem_model #(.LATENCY(30)) u_host0 (.clk, .req(host_req[0]), .rsp(host_rsp[0]));
  axi_mem_model #(.LATENCY(30)) u_host1 (.clk, .req(host_req[1]), .rsp(host_rsp[1]));

  // mechanism counters
  int n_dm_in = 0, n_dm_out = 0, n_parallel_cycles = 0, n_dummy = 0;
  int n_egress = 0, n_chain = 0, n_model_updates = 0, n_stack1 = 0;

  initial begin checks = 0; failures = 0; finished = 0; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL [%s]: %s", ENGINE.name(), what); end
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
  task automatic wait_done(int u);
    logic [31:0] s;
    do rd(u, REG_STATUS, s); while (!s[1]);
  endtask
  // datamover job; dir 0: host -> HBM, 1: HBM -> host
  task automatic dm_start(int d, longint src, longint dst, int lines, int dir);
    wr(d, 0, src[31:0]); wr(d, 1, src[63:32]); wr(d, 2, dst[31:0]); wr(d, 3, dst[63:32]);
    wr(d, 4, lines); wr(d, 5, dir); wr(d, REG_CTRL, 1);
    if (dir == 0) n_dm_in++; else n_dm_out++;
  endtask

  function automatic longint region(int port);   // a shim port's own 512 MiB
    return longint'(port) << 29;
  endfunction

  // ---------------- common monitors ----------------
  always @(posedge clk) begin
    int nb;
    nb = 0;
    for (int u = NUM_DM; u < NUM_UNITS; u++) nb += u_top.unit_busy[u];
    if (nb >= 2) n_parallel_cycles++;
  end

  // ---------------- selection ----------------
  int sel_data [NUM_CE][];
  task automatic run_selection();
    int lo = 100, hi = 300;
    logic [31:0] v;
    for (int k = 0; k < NUM_CE; k++) begin
      sel_data[k] = new[NSEL*16];
      for (int n = 0; n < NSEL; n++) begin
        logic [LINE_W-1:0] d;
        for (int l = 0; l < 16; l++) begin
          sel_data[k][n*16+l] = int'($urandom % 1000);
          d[l*32 +: 32] = sel_data[k][n*16+l];
        end
        if (k % 2 == 0) u_host0.poke(longint'(k)*NSEL + n, d);
        else            u_host1.poke(longint'(k)*NSEL + n, d);
      end
    end
    // both datamovers in parallel, even engines through DM 0
    for (int k = 0; k < NUM_CE; k += 2) begin
      dm_start(0, longint'(k)*NSEL*64, region(NUM_DM+k), NSEL, 0);
      dm_start(1, longint'(k+1)*NSEL*64, region(NUM_DM+k+1), NSEL, 0);
      wait_done(0); wait_done(1);
    end
    for (int k = 0; k < NUM_CE; k++) begin
      int u = NUM_DM + k;
      wr(u, 0, 0); wr(u, 1, NSEL); wr(u, 2, lo); wr(u, 3, hi);
      wr(u, 4, 32'(256) << 20);
    end
    for (int k = 0; k < NUM_CE; k++) wr(NUM_DM + k, REG_CTRL, 1);
    for (int k = 0; k < NUM_CE; k++) wait_done(NUM_DM + k);
    for (int k = 0; k < NUM_CE; k++) begin
      int u = NUM_DM + k, exp_m = 0, out_n = 0;
      logic [31:0] got_m, got_lines;
      rd(u, REG_RESULT0, got_m); rd(u, REG_RESULT1, got_lines);
      dm_start(1, region(u) + (64'd256 << 20), 64'h100_0000 + longint'(k) * 64'h10_0000, int'(got_lines), 1);
      wait_done(1);
      for (int c = 0; c * BUF < NSEL; c++) begin
        int q [16][$];
        int rows = 0;
        n_egress++;
        for (int n = c*BUF; n < NSEL && n < (c+1)*BUF; n++)
          for (int l = 0; l < 16; l++)
            if (sel_data[k][n*16+l] > lo && sel_data[k][n*16+l] < hi) q[l].push_back(n*16+l);
        for (int l = 0; l < 16; l++) begin
          exp_m += q[l].size();
          if (q[l].size() > rows) rows = q[l].size();
        end
        for (int r = 0; r < rows; r++) begin
          logic [LINE_W-1:0] g = u_host1.peek((64'h100_0000 + longint'(k) * 64'h10_0000) / 64 + out_n);
          bit ok = 1;
          for (int l = 0; l < 16; l++) begin
            int e = (r < q[l].size()) ? q[l][r] : -1;
            if (e == -1) n_dummy++;
            if (g[l*32 +: 32] != 32'(e)) ok = 0;
          end
          check(ok, $sformatf("engine %0d result line %0d", k, out_n));
          out_n++;
        end
      end
      check(got_m == 32'(exp_m), $sformatf("engine %0d matches %0d exp %0d", k, got_m, exp_m));
      check(got_lines == 32'(out_n), $sformatf("engine %0d lines %0d exp %0d", k, got_lines, out_n));
    end
  endtask

  // ---------------- join ----------------
  localparam int JS = 512, JL = 120, HT = 8192;
  task automatic run_join();
    for (int j = 0; j < NUM_CE/2; j++) begin
      int u = NUM_DM + 2*j;
      bit hc = j % 2;
      int S [JS], L [JL*16];
      int chain [int][$];
      int out_n = 0, nm = 0;
      logic [31:0] got_m, got_lines, rep;
      for (int i = 0; i < JS; i++) S[i] = hc ? int'($urandom % 300) + HT * int'($urandom % 2) : i * 3 + HT * j;
      for (int i = 0; i < JL*16; i++) L[i] = ($urandom % 2) ? S[$urandom % JS] : int'($urandom % 100000);
      for (int n = 0; n < JS/16; n++) begin
        logic [LINE_W-1:0] d;
        for (int l = 0; l < 16; l++) d[l*32 +: 32] = S[n*16+l];
        u_host0.poke(64'h1000 + n, d);
      end
      for (int n = 0; n < JL; n++) begin
        logic [LINE_W-1:0] d;
        for (int l = 0; l < 16; l++) d[l*32 +: 32] = L[n*16+l];
        u_host1.poke(64'h2000 + n, d);
      end
      // S and L into the region of the engine's read port
      dm_start(0, 64'h1000*64, region(u), JS/16, 0);
      dm_start(1, 64'h2000*64, region(u) + (64'd1 << 20), JL, 0);
      wait_done(0); wait_done(1);
      wr(u, 0, 0); wr(u, 1, JS); wr(u, 2, 32'(1) << 20);
      wr(u, 3, JL); wr(u, 4, 0); wr(u, 5, 32'(hc));
      wr(u, REG_CTRL, 1);
      wait_done(u);
      rd(u, REG_RESULT0, got_m); rd(u, REG_RESULT1, got_lines); rd(u+1, REG_RESULT1, rep);
      n_chain += int'(rep);
      dm_start(1, region(u+1), 64'h10_0000, int'(got_lines), 1);
      wait_done(1);
      // model of the result rows
      for (int i = 0; i < JS; i++) chain[S[i] & (HT-1)].push_front(i);
      for (int n = 0; n < JL; n++) begin
        int es [16][$];
        int p [16];
        bit fin = 0;
        for (int k = 0; k < 16; k++) begin
          int key = L[n*16+k], h = key & (HT-1);
          p[k] = 0;
          if (!chain.exists(h)) es[k].push_back(-1);
          else if (!hc) es[k].push_back(S[chain[h][0]] == key ? chain[h][0] : -1);
          else foreach (chain[h][x]) es[k].push_back(S[chain[h][x]] == key ? chain[h][x] : -1);
        end
        while (!fin) begin
          bit all_last = 1, any = 0;
          logic [LINE_W-1:0] el = '1, esl = '1;
          for (int k = 0; k < 16; k++) if (p[k] != es[k].size()-1) all_last = 0;
          for (int k = 0; k < 16; k++)
            if (p[k] < es[k].size()-1 || all_last) begin
              if (es[k][p[k]] >= 0) begin
                el[k*32 +: 32] = n*16+k; esl[k*32 +: 32] = es[k][p[k]]; any = 1; nm++;
              end
              p[k]++;
            end
          if (any) begin
            check(u_host1.peek(64'h10_0000/64 + out_n) == el, $sformatf("join %0d L_out line %0d", j, out_n));
            check(u_host1.peek(64'h10_0000/64 + out_n + 1) == esl, $sformatf("join %0d S_out line %0d", j, out_n));
            for (int k = 0; k < 16; k++) if (el[k*32 +: 32] == '1) n_dummy++;
            out_n += 2;
          end
          fin = all_last;
        end
      end
      check(got_m == 32'(nm), $sformatf("join %0d matches %0d exp %0d", j, got_m, nm));
      check(got_lines == 32'(out_n), $sformatf("join %0d lines %0d exp %0d", j, got_lines, out_n));
    end
  endtask

  // ---------------- SGD ----------------
  localparam int GN = 32, GM = 24, GB = 4, GE = 2;
  task automatic run_sgd();
    int A [GM][GN];
    int lab [GM];
    for (int i = 0; i < GM; i++) begin
      logic [LINE_W-1:0] d = '0;
      lab[i] = int'($urandom % 131073) - 65536;
      d[31:0] = lab[i];
      u_host0.poke(64'h1000 + i*(GN/16+1), d);
      for (int j = 0; j < GN; j++) A[i][j] = int'($urandom % 131073) - 65536;
      for (int k = 0; k < GN/16; k++) begin
        for (int l = 0; l < 16; l++) d[l*32 +: 32] = A[i][k*16+l];
        u_host0.poke(64'h1000 + i*(GN/16+1) + 1 + k, d);
      end
    end
    // replicate the dataset into every engine's own region
    for (int k = 0; k < NUM_CE; k++) begin
      dm_start(0, 64'h1000*64, region(NUM_DM+k), GM*(GN/16+1), 0);
      wait_done(0);
    end
    for (int k = 0; k < NUM_CE; k++) begin
      int u = NUM_DM + k;
      wr(u, 0, 0); wr(u, 1, GM); wr(u, 2, GN); wr(u, 3, GE); wr(u, 4, GB);
      wr(u, 5, 1000 + 400*k); wr(u, 6, 40); wr(u, 7, 0);
      wr(u, 8, 32'(256) << 20);
      wr(u, REG_CTRL, 1);
    end
    for (int k = 0; k < NUM_CE; k++) wait_done(NUM_DM + k);
    for (int k = 0; k < NUM_CE; k++) begin
      int u = NUM_DM + k, alpha = 1000 + 400*k, bad = 0;
      int x [GN], g [GN];
      logic [31:0] ep;
      rd(u, REG_RESULT0, ep);
      check(ep == GE, $sformatf("sgd %0d epochs", k));
      dm_start(1, region(u) + (64'd256 << 20), 64'h20_0000, GN/16, 1);
      wait_done(1);
      foreach (x[j]) x[j] = 0;
      for (int e = 0; e < GE; e++) begin
        foreach (g[j]) g[j] = 0;
        for (int i = 0; i < GM; i++) begin
          longint acc = 0;
          int z, s;
          for (int j = 0; j < GN; j++) acc += (longint'(A[i][j]) * longint'(x[j])) >>> 16;
          z = int'(acc);
          s = int'((longint'(alpha) * longint'(z - lab[i])) >>> 16);
          for (int j = 0; j < GN; j++) g[j] += int'((longint'(s) * longint'(A[i][j])) >>> 16);
          if ((i+1) % GB == 0) begin
            if (k == 0) n_model_updates++;
            for (int j = 0; j < GN; j++) begin
              x[j] = x[j] - int'((longint'(alpha) * longint'(g[j])) >>> 16)
                          - int'((longint'(40) * longint'(x[j])) >>> 16);
              g[j] = 0;
            end
          end
        end
      end
      for (int q = 0; q < GN/16; q++) begin
        logic [LINE_W-1:0] d = u_host1.peek(64'h20_0000/64 + q);
        for (int l = 0; l < 16; l++) if (int'(d[l*32 +: 32]) != x[q*16+l]) bad++;
      end
      check(bad == 0, $sformatf("sgd %0d model: %0d words wrong", k, bad));
    end
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    unique case (ENGINE)
      ENG_SELECTION: run_selection();
      ENG_JOIN:      run_join();
      default:       run_sgd();
    endcase
    // the shim must have put half of every line into stack 1
    n_stack1 = int'(u_hbm.beats_stack[1]);
    check(u_hbm.beats_stack[0] == u_hbm.beats_stack[1] && n_stack1 > 0,
          $sformatf("stack beats %0d / %0d", u_hbm.beats_stack[0], u_hbm.beats_stack[1]));
    // every mechanism must have happened
    check(n_dm_in > 0,  "datamover host to HBM");
    check(n_dm_out > 0, "datamover HBM to host");
    if (ENGINE != ENG_JOIN) check(n_parallel_cycles > 0, "engines running in parallel");
    if (ENGINE != ENG_SGD)  check(n_dummy > 0, "dummy padding");
    if (ENGINE == ENG_SELECTION) check(n_egress > NUM_CE, "several buffer chunks per engine");
    if (ENGINE == ENG_JOIN) check(n_chain > 0, "collision chains walked");
    if (ENGINE == ENG_SGD)  check(n_model_updates > 0, "minibatch model updates");
    $display("[%s] datamover in=%0d out=%0d, parallel-busy cycles=%0d, dummies=%0d, chunks=%0d, chain steps=%0d, model updates (engine 0)=%0d, stack-1 beats=%0d",
             ENGINE.name(), n_dm_in, n_dm_out, n_parallel_cycles, n_dummy, n_egress, n_chain, n_model_updates, n_stack1);
    finished = 1;
  end
endmodule

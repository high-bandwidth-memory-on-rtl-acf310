// tb_join_probe_lane: one probe lane on a real join_hash_table whose
// chains the testbench writes directly (bucket = newest slot, next = older
// slot with the same hash, like join_build). Keys of L (hits, misses and
// keys whose hash has a long chain) are streamed in. Every result entry is
// compared with the model: without collision handling one entry per key
// (chain head compared only); with it one entry per chain slot, last set on
// the final one; s_slot must be right whenever the entry is a match, and
// the L index must follow the key. Checks repeats (chain steps beyond the
// head), back pressure through out_ready, and the rate: without collision
// handling and with out_ready high, N keys give N entries within N + 4
// cycles (II = 1, as in the paper).
module tb_join_probe_lane;
  import hbm_pkg::*;
  localparam int HT = 256, HW = $clog2(HT), NS = 200;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic handle_col = 0, clear_stats = 0, in_valid = 0, in_ready, out_ready = 1, idle;
  logic [31:0] in_key = 0, in_lidx = 0, out_sidx, out_lidx, repeats;
  logic out_valid, out_match, out_last;
  logic [HW-1:0] l_braddr, l_eraddr;
  logic bkt_we = 0, ent_we = 0;
  logic [HW-1:0] bkt_waddr = 0, ent_waddr = 0;
  logic [HW:0] bkt_wdata = 0;
  logic [HW+WORD_W:0] ent_wdata = 0;
  logic [HW-1:0] bkt_raddr [PARALLELISM], ent_raddr [PARALLELISM];
  logic [HW:0] bkt_rdata [PARALLELISM];
  logic [HW+WORD_W:0] ent_rdata [PARALLELISM];
  int checks = 0, failures = 0;

  join_probe_lane #(.HASH_TABLE_SIZE(HT)) dut (
    .clk, .rst_n, .handle_col, .clear_stats, .in_valid, .in_key, .in_lidx, .in_ready,
    .bkt_raddr(l_braddr), .bkt_rdata(bkt_rdata[3]), .ent_raddr(l_eraddr), .ent_rdata(ent_rdata[3]),
    .out_valid, .out_match, .out_last, .out_sidx, .out_lidx, .out_ready, .repeats, .idle
  );
  join_hash_table #(.HASH_TABLE_SIZE(HT)) u_ht (.*);
  always_comb for (int r = 0; r < PARALLELISM; r++) begin bkt_raddr[r] = l_braddr; ent_raddr[r] = l_eraddr; end

  // input handshakes, sampled at the clock edge (inputs change on negedges)
  logic took = 0;
  always @(posedge clk) took <= rst_n && in_valid && in_ready;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int S [NS];
  int chain [int][$];
  typedef struct { bit m; bit last; int sidx; int lidx; } ent_t;
  ent_t exp_q [$];
  int n_out = 0, bad = 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_q.size() == 0) bad++;
    else begin
      ent_t e;
      e = exp_q.pop_front();
      if (out_match != e.m || out_last != e.last || out_lidx != 32'(e.lidx) || (e.m && out_sidx != 32'(e.sidx))) bad++;
    end
    n_out++;
  end

  task automatic run(bit hc, int n, bit bp, bit rate);
    int exp_rep = 0, cycles = 0, sent = 0;
    handle_col = hc; bad = 0; n_out = 0;
    @(negedge clk); clear_stats = 1;
    @(negedge clk); clear_stats = 0;
    while (sent < n || !idle) begin
      out_ready = bp ? ($urandom % 3 != 0) : 1;
      if (!in_valid && sent < n) begin
        int key = ($urandom % 2) ? S[$urandom % NS] : int'($urandom % 5000);
        int h = key & (HT - 1);
        in_valid = 1; in_key = key; in_lidx = 1000 + sent;
        if (!chain.exists(h)) exp_q.push_back('{0, 1, 0, 1000 + sent});
        else if (!hc) exp_q.push_back('{S[chain[h][0]] == key, 1, chain[h][0], 1000 + sent});
        else begin
          foreach (chain[h][k]) exp_q.push_back('{S[chain[h][k]] == key, k == chain[h].size() - 1, chain[h][k], 1000 + sent});
          exp_rep += chain[h].size() - 1;
        end
      end
      @(posedge clk); cycles++;
      @(negedge clk);
      if (took) begin sent++; in_valid = 0; end
    end
    out_ready = 1;
    repeat (3) @(negedge clk);
    check(bad == 0 && exp_q.size() == 0, $sformatf("hc=%0d: %0d wrong entries, %0d missing, %0d seen", hc, bad, exp_q.size(), n_out));
    if (hc) check(repeats == 32'(exp_rep), $sformatf("repeats %0d exp %0d", repeats, exp_rep));
    else check(repeats == 0, "no repeats without collision handling");
    if (rate) check(cycles <= n + 4, $sformatf("%0d keys in %0d cycles", n, cycles));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // empty all buckets, then insert S as join_build would
    for (int h = 0; h < HT; h++) begin
      @(negedge clk); bkt_we = 1; bkt_waddr = HW'(h); bkt_wdata = '0;
    end
    for (int i = 0; i < NS; i++) begin
      int h;
      S[i] = (i < 20) ? 7 + HT * (i % 4) : int'($urandom % 3000);   // one long chain at hash 7
      h = S[i] & (HT - 1);
      @(negedge clk);
      bkt_we = 1; bkt_waddr = HW'(h); bkt_wdata = {1'b1, HW'(i)};
      ent_we = 1; ent_waddr = HW'(i);
      ent_wdata = chain.exists(h) ? {1'b1, HW'(chain[h][0]), 32'(S[i])} : {1'b0, HW'(0), 32'(S[i])};
      chain[h].push_front(i);
    end
    @(negedge clk); bkt_we = 0; ent_we = 0;
    run(0, 500, 0, 1);
    run(0, 300, 1, 0);
    run(1, 300, 0, 0);
    run(1, 300, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

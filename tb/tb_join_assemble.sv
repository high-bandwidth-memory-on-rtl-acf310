// tb_join_assemble: the Assemble stage fed by sixteen independent lane
// streams of result entries {is_match, last, s_slot, l_index}, each with
// random gaps, one to four entries per key (collision chains of different
// lengths per lane). The output lines are compared with a model of the
// row rule: lanes whose head does not close its key always advance; lanes
// whose head closes it wait with a dummy until all do; non-matches and
// waiting lanes show 0xFFFFFFFF; rows without a match are dropped; a row is
// the L_out line followed by the S_out line. Checks match_count, output
// back pressure, and the rates: one entry per lane per key with no
// matches is consumed at one key per cycle (N keys in N + 6 cycles), and
// with every lane matching a row leaves every two cycles (2N + 6).
// Dummy padding and the one-row-per-cycle rate come from the paper; the row
// rule for chains of different lengths and the output format are this
// design's.
module tb_join_assemble;
  import hbm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic clear_stats = 0, out_valid, out_ready = 1, empty;
  logic [PARALLELISM-1:0] in_valid = '0, in_match = '0, in_last = '0, in_ready;
  logic [31:0] in_sidx [PARALLELISM], in_lidx [PARALLELISM];
  line_t out_line;
  logic [31:0] match_count;
  int checks = 0, failures = 0;

  join_assemble dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { bit m; bit last; int s; int l; } ent_t;
  ent_t lane_q [PARALLELISM][$];    // what each lane still has to send
  logic [LINE_W-1:0] exp_lines [$];
  int n_out = 0, bad = 0;
  logic [PARALLELISM-1:0] took = '0;

  always @(posedge clk) if (rst_n) begin
    took <= in_valid & in_ready;
    if (out_valid && out_ready) begin
      if (exp_lines.size() == 0 || out_line != exp_lines[0]) bad++;
      if (exp_lines.size()) void'(exp_lines.pop_front());
      n_out++;
    end
  end

  // one key per lane entry list; mode 0 random, 1 single miss, 2 single hit
  function automatic int make_keys(int nkeys, int mode);
    int nm = 0;
    for (int k = 0; k < nkeys; k++) begin
      ent_t es [PARALLELISM][$];
      int p [PARALLELISM];
      bit fin = 0;
      for (int l = 0; l < PARALLELISM; l++) begin
        int len = (mode == 0) ? 1 + int'($urandom % 4) : 1;
        for (int e = 0; e < len; e++) begin
          ent_t x;
          x.m = (mode == 0) ? ($urandom % 3 == 0) : (mode == 2);
          x.last = (e == len - 1); x.s = int'($urandom % 8192); x.l = k * 16 + l;
          es[l].push_back(x);
          lane_q[l].push_back(x);
        end
        p[l] = 0;
      end
      while (!fin) begin
        bit all_last = 1, any = 0;
        logic [LINE_W-1:0] el = '1, esl = '1;
        for (int l = 0; l < PARALLELISM; l++) if (!es[l][p[l]].last) all_last = 0;
        for (int l = 0; l < PARALLELISM; l++)
          if (!es[l][p[l]].last || all_last) begin
            if (es[l][p[l]].m) begin
              el[l*32 +: 32] = es[l][p[l]].l; esl[l*32 +: 32] = es[l][p[l]].s; any = 1; nm++;
            end
            p[l]++;
          end
        if (any) begin exp_lines.push_back(el); exp_lines.push_back(esl); end
        fin = all_last;
      end
    end
    return nm;
  endfunction

  task automatic run(int nkeys, int mode, bit gaps, bit bp, int max_cycles);
    int nm, cycles = 0, nexp;
    @(negedge clk); clear_stats = 1;
    @(negedge clk); clear_stats = 0;
    nm = make_keys(nkeys, mode);
    nexp = exp_lines.size();
    n_out = 0; bad = 0;
    while (cycles < 20000) begin
      @(negedge clk);
      for (int l = 0; l < PARALLELISM; l++) begin
        if (took[l]) void'(lane_q[l].pop_front());
        if (!in_valid[l] || took[l]) begin
          in_valid[l] = lane_q[l].size() > 0 && !(gaps && $urandom % 4 == 0);
          if (lane_q[l].size() > 0) begin
            in_match[l] = lane_q[l][0].m; in_last[l] = lane_q[l][0].last;
            in_sidx[l] = lane_q[l][0].s; in_lidx[l] = lane_q[l][0].l;
          end
        end
      end
      took = '0;
      out_ready = bp ? ($urandom % 3 != 0) : 1;
      if (in_valid == '0 && empty && !out_valid) break;
      @(posedge clk); cycles++;
    end
    check(bad == 0 && n_out == nexp, $sformatf("mode %0d: %0d of %0d lines, %0d wrong", mode, n_out, nexp, bad));
    check(match_count == 32'(nm), $sformatf("mode %0d: match_count %0d exp %0d", mode, match_count, nm));
    if (max_cycles > 0) check(cycles <= max_cycles, $sformatf("mode %0d: %0d keys took %0d cycles", mode, nkeys, cycles));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(300, 1, 0, 0, 300 + 6);
    run(300, 2, 0, 0, 600 + 6);
    run(300, 0, 0, 0, 0);
    run(300, 0, 1, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #400000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

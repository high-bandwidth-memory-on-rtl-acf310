// tb_join_build: the Build module writing into a real join_hash_table.
// Random S (with duplicate keys and shared hashes, and counts that are not
// a multiple of 16) arrives as 512-bit lines with random gaps. Afterwards
// every chain is walked through replica 0 and compared with the model:
// bucket[h] points at the most recent key with hash h, and next[] links
// each key to the previous one with the same hash, down to an invalid
// next. Buckets never written must read as empty. Rate: the clear takes
// HASH_TABLE_SIZE cycles and each key two cycles, so with S always
// available done comes within HASH_TABLE_SIZE + 2*|S| + 4 cycles.
// Serial insertion through a 16-to-1 multiplexer is the paper's; the hash
// (low key bits) and the two-cycle insert are this design's.
module tb_join_build;
  import hbm_pkg::*;
  localparam int HT = 256, HW = $clog2(HT);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0, busy, done, in_valid = 0, in_ready;
  logic [31:0] num_keys = 0;
  line_t in_line = '0;
  logic bkt_we, ent_we;
  logic [HW-1:0] bkt_waddr, ent_waddr, b_raddr;
  logic [HW:0] bkt_wdata, b_rdata;
  logic [HW+WORD_W:0] ent_wdata;
  logic [HW-1:0] bkt_raddr [PARALLELISM], ent_raddr [PARALLELISM];
  logic [HW:0] bkt_rdata [PARALLELISM];
  logic [HW+WORD_W:0] ent_rdata [PARALLELISM];
  logic walk = 0;
  logic [HW-1:0] w_baddr = 0, w_eaddr = 0;
  int checks = 0, failures = 0;

  join_build #(.HASH_TABLE_SIZE(HT)) dut (
    .clk, .rst_n, .start, .num_keys, .busy, .done, .in_valid, .in_line, .in_ready,
    .bkt_we, .bkt_waddr, .bkt_wdata, .ent_we, .ent_waddr, .ent_wdata,
    .bkt_raddr(b_raddr), .bkt_rdata(b_rdata)
  );
  join_hash_table #(.HASH_TABLE_SIZE(HT)) u_ht (
    .clk, .bkt_we, .bkt_waddr, .bkt_wdata, .ent_we, .ent_waddr, .ent_wdata,
    .bkt_raddr, .bkt_rdata, .ent_raddr, .ent_rdata
  );
  always_comb begin
    for (int r = 0; r < PARALLELISM; r++) begin bkt_raddr[r] = b_raddr; ent_raddr[r] = w_eaddr; end
    if (walk) bkt_raddr[0] = w_baddr;
  end
  assign b_rdata = bkt_rdata[1];

  // input handshakes, sampled at the clock edge (inputs change on negedges)
  logic took = 0;
  always @(posedge clk) took <= rst_n && in_valid && in_ready;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic job(int n, bit gaps, bit rate);
    int S [];
    int sent = 0, cycles = 0, bad = 0;
    bit seen = 0;
    int heads [int];
    S = new[n];
    for (int i = 0; i < n; i++) S[i] = int'($urandom % (3 * HT)) + ((i % 5 == 0) ? 0 : HT * int'($urandom % 4));
    @(negedge clk); start = 1; num_keys = n;
    @(negedge clk); start = 0;
    while (!seen && cycles < 20000) begin
      // a valid line is held until taken (stream protocol); gaps only between lines
      if (!in_valid) in_valid = (sent * 16 < n) && !(gaps && $urandom % 4 == 0);
      for (int l = 0; l < 16; l++) in_line[l] = (sent * 16 + l < n) ? S[sent * 16 + l] : 0;
      @(posedge clk); cycles++;
      if (done) seen = 1;
      @(negedge clk);
      if (took) begin sent++; in_valid = 0; end
    end
    in_valid = 0;
    check(seen, "done");
    check(sent == (n + 15) / 16, $sformatf("%0d lines taken, %0d expected", sent, (n + 15) / 16));
    if (rate) check(cycles <= HT + 2 * n + 4, $sformatf("%0d keys built in %0d cycles", n, cycles));
    // walk every bucket
    for (int i = 0; i < n; i++) heads[S[i] & (HT - 1)] = i;
    walk = 1;
    for (int h = 0; h < HT; h++) begin
      int exp_chain [$];
      int got_chain [$];
      logic [HW:0] b;
      for (int i = n - 1; i >= 0; i--) if ((S[i] & (HT - 1)) == h) exp_chain.push_back(i);
      @(negedge clk); w_baddr = HW'(h);
      @(negedge clk); b = bkt_rdata[0];
      if (b[HW]) begin
        logic [HW+WORD_W:0] e;
        int slot = int'(b[HW-1:0]);
        for (int k = 0; k <= n; k++) begin
          got_chain.push_back(slot);
          w_eaddr = HW'(slot);
          @(negedge clk); e = ent_rdata[0];
          if (e[WORD_W-1:0] != 32'(S[slot])) bad++;
          if (!e[HW+WORD_W]) break;
          slot = int'(e[HW+WORD_W-1:WORD_W]);
        end
      end
      if (got_chain != exp_chain) bad++;
    end
    walk = 0;
    check(bad == 0, $sformatf("%0d keys: %0d chains or keys wrong", n, bad));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    job(200, 0, 1);
    job(37, 1, 0);
    job(HT, 1, 0);
    job(1, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #400000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

// tb_join_hash_table: the replicated hash table storage. Writes random
// bucket and entry words, then reads them back on all sixteen replicas at
// once with a different address per replica, and checks every replica
// returns the last word written to that address one cycle after the read
// address (Ultra-RAM-style registered read). Also checks a write and a
// read of the same address in one cycle return the old word.
// Sixteen replicas of a chained table (bucket, next, storage) follow the
// paper's join figure; the registered read is this design's choice.
module tb_join_hash_table;
  import hbm_pkg::*;
  localparam int HT = 512, HW = $clog2(HT);
  logic clk = 0;
  always #1 clk = ~clk;
  logic bkt_we = 0, ent_we = 0;
  logic [HW-1:0] bkt_waddr = 0, ent_waddr = 0;
  logic [HW:0] bkt_wdata = 0;
  logic [HW+WORD_W:0] ent_wdata = 0;
  logic [HW-1:0] bkt_raddr [PARALLELISM], ent_raddr [PARALLELISM];
  logic [HW:0] bkt_rdata [PARALLELISM];
  logic [HW+WORD_W:0] ent_rdata [PARALLELISM];
  int checks = 0, failures = 0;

  join_hash_table #(.HASH_TABLE_SIZE(HT)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [HW:0] bm [HT];
  logic [HW+WORD_W:0] em [HT];

  initial begin
    for (int i = 0; i < HT; i++) begin
      @(negedge clk);
      bkt_we = 1; bkt_waddr = HW'(i); bkt_wdata = (HW+1)'($urandom); bm[i] = bkt_wdata;
      ent_we = 1; ent_waddr = HW'(HT - 1 - i); ent_wdata = {$urandom, $urandom}; em[HT - 1 - i] = ent_wdata;
    end
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      bkt_we = (k % 2 == 0); ent_we = (k % 3 == 0);
      bkt_waddr = HW'($urandom); bkt_wdata = (HW+1)'($urandom);
      ent_waddr = HW'($urandom); ent_wdata = {$urandom, $urandom};
      for (int r = 0; r < PARALLELISM; r++) begin
        bkt_raddr[r] = (r == 0) ? bkt_waddr : HW'($urandom);
        ent_raddr[r] = (r == 0) ? ent_waddr : HW'($urandom);
      end
      begin
        logic [HW:0] eb [PARALLELISM];
        logic [HW+WORD_W:0] ee [PARALLELISM];
        for (int r = 0; r < PARALLELISM; r++) begin eb[r] = bm[bkt_raddr[r]]; ee[r] = em[ent_raddr[r]]; end
        if (bkt_we) bm[bkt_waddr] = bkt_wdata;
        if (ent_we) em[ent_waddr] = ent_wdata;
        @(negedge clk);
        bkt_we = 0; ent_we = 0;
        for (int r = 0; r < PARALLELISM; r++) begin
          check(bkt_rdata[r] == eb[r], $sformatf("bucket replica %0d", r));
          check(ent_rdata[r] == ee[r], $sformatf("entry replica %0d", r));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

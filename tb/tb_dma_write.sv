// tb_dma_write: dma_write against a behavioural 512-bit memory. Jobs with
// random line counts and start addresses (some just before a 4 KiB edge),
// with gaps in the input stream and memory stalls, each ended by flush.
// Checks memory contents, that nothing beyond the last line is written,
// that bursts are at most 16 beats and stay in one 4 KiB page, that
// lines_written and done are right, and the rate: a steady stream of N
// lines into a memory without stalls is accepted at one line per cycle
// (N lines in at most N + 4 cycles) and done comes within N + 60 cycles.
// The paper gives only the function of DMA Write; burst and page rules
// checked here are this design's.
module tb_dma_write;
  import hbm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0, flush = 0, busy, done, in_valid = 0, in_ready;
  logic [ADDR_W-1:0] base_addr = 0;
  logic [31:0] lines_written;
  logic [LINE_W-1:0] in_data = 0;
  axi512_req_t req;
  axi512_rsp_t rsp;
  int checks = 0, failures = 0;

  dma_write dut (
    .clk, .rst_n, .start, .base_addr, .flush, .busy, .done, .lines_written,
    .in_valid, .in_data, .in_ready,
    .awvalid(req.awvalid), .awaddr(req.awaddr), .awlen(req.awlen), .awready(rsp.awready),
    .wvalid(req.wvalid), .wdata(req.wdata), .wlast(req.wlast), .wready(rsp.wready),
    .bvalid(rsp.bvalid), .bready(req.bready)
  );
  always_comb begin
    req.arvalid = 0; req.araddr = 0; req.arlen = 0; req.rready = 1;
  end
  axi_mem_model #(.LATENCY(10)) m0 (.clk, .req, .rsp);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (req.awvalid && rsp.awready)
    check(((req.awaddr & 64'hFFF) + (longint'(req.awlen) + 1) * 64) <= 4096, "burst crosses 4 KiB");

  task automatic job(longint a, int n, bit gaps, bit st, bit rate);
    int sent = 0, bad = 0;
    longint t0, t1, t2;
    bit seen_done = 0;
    m0.stall_pct = st ? 25 : 0;
    m0.poke(a / 64 + n, '1);   // guard line after the end
    @(negedge clk); start = 1; base_addr = a;
    @(negedge clk); start = 0; t0 = $time;
    while (sent < n) begin
      in_valid = gaps ? ($urandom % 3 != 0) : 1;
      in_data = {16{32'(sent * 5 + 1)}} ^ LINE_W'(a);
      @(posedge clk);
      if (in_valid && in_ready) sent++;
      @(negedge clk);
    end
    in_valid = 0; t1 = $time;
    flush = 1;
    @(negedge clk); flush = 0;
    for (int i = 0; i < 2000 && !seen_done; i++) begin
      @(posedge clk); if (done) seen_done = 1;
      @(negedge clk);
    end
    t2 = $time;
    check(seen_done, "done after flush");
    for (int i = 0; i < n; i++)
      if (m0.peek(a / 64 + i) != ({16{32'(i * 5 + 1)}} ^ LINE_W'(a))) bad++;
    check(bad == 0, $sformatf("%0d wrong lines of %0d", bad, n));
    check(m0.peek(a / 64 + n) == '1, "line after the end overwritten");
    check(lines_written == n, $sformatf("lines_written %0d exp %0d", lines_written, n));
    check(!busy, "idle after done");
    if (rate) begin
      check((t1 - t0) / 2 <= n + 4, $sformatf("%0d lines accepted in %0d cycles", n, (t1 - t0) / 2));
      check((t2 - t0) / 2 <= n + 60, $sformatf("%0d lines done in %0d cycles", n, (t2 - t0) / 2));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    job(0, 1, 0, 0, 0);
    job(64'h4000, 1000, 0, 0, 1);
    job(64'h9000 - 5*64, 40, 0, 0, 1);
    job(64'hA000, 0, 0, 0, 0);
    for (int i = 0; i < 20; i++)
      job(64'h10_0000 + longint'($urandom % 5000) * 64 + longint'(i) * 64'h10_0000, 1 + $urandom % 300, i % 2, i % 3 == 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #400000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

// tb_dma_read: dma_read against a behavioural 512-bit memory. Runs jobs
// with random line counts and start addresses (some just before a 4 KiB
// edge), with and without consumer back pressure and memory stalls.
// Checks the data stream in order, that every burst is at most 16 beats and
// stays inside one 4 KiB page, that exactly the requested lines are read,
// and the rate: with a consumer that is always ready and a memory without
// stalls, N lines arrive within N + 40 cycles of start (one per cycle).
// The paper gives only the function of DMA Read; burst and page rules checked
// here are this design's.
module tb_dma_read;
  import hbm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0, busy, out_valid, out_ready = 1;
  logic [ADDR_W-1:0] base_addr = 0;
  logic [31:0] num_lines = 0;
  logic [LINE_W-1:0] out_data;
  axi512_req_t req;
  axi512_rsp_t rsp;
  int checks = 0, failures = 0;

  dma_read dut (
    .clk, .rst_n, .start, .base_addr, .num_lines, .busy,
    .arvalid(req.arvalid), .araddr(req.araddr), .arlen(req.arlen), .arready(rsp.arready),
    .rvalid(rsp.rvalid), .rdata(rsp.rdata), .rlast(rsp.rlast), .rready(req.rready),
    .out_valid, .out_data, .out_ready
  );
  always_comb begin
    req.awvalid = 0; req.awaddr = 0; req.awlen = 0; req.wvalid = 0; req.wdata = 0;
    req.wlast = 0; req.bready = 1;
  end
  axi_mem_model #(.LATENCY(20)) m0 (.clk, .req, .rsp);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint requested = 0;
  always @(posedge clk) if (req.arvalid && rsp.arready) begin
    requested += req.arlen + 1;
    check(((req.araddr & 64'hFFF) + (longint'(req.arlen) + 1) * 64) <= 4096, "burst crosses 4 KiB");
  end

  task automatic job(longint a, int n, bit bp, bit st, bit rate);
    int got = 0, bad = 0;
    longint t0, t1;
    m0.stall_pct = st ? 25 : 0; requested = 0;
    for (int i = 0; i < n; i++) begin
      m0.poke(a / 64 + i, {16{32'(i * 7 + 3)}} ^ LINE_W'(a));
    end
    @(negedge clk); start = 1; base_addr = a; num_lines = n;
    @(negedge clk); start = 0; t0 = $time;
    while (got < n) begin
      out_ready = bp ? ($urandom % 3 != 0) : 1;
      @(posedge clk);
      if (out_valid && out_ready) begin
        if (out_data != ({16{32'(got * 7 + 3)}} ^ LINE_W'(a))) bad++;
        got++;
      end
      @(negedge clk);
    end
    t1 = $time;
    out_ready = 1;
    repeat (30) @(negedge clk);
    check(bad == 0, $sformatf("%0d wrong lines of %0d", bad, n));
    check(requested == n, $sformatf("requested %0d lines, wanted %0d", requested, n));
    check(!busy && !out_valid, "idle after job");
    if (rate) check((t1 - t0) / 2 <= n + 40, $sformatf("%0d lines took %0d cycles", n, (t1 - t0) / 2));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    job(0, 1, 0, 0, 0);
    job(64'h1000, 1000, 0, 0, 1);
    job(64'h2000 - 3*64, 50, 0, 0, 1);   // first burst ends at the page edge
    for (int i = 0; i < 20; i++)
      job(64'h10_0000 + longint'($urandom % 5000) * 64, 1 + $urandom % 300, i % 2, i % 3 == 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

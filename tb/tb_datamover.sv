// tb_datamover: copies between a host memory model and an HBM-side memory
// model in both directions, with random lengths and addresses and with
// memory stalls. Checks the copied data, that nothing next to the target
// range is touched, result0 (lines written), the done pulse, and the rate:
// without stalls N lines are copied within N + 80 cycles (one line per
// cycle after the first read latency).
// The paper gives the datamover's function only; the rate expectation (one
// line per cycle) is this design's target for a 512-bit port.
module tb_datamover;
  import hbm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  cfg_t cfg;
  logic start = 0, busy, done;
  logic [31:0] result [2];
  axi512_req_t host_req, hbm_req;
  axi512_rsp_t host_rsp, hbm_rsp;
  int checks = 0, failures = 0;

  datamover dut (.*);
  axi_mem_model #(.LATENCY(30)) u_host (.clk, .req(host_req), .rsp(host_rsp));
  axi_mem_model #(.LATENCY(12)) u_hbm  (.clk, .req(hbm_req),  .rsp(hbm_rsp));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic copy(longint src, longint dst, int n, bit dir, bit st, bit rate);
    int bad = 0, cycles = 0;
    bit seen = 0;
    u_host.stall_pct = st ? 20 : 0; u_hbm.stall_pct = st ? 20 : 0;
    for (int i = 0; i < n; i++) begin
      logic [LINE_W-1:0] d = {16{$urandom}};
      if (dir) u_hbm.poke(src / 64 + i, d); else u_host.poke(src / 64 + i, d);
    end
    if (dir) u_host.poke(dst / 64 + n, '1); else u_hbm.poke(dst / 64 + n, '1);
    cfg = '0;
    cfg[0] = src[31:0]; cfg[1] = src[63:32]; cfg[2] = dst[31:0]; cfg[3] = dst[63:32];
    cfg[4] = n; cfg[5] = dir;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!seen && cycles < 20000) begin
      @(posedge clk); cycles++; if (done) seen = 1;
      @(negedge clk);
    end
    check(seen, "done pulse");
    for (int i = 0; i < n; i++)
      if ((dir ? u_hbm.peek(src / 64 + i) : u_host.peek(src / 64 + i)) !=
          (dir ? u_host.peek(dst / 64 + i) : u_hbm.peek(dst / 64 + i))) bad++;
    check(bad == 0, $sformatf("%0d of %0d lines differ", bad, n));
    check((dir ? u_host.peek(dst / 64 + n) : u_hbm.peek(dst / 64 + n)) == '1, "line after target touched");
    check(result[0] == n, $sformatf("result0 %0d exp %0d", result[0], n));
    check(!busy, "idle after done");
    if (rate) check(cycles <= n + 80, $sformatf("%0d lines copied in %0d cycles", n, cycles));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    copy(64'h0, 64'h2_0000_0000, 2000, 0, 0, 1);
    copy(64'h2_0000_0000, 64'h40_0000, 2000, 1, 0, 1);
    copy(64'h1000 - 128, 64'h3000 - 64, 37, 0, 0, 1);
    for (int i = 0; i < 16; i++)
      copy(64'h100_0000 + longint'($urandom % 4000) * 64, 64'h1_0000_0000 + longint'(i) * 64'h10_0000 + longint'($urandom % 4000) * 64,
           1 + $urandom % 400, i % 2, i % 3 == 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #400000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

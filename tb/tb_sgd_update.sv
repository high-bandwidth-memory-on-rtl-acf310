// tb_sgd_update: the Update module with its model and gradient memories,
// against a software model. Sequence per round: random accumulate streams
// (one feature line per cycle, including back-to-back and one-apart use of
// the same line index to exercise the read-modify-write bypass), then a
// model update (x = x - alpha*g - c2*x, g = 0), then the whole model is read
// through x_raddr and compared bit for bit. Also checks clear_all and
// clear_grad, and the rate: a model update or clear over N lines keeps
// busy high for at most N + 2 cycles, and accumulates take one line per
// cycle with no stall.
// The update rule is the paper's Algorithm 3; the gradient memory and fixed
// point are this design's.
module tb_sgd_update;
  import hbm_pkg::*;
  localparam int MD = 256, LINES = MD / 16, IW = $clog2(LINES);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [IW:0] num_lines;
  logic signed [31:0] alpha, c2, acc_s = 0;
  logic cmd_clear_all = 0, cmd_clear_grad = 0, cmd_model_update = 0, busy, acc_valid = 0;
  logic [IW-1:0] acc_idx = 0, x_raddr = 0;
  line_t acc_a = '0, x_rdata;
  int checks = 0, failures = 0;

  sgd_update #(.MAX_DIMENSIONALITY(MD)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int x [LINES][16], g [LINES][16];

  task automatic command(int which);
    int t = 0;
    @(negedge clk);
    cmd_clear_all = (which == 0); cmd_clear_grad = (which == 1); cmd_model_update = (which == 2);
    @(negedge clk);
    cmd_clear_all = 0; cmd_clear_grad = 0; cmd_model_update = 0;
    while (busy) begin @(negedge clk); t++; end
    check(t <= int'(num_lines) + 2, $sformatf("command %0d over %0d lines busy %0d cycles", which, num_lines, t));
    for (int i = 0; i < int'(num_lines); i++)
      for (int l = 0; l < 16; l++) begin
        if (which == 0) x[i][l] = 0;
        if (which == 2) x[i][l] = x[i][l] - fx_mul(alpha, g[i][l]) - fx_mul(c2, x[i][l]);
        g[i][l] = 0;
      end
  endtask

  task automatic compare(string what);
    int bad = 0;
    for (int i = 0; i < int'(num_lines); i++) begin
      @(negedge clk); x_raddr = IW'(i);
      @(negedge clk);
      for (int l = 0; l < 16; l++) if (x_rdata[l] != x[i][l]) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d model words wrong", what, bad));
  endtask

  task automatic accumulate(int n);
    for (int k = 0; k < n; k++) begin
      int idx = (k % 4 == 1) ? int'(acc_idx) : (k % 4 == 2 && k > 2) ? int'(acc_idx) : int'($urandom % int'(num_lines));
      int s = int'($urandom % 131072) - 65536;
      @(negedge clk);
      acc_valid = 1; acc_idx = IW'(idx); acc_s = s;
      for (int l = 0; l < 16; l++) begin
        acc_a[l] = int'($urandom % 200000) - 100000;
        g[idx][l] += fx_mul(s, acc_a[l]);
      end
    end
    @(negedge clk); acc_valid = 0;
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    alpha = 3000; c2 = 50;
    num_lines = LINES;
    command(0);
    compare("after clear_all");
    for (int r = 0; r < 6; r++) begin
      num_lines = (r < 3) ? LINES : 5;
      accumulate(40);
      command(2);
      compare($sformatf("round %0d", r));
    end
    num_lines = LINES;
    accumulate(30);
    command(1);      // gradient dropped: the next update only decays x
    command(2);
    compare("after clear_grad");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

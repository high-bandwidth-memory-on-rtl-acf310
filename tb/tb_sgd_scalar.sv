// tb_sgd_scalar: the ScalarEngine with a new input every cycle. For ridge
// regression the output must equal fx_mul(alpha, z - b) exactly; for
// logistic regression it must equal fx_mul(alpha, PLAN(z) - b) where PLAN
// is modelled here independently, and PLAN(z) must be within 0.02 of the
// true sigmoid 1/(1+exp(-z)) over the whole input range. Checks the
// two-cycle latency and one result per cycle (rate of the paper's
// pipelined engine).
module tb_sgd_scalar;
  import hbm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic logreg = 0, in_valid = 0, out_valid;
  logic signed [31:0] alpha = 0, in_dot = 0, in_label = 0, out_scalar;
  int checks = 0, failures = 0;
  localparam real ONE = 65536.0;

  sgd_scalar dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int plan(int z);
    real a = (z < 0 ? -real'(z) : real'(z)) / ONE, y;
    if (a >= 5.0) y = 1.0;
    else if (a >= 2.375) y = a / 32.0 + 0.84375;
    else if (a >= 1.0) y = a / 8.0 + 0.625;
    else y = a / 4.0 + 0.5;
    return (z < 0) ? int'(ONE) - int'($floor(y * ONE)) : int'($floor(y * ONE));
  endfunction

  int exp_q [$];
  int n_out = 0, first_out = -1, cyc = 0;
  real worst = 0.0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      check(exp_q.size() > 0 && out_scalar == exp_q[0], $sformatf("scalar %0d exp %0d", out_scalar, exp_q.size() ? exp_q[0] : 0));
      if (exp_q.size()) void'(exp_q.pop_front());
      if (first_out < 0) first_out = cyc;
      n_out++;
    end
  end

  task automatic run(bit lr, int n);
    int c0;
    logreg = lr;
    alpha = 1000 + int'($urandom % 60000);   // a per-job constant
    c0 = cyc;
    n_out = 0; first_out = -1;
    for (int i = 0; i < n; i++) begin
      int z = (i % 3 == 0) ? int'($urandom % (12 * 65536)) - 6 * 65536 : int'($urandom) >>> 8;
      int b = lr ? int'($urandom % 2) * 65536 : int'($urandom % 200000) - 100000;
      int a = alpha;
      int s = lr ? plan(z) : z;
      real err = real'(plan(z)) / ONE - 1.0 / (1.0 + $exp(-real'(z) / ONE));
      if (err < 0) err = -err;
      if (err > worst) worst = err;
      exp_q.push_back(fx_mul(a, s - b));
      @(negedge clk); in_valid = 1; in_dot = z; in_label = b;
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    check(n_out == n && exp_q.size() == 0, $sformatf("%0d results for %0d inputs", n_out, n));
    // input driven after edge c0+1, taken at edge c0+2, registered out at
    // c0+3 after two stages, seen by the monitor at edge c0+4
    check(first_out - c0 == 4, $sformatf("first result seen %0d edges after the job began", first_out - c0));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 500);
    run(1, 2000);
    check(worst < 0.02, $sformatf("PLAN sigmoid worst error %f", worst));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

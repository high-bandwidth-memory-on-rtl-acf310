// tb_sgd_dot: the Dot module with samples streamed back to back, one line
// per cycle (label line then 1..8 feature lines), with occasional idle
// cycles between lines. Each result must equal a software model of the
// fixed-point dot product (products shifted by SGD_FRAC, summed in 64 bits,
// saturated to 32) and carry its sample's label; results come in order,
// one per sample, three cycles after the sample's last line, and a new
// sample can start on the cycle after the previous one ends (rate: one
// line per cycle, as in the paper).
module tb_sgd_dot;
  import hbm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid = 0, in_label = 0, in_last = 0, out_valid;
  line_t in_a = '0, in_x = '0;
  logic signed [31:0] out_dot, out_label;
  int checks = 0, failures = 0;

  sgd_dot dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { int dot; int label; int t_last; } res_t;
  res_t q [$];
  int cyc = 0, n_out = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      check(q.size() > 0, "unexpected result");
      if (q.size() > 0) begin
        check(out_dot == q[0].dot && out_label == q[0].label,
              $sformatf("dot %0d label %0d exp %0d %0d", out_dot, out_label, q[0].dot, q[0].label));
        check(cyc - q[0].t_last == 3, $sformatf("latency %0d", cyc - q[0].t_last));
        void'(q.pop_front());
      end
      n_out++;
    end
  end

  task automatic sample(int nl, bit gaps, bit big);
    longint acc = 0;
    int b = int'($urandom);
    res_t r;
    @(negedge clk); in_valid = 1; in_label = 1; in_last = 0; in_a = '0; in_a[0] = b;
    for (int k = 0; k < nl; k++) begin
      @(negedge clk);
      if (gaps && $urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_label = 0; in_last = (k == nl - 1);
      for (int l = 0; l < 16; l++) begin
        int a = big ? int'($urandom) : int'($urandom % 262144) - 131072;
        int x = big ? int'($urandom) : int'($urandom % 262144) - 131072;
        in_a[l] = a; in_x[l] = x;
        acc += (longint'(a) * longint'(x)) >>> SGD_FRAC;
      end
    end
    r.dot = acc > 64'sd2147483647 ? 32'h7FFF_FFFF : acc < -64'sd2147483648 ? 32'h8000_0000 : int'(acc);
    r.label = b;
    r.t_last = cyc + 1;   // the last line is taken at the next edge
    q.push_back(r);
  endtask

  initial begin
    int n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin sample(1 + $urandom % 8, i >= 200, i % 25 == 24); n++; end
    @(negedge clk); in_valid = 0;
    repeat (6) @(negedge clk);
    check(n_out == n && q.size() == 0, $sformatf("%0d results for %0d samples", n_out, n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

// tb_sgd_engine: self-checking test of the SGD engine on a behavioural
// memory. A bit-exact fixed-point model of the algorithm (dot product,
// scalar alpha*(S(z)-b), gradient sum, model update every B samples,
// gradient cleared every epoch) predicts the model the engine writes back.
// Jobs: ridge regression with a minibatch that does not divide the sample
// count; logistic regression; and a larger ridge job whose cycle count is
// checked against the minibatch bubble the design implies.
// The algorithm (minibatch SGD, no stale model) is the paper's; fixed point
// instead of float is this design's, and the model mirrors it bit for bit.
module tb_sgd_engine;
  import hbm_pkg::*;

  localparam longint D_LINE = 64'h400, X_LINE = 64'h40000;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  cfg_t        cfg;
  logic        start = 0, stop = 0, busy, done;
  logic [31:0] result [2];
  axi512_req_t m_req;
  axi512_rsp_t m_rsp;
  int checks = 0, failures = 0;

  sgd_engine dut (.clk, .rst_n, .cfg, .start, .stop, .busy, .done, .result, .m_req, .m_rsp);
  axi_mem_model #(.LATENCY(20), .STALL_PCT(5)) u_mem (.clk, .req(m_req), .rsp(m_rsp));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int plan(int z);
    int a, y;
    int one = 65536;
    a = (z < 0) ? -z : z;
    if (a >= 5*one) y = one;
    else if (a >= (19*one)/8) y = (a >>> 5) + (27*one)/32;
    else if (a >= one) y = (a >>> 3) + (5*one)/8;
    else y = (a >>> 2) + one/2;
    return (z < 0) ? one - y : y;
  endfunction

  task automatic job(int n, int m, int ep, int b, bit logreg, output int cycles);
    int A [][];
    int lab [];
    int x [], g [];
    int alpha = 3277, c2 = 66;
    A = new[m]; lab = new[m]; x = new[n]; g = new[n];
    for (int i = 0; i < m; i++) begin
      logic [LINE_W-1:0] d = '0;
      A[i] = new[n];
      lab[i] = logreg ? (($urandom % 2) ? 65536 : 0) : int'($urandom % 262145) - 131072;
      d[31:0] = lab[i];
      u_mem.poke(D_LINE + i*(n/16+1), d);
      for (int j = 0; j < n; j++) A[i][j] = int'($urandom % 131073) - 65536;
      for (int k = 0; k < n/16; k++) begin
        for (int l = 0; l < 16; l++) d[l*32 +: 32] = A[i][k*16+l];
        u_mem.poke(D_LINE + i*(n/16+1) + 1 + k, d);
      end
    end
    // reference
    foreach (x[j]) x[j] = 0;
    for (int e = 0; e < ep; e++) begin
      foreach (g[j]) g[j] = 0;
      for (int i = 0; i < m; i++) begin
        longint acc = 0;
        int z, s;
        for (int j = 0; j < n; j++) acc += (longint'(A[i][j]) * longint'(x[j])) >>> 16;
        z = (acc > 64'sd2147483647) ? 32'h7fffffff : (acc < -64'sd2147483648) ? 32'h80000000 : int'(acc);
        s = int'((longint'(alpha) * longint'((logreg ? plan(z) : z) - lab[i])) >>> 16);
        for (int j = 0; j < n; j++) g[j] += int'((longint'(s) * longint'(A[i][j])) >>> 16);
        if ((i+1) % b == 0) begin
          for (int j = 0; j < n; j++) begin
            x[j] = x[j] - int'((longint'(alpha) * longint'(g[j])) >>> 16)
                        - int'((longint'(c2) * longint'(x[j])) >>> 16);
            g[j] = 0;
          end
        end
      end
    end
    cfg = '0;
    cfg[0] = 32'(D_LINE*64); cfg[1] = m; cfg[2] = n; cfg[3] = ep; cfg[4] = b;
    cfg[5] = alpha; cfg[6] = c2; cfg[7] = 32'(logreg); cfg[8] = 32'(X_LINE*64);
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    cycles = 0;
    while (!done) begin @(posedge clk); cycles++; end
    begin
      int bad = 0, nz = 0;
      for (int k = 0; k < n/16; k++) begin
        logic [LINE_W-1:0] d = u_mem.peek(X_LINE + k);
        for (int l = 0; l < 16; l++) begin
          if (int'(d[l*32 +: 32]) != x[k*16+l]) bad++;
          if (x[k*16+l] != 0) nz++;
        end
      end
      check(bad == 0, $sformatf("model words wrong: %0d of %0d", bad, n));
      check(nz > 0, "model moved away from zero");
    end
    check(result[0] == 32'(ep), "epochs reported");
    check(result[1] == 32'(ep*m), "samples reported");
  endtask

  initial begin
    int cyc;
    repeat (4) @(posedge clk);
    rst_n = 1;
    job(32, 42, 2, 4, 0, cyc);          // 42 = 10 minibatches + remainder 2
    $display("ridge n=32: %0d cycles", cyc);
    job(64, 48, 3, 16, 1, cyc);
    $display("logreg n=64: %0d cycles", cyc);
    // rate: per minibatch B*(L+1) input cycles plus a bubble of about
    // 2*L (last sample's update, model update) and pipeline latency
    job(256, 64, 2, 16, 0, cyc);
    $display("ridge n=256 m=64 B=16: %0d cycles (%0d input lines)", cyc, 2*64*17);
    check(cyc <= 2*(64*17 + 4*(2*16 + 30)) + 3*16 + 200, $sformatf("rate: %0d cycles", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

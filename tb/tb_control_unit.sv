// tb_control_unit: the register interface of the control unit. Writes
// random configuration words to every unit and reads them back (read data
// one cycle after the request); checks that CTRL start/stop writes give a
// one-cycle pulse to exactly the addressed unit; that STATUS shows busy
// live and done sticky until the next start; and that RESULT0/1 hold the
// values the unit presented when it signalled done, even after the unit's
// outputs change.
// The paper asks for asynchronous start/stop and monitoring by register
// read/write; the register map tested is this design's own.
module tb_control_unit;
  import hbm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic reg_wr = 0, reg_rd = 0, reg_rvalid;
  logic [7:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  cfg_t unit_cfg [NUM_UNITS];
  logic unit_start [NUM_UNITS], unit_stop [NUM_UNITS];
  logic unit_busy [NUM_UNITS], unit_done [NUM_UNITS];
  logic [31:0] unit_result [NUM_UNITS][2];
  int checks = 0, failures = 0;
  int n_start [NUM_UNITS], n_stop [NUM_UNITS];

  control_unit dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(int u, int r, logic [31:0] d);
    @(negedge clk); reg_wr = 1; reg_addr = 8'(u*16 + r); reg_wdata = d;
    @(negedge clk); reg_wr = 0;
  endtask
  task automatic rd(int u, int r, output logic [31:0] d);
    @(negedge clk); reg_rd = 1; reg_addr = 8'(u*16 + r);
    @(negedge clk); reg_rd = 0;
    check(reg_rvalid, "rvalid one cycle after read");
    d = reg_rdata;
  endtask

  always @(posedge clk) if (rst_n)
    for (int u = 0; u < NUM_UNITS; u++) begin
      if (unit_start[u]) n_start[u]++;
      if (unit_stop[u]) n_stop[u]++;
    end

  logic [31:0] shadow [NUM_UNITS][NUM_CFG];

  initial begin
    logic [31:0] d;
    for (int u = 0; u < NUM_UNITS; u++) begin
      n_start[u] = 0; n_stop[u] = 0; unit_busy[u] = 0; unit_done[u] = 0;
      unit_result[u][0] = 0; unit_result[u][1] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // configuration words
    for (int u = 0; u < NUM_UNITS; u++)
      for (int r = 0; r < NUM_CFG; r++) begin shadow[u][r] = $urandom; wr(u, r, shadow[u][r]); end
    for (int u = 0; u < NUM_UNITS; u++)
      for (int r = 0; r < NUM_CFG; r++) begin
        rd(u, r, d);
        check(d == shadow[u][r] && unit_cfg[u][r] == shadow[u][r], $sformatf("cfg %0d/%0d", u, r));
      end
    // start / stop pulses reach only the addressed unit
    for (int u = 0; u < NUM_UNITS; u++) begin
      wr(u, REG_CTRL, 1);
      wr(u, REG_CTRL, 2);
      repeat (2) @(negedge clk);
      for (int v = 0; v < NUM_UNITS; v++)
        check(n_start[v] == (v <= u) && n_stop[v] == (v <= u), $sformatf("pulses unit %0d after ctrl of %0d", v, u));
    end
    // busy, sticky done and latched results
    for (int u = 0; u < NUM_UNITS; u++) begin
      wr(u, REG_CTRL, 1);
      unit_busy[u] = 1;
      rd(u, REG_STATUS, d);
      check(d[1:0] == 2'b01, $sformatf("unit %0d busy status %b", u, d[1:0]));
      @(negedge clk);
      unit_result[u][0] = 32'(u * 11 + 1); unit_result[u][1] = 32'(u * 13 + 2);
      unit_done[u] = 1; unit_busy[u] = 0;
      @(negedge clk);
      unit_done[u] = 0; unit_result[u][0] = 0; unit_result[u][1] = 0;
      repeat (3) @(negedge clk);
      rd(u, REG_STATUS, d);
      check(d[1:0] == 2'b10, $sformatf("unit %0d done status %b", u, d[1:0]));
      rd(u, REG_RESULT0, d); check(d == 32'(u * 11 + 1), $sformatf("unit %0d result0 %0d", u, d));
      rd(u, REG_RESULT1, d); check(d == 32'(u * 13 + 2), $sformatf("unit %0d result1 %0d", u, d));
    end
    wr(3, REG_CTRL, 1);
    rd(3, REG_STATUS, d);
    check(d[1] == 0, "next start clears done");
    rd(4, REG_STATUS, d);
    check(d[1] == 1, "other units keep done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

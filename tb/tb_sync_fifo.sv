// tb_sync_fifo: random pushes and pops against a queue model. Checks the
// first-word-fall-through data, empty, full and count every cycle, that a
// line written into an empty FIFO can be read on the next cycle, and that
// with both sides always enabled the FIFO moves one word per cycle.
// The paper only names the FIFOs; depth and fall-through behaviour are this
// design's.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [W-1:0] wr_data = 0, rd_data;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] q [$];
  int moved = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && !full && count == 0, "empty after reset");
    // random phase
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      check(empty == (q.size() == 0), "empty flag");
      check(full == (q.size() == D), "full flag");
      check(count == q.size(), $sformatf("count %0d exp %0d", count, q.size()));
      if (!empty) check(rd_data == q[0], "head data");
      wr_en = ($urandom % 100) < (i < 1500 ? 60 : 40) && !full;
      rd_en = ($urandom % 100) < 50 && !empty;
      wr_data = W'($urandom);
      @(posedge clk);
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
      #0;
    end
    @(negedge clk); wr_en = 0; rd_en = 0;
    while (!empty) begin @(negedge clk); rd_en = 1; @(posedge clk); void'(q.pop_front()); @(negedge clk); rd_en = 0; end
    // rate: writer and reader both always enabled, one word per cycle
    @(negedge clk); wr_en = 1; wr_data = 1;
    @(negedge clk);
    check(!empty && rd_data == 1, "fall-through one cycle after write");
    for (int i = 2; i < 102; i++) begin
      rd_en = 1; wr_data = W'(i);
      @(posedge clk);
      @(negedge clk);
      if (!empty && rd_data == W'(i)) moved++;
    end
    check(moved == 100, $sformatf("streaming: %0d of 100 cycles moved a word", moved));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

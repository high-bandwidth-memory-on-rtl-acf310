// tb_select_core: the sixteen selection lanes feeding a real select_buffer.
// Streams chunks of random lines, one line every cycle (with occasional
// gaps), with clear arriving together with the first line of each new
// chunk. After each chunk the buffer columns are read back through
// select_buffer and compared with a model: lane l's column must hold, in
// order, the indexes 16*n + l of the items with lower < x < upper
// (signed, strict), and num_matches[l] their number. Boundary values
// (x == lower, x == upper, negative numbers) are mixed in on purpose.
// Rate: the core takes a line every cycle with no back pressure by design,
// so the check is that every presented line's matches are recorded.
// The lane-per-column index buffer and one line per cycle are the paper's;
// the signed strict range test is this design's reading of the algorithm.
module tb_select_core;
  import hbm_pkg::*;
  localparam int BS = 64;
  localparam int BW = $clog2(BS);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic job_start = 0, clear = 0, in_valid = 0;
  logic signed [31:0] lower, upper;
  line_t in_line;
  logic [PARALLELISM-1:0] wr_en;
  logic [BW-1:0] wr_addr [PARALLELISM];
  logic [31:0] wr_data [PARALLELISM];
  logic [BW:0] num_matches [PARALLELISM];
  logic [BW-1:0] rd_addr = 0;
  logic [31:0] rd_data [PARALLELISM];
  int checks = 0, failures = 0;

  select_core #(.BUFFER_SIZE(BS)) dut (.*);
  select_buffer #(.BUFFER_SIZE(BS)) u_buf (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int gen(int lo, int hi);
    case ($urandom % 6)
      0: return lo;
      1: return hi;
      2: return -int'($urandom % 1000);
      default: return int'($urandom % 1000) - 200;
    endcase
  endfunction

  task automatic run();
    int item = 0;
    for (int job = 0; job < 3; job++) begin
      lower = (job == 2) ? -300 : 100; upper = (job == 2) ? -10 : 500;
      @(negedge clk); job_start = 1;
      @(negedge clk); job_start = 0;
      item = 0;
      for (int c = 0; c < 5; c++) begin
        int q [PARALLELISM][$];
        int nl = 1 + $urandom % BS;
        for (int n = 0; n < nl; n++) begin
          if (n > 0 && $urandom % 5 == 0) begin in_valid = 0; clear = 0; @(negedge clk); end
          in_valid = 1; clear = (n == 0);
          for (int l = 0; l < PARALLELISM; l++) begin
            int x = gen(lower, upper);
            in_line[l] = x;
            if (x > lower && x < upper) q[l].push_back(item * 16 + l);
          end
          item++;
          @(negedge clk);
        end
        in_valid = 0; clear = 0;
        @(negedge clk);
        for (int l = 0; l < PARALLELISM; l++)
          check(num_matches[l] == q[l].size(), $sformatf("job %0d chunk %0d lane %0d count %0d exp %0d", job, c, l, num_matches[l], q[l].size()));
        for (int r = 0; r < BS; r++) begin
          rd_addr = BW'(r);
          @(negedge clk);
          for (int l = 0; l < PARALLELISM; l++)
            if (r < q[l].size())
              check(rd_data[l] == 32'(q[l][r]), $sformatf("job %0d chunk %0d lane %0d row %0d: %0d exp %0d", job, c, l, r, rd_data[l], q[l][r]));
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

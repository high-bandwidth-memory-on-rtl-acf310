// tb_select_gather: the gather stage reading a behavioural index buffer
// (one-cycle read, like select_buffer). For random per-lane match counts
// (including all zero, one lane only, and a full column) it checks that
// exactly max(num_matches) lines come out, that word l of line r is the
// buffer entry (r, l) when r < num_matches[l] and the dummy 0xFFFFFFFF
// otherwise, that done pulses once after the last line, and the rate: with
// out_ready always high a chunk of R rows is emitted in at most R + 4
// cycles (one line per cycle). Random out_ready back pressure must not lose
// or duplicate lines.
// Dummy padding is the paper's; the dummy value 0xFFFFFFFF is this design's.
module tb_select_gather;
  import hbm_pkg::*;
  localparam int BS = 64;
  localparam int BW = $clog2(BS);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0, busy, done, out_valid, out_ready = 1;
  logic [BW:0] num_matches [PARALLELISM];
  logic [BW-1:0] rd_addr;
  logic [31:0] rd_data [PARALLELISM];
  line_t out_line;
  int checks = 0, failures = 0;
  logic [31:0] buffer [BS][PARALLELISM];

  select_gather #(.BUFFER_SIZE(BS)) dut (.*);
  always @(posedge clk) for (int l = 0; l < PARALLELISM; l++) rd_data[l] <= buffer[rd_addr][l];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic chunk(int mode, bit bp);
    int rows = 0, got = 0, bad = 0, dones = 0, cycles = 0;
    for (int l = 0; l < PARALLELISM; l++) begin
      case (mode)
        0: num_matches[l] = 0;
        1: num_matches[l] = (l == 5) ? 7 : 0;
        2: num_matches[l] = (l == 0) ? BS : $urandom % BS;
        default: num_matches[l] = $urandom % (BS / 4);
      endcase
      if (int'(num_matches[l]) > rows) rows = num_matches[l];
      for (int r = 0; r < BS; r++) buffer[r][l] = $urandom;
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (dones == 0 && cycles < 1000) begin
      out_ready = bp ? ($urandom % 2) : 1;
      @(posedge clk);
      cycles++;
      if (done) dones++;
      if (out_valid && out_ready) begin
        for (int l = 0; l < PARALLELISM; l++)
          if (out_line[l] != ((got < int'(num_matches[l])) ? buffer[got][l] : DUMMY_WORD)) bad++;
        got++;
      end
      @(negedge clk);
    end
    out_ready = 1;
    repeat (3) begin @(posedge clk); if (done) dones++; if (out_valid) got++; @(negedge clk); end
    check(got == rows, $sformatf("mode %0d: %0d lines exp %0d", mode, got, rows));
    check(bad == 0, $sformatf("mode %0d: %0d wrong words", mode, bad));
    check(dones == 1 && !busy, $sformatf("mode %0d: done pulses %0d", mode, dones));
    if (!bp) check(cycles <= rows + 4, $sformatf("mode %0d: %0d rows in %0d cycles", mode, rows, cycles));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) chunk(i % 4, i >= 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule

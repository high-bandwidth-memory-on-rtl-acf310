// join_assemble: the Assemble stage ("A") of the join engine, with the
// sixteen per-lane result FIFOs that sit in front of it.
//
// Each probe lane pushes result entries {is_match, last, s_slot, l_index}
// into its own FIFO. When every FIFO has an entry, assemble forms one output
// row: a lane whose head is not the closing entry of its key always gives
// it up; a lane whose head closes its key waits (and shows a dummy) until
// every lane's head closes its key, then all are taken together. A lane
// contributes its entry if it is a match and the dummy 0xFFFFFFFF
// otherwise, so a key row with different match counts per lane gives as
// many rows as its busiest lane, padded with dummies. Rows without any
// match are dropped. A row is written as two 512-bit lines: first the 16
// positions in L (L_out), then the 16 slots = positions in S (S_out).
// Without collisions every key has one entry and a row is formed every
// cycle; an output row with matches occupies the output for two cycles.
// match_count counts the non-dummy pairs (num_matches of the paper's figure).
module join_assemble
  import hbm_pkg::*;
#(
  parameter int unsigned LANE_FIFO_DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear_stats,
  // from the probe lanes
  input  logic [PARALLELISM-1:0] in_valid,
  input  logic [PARALLELISM-1:0] in_match,
  input  logic [PARALLELISM-1:0] in_last,
  input  logic [WORD_W-1:0]      in_sidx [PARALLELISM],
  input  logic [WORD_W-1:0]      in_lidx [PARALLELISM],
  output logic [PARALLELISM-1:0] in_ready,
  // result lines
  output logic                   out_valid,
  output line_t                  out_line,
  input  logic                   out_ready,
  output logic [31:0]            match_count,
  output logic                   empty
);
  localparam int unsigned EW = 2 + 2*WORD_W;
  localparam int unsigned CW = $clog2(LANE_FIFO_DEPTH) + 1;

  logic [EW-1:0]          head [PARALLELISM];
  logic [PARALLELISM-1:0] f_empty, f_full, pop;
  logic [CW-1:0]          f_count [PARALLELISM];

  for (genvar l = 0; l < PARALLELISM; l++) begin : g_fifo
    sync_fifo #(.WIDTH(EW), .DEPTH(LANE_FIFO_DEPTH)) u_f (
      .clk, .rst_n,
      .wr_en(in_valid[l] && !f_full[l]),
      .wr_data({in_match[l], in_last[l], in_sidx[l], in_lidx[l]}),
      .full(f_full[l]),
      .rd_en(pop[l]), .rd_data(head[l]), .empty(f_empty[l]), .count(f_count[l])
    );
    assign in_ready[l] = !f_full[l];
  end

  // output row register: two lines, L positions then S slots
  logic  row_valid, row_half;
  line_t row_l, row_s;
  wire   out_fire = out_valid && out_ready;
  wire   row_free = !row_valid || (out_fire && row_half);

  logic                   all_ready, all_last, any_take_match;
  logic [PARALLELISM-1:0] take;
  line_t                  next_l, next_s;
  logic [4:0]             n_match;

  always_comb begin
    all_ready = (f_empty == '0);
    all_last  = 1'b1;
    for (int l = 0; l < PARALLELISM; l++) all_last &= head[l][EW-2];
    any_take_match = 1'b0;
    n_match = '0;
    for (int l = 0; l < PARALLELISM; l++) begin
      take[l]   = !head[l][EW-2] || all_last;
      next_l[l] = DUMMY_WORD;
      next_s[l] = DUMMY_WORD;
      if (take[l] && head[l][EW-1]) begin
        next_l[l] = head[l][WORD_W-1:0];
        next_s[l] = head[l][2*WORD_W-1:WORD_W];
        any_take_match = 1'b1;
        n_match = n_match + 1'b1;
      end
    end
    // a row without matches needs no output slot
    pop = (all_ready && (row_free || !any_take_match)) ? take : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_valid <= 1'b0;
      row_half  <= 1'b0;
      row_l     <= '0;
      row_s     <= '0;
      match_count   <= '0;
    end else begin
      if (out_fire) begin
        if (row_half) begin row_valid <= 1'b0; row_half <= 1'b0; end
        else row_half <= 1'b1;
      end
      if (pop != '0 && any_take_match) begin
        row_valid <= 1'b1;
        row_half  <= 1'b0;
        row_l     <= next_l;
        row_s     <= next_s;
      end
      if (clear_stats) match_count <= '0;
      else if (pop != '0) match_count <= match_count + 32'(n_match);
    end
  end

  assign out_valid = row_valid;
  assign out_line  = row_half ? row_s : row_l;
  assign empty     = (f_empty == '1) && !row_valid;

  logic unused;
  always_comb begin
    unused = 1'b0;
    for (int l = 0; l < PARALLELISM; l++) unused ^= ^f_count[l];
  end
endmodule

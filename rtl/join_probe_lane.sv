// join_probe_lane: one of the sixteen probe pipelines ("P") of the join
// engine. Each lane owns one replica of the hash table and looks up one key
// of L per cycle.
//
// Pipeline (all table reads take one cycle):
//   accept  : read bucket[hash(key)]
//   stage 1 : bucket known; if it holds a slot, read entry[slot]
//   stage 2 : compare storage[slot] with the key and emit a result entry
//             {is_match, last, s_slot, l_index}; with collision handling on
//             and a valid next[slot], read entry[next] and stay in stage 2.
// Without collision handling only the chain head is compared: exactly one
// entry per key, one key per cycle (II = 1), which is exact when S is
// unique and no two S keys share a hash. With collision handling the whole
// chain is walked, one slot per cycle, and the lane stalls meanwhile, which
// is why II = 1 is lost when S has duplicates. The entry with last = 1 closes
// a key. A stalled stage re-reads its own address so read data stays valid.
// repeats counts chain steps beyond the head (num_repeats of the paper's
// figure).
module join_probe_lane
  import hbm_pkg::*;
#(
  parameter int unsigned HASH_TABLE_SIZE = 8192,
  localparam int unsigned HW = $clog2(HASH_TABLE_SIZE)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               handle_col,
  input  logic               clear_stats,
  // keys of L
  input  logic               in_valid,
  input  logic [WORD_W-1:0]  in_key,
  input  logic [WORD_W-1:0]  in_lidx,
  output logic               in_ready,
  // hash table replica
  output logic [HW-1:0]      bkt_raddr,
  input  logic [HW:0]        bkt_rdata,
  output logic [HW-1:0]      ent_raddr,
  input  logic [HW+WORD_W:0] ent_rdata,
  // result entries
  output logic               out_valid,
  output logic               out_match,
  output logic               out_last,
  output logic [WORD_W-1:0]  out_sidx,
  output logic [WORD_W-1:0]  out_lidx,
  input  logic               out_ready,
  output logic [31:0]        repeats,
  output logic               idle
);
  typedef struct packed {
    logic              valid;
    logic [WORD_W-1:0] key;
    logic [WORD_W-1:0] lidx;
  } s1_t;
  typedef struct packed {
    logic              valid;
    logic              cand;    // a slot is being compared
    logic [HW-1:0]     slot;
    logic [WORD_W-1:0] key;
    logic [WORD_W-1:0] lidx;
  } s2_t;

  s1_t s1;
  s2_t s2;

  wire              ent_nvalid = ent_rdata[HW+WORD_W];
  wire [HW-1:0]     ent_nslot  = ent_rdata[HW+WORD_W-1:WORD_W];
  wire [WORD_W-1:0] ent_key    = ent_rdata[WORD_W-1:0];
  wire              bkt_valid  = bkt_rdata[HW];
  wire [HW-1:0]     bkt_slot   = bkt_rdata[HW-1:0];

  wire more    = handle_col && s2.cand && ent_nvalid;
  wire s2_fire = s2.valid && out_ready;
  wire s2_cont = s2_fire && more;
  wire s2_free = !s2.valid || (s2_fire && !more);
  wire s1_adv  = s1.valid && s2_free;
  wire s1_free = !s1.valid || s1_adv;

  assign in_ready  = s1_free;
  assign bkt_raddr = (in_valid && s1_free) ? in_key[HW-1:0] : s1.key[HW-1:0];
  assign ent_raddr = s2_cont ? ent_nslot : (s1_adv ? bkt_slot : s2.slot);

  assign out_valid = s2.valid;
  assign out_match = s2.cand && (ent_key == s2.key);
  assign out_last  = !more;
  assign out_sidx  = WORD_W'(s2.slot);
  assign out_lidx  = s2.lidx;
  assign idle      = !s1.valid && !s2.valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1      <= '0;
      s2      <= '0;
      repeats <= '0;
    end else begin
      if (clear_stats) repeats <= '0;
      else if (s2_cont) repeats <= repeats + 1;
      if (s2_cont) begin
        s2.slot <= ent_nslot;
      end else if (s2_free) begin
        s2.valid <= s1.valid;
        s2.cand  <= bkt_valid;
        s2.slot  <= bkt_slot;
        s2.key   <= s1.key;
        s2.lidx  <= s1.lidx;
      end
      if (s1_free) begin
        s1.valid <= in_valid;
        s1.key   <= in_key;
        s1.lidx  <= in_lidx;
      end
    end
  end
endmodule

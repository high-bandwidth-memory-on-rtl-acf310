// join_hash_table: the hash table of the join engine, built on the small
// side S and kept as PARALLELISM identical replicas so that sixteen probes
// can each read a different slot in the same cycle.
//
// Layout (chained hash table, as MonetDB builds it): bucket[h] holds the
// slot of the most recently inserted key with hash h (plus a valid bit);
// storage[i] holds the key of the i-th item of S and next[i] the slot of
// the previous item in the same chain (plus a valid bit), so a chain is
// walked bucket -> next -> next ... and the slot number i is the item's
// position in S. Every write goes to all replicas at once. Each replica has
// its own bucket read port and entry (next + storage) read port, both with
// a one-cycle registered read, i.e. Ultra-RAM style. HASH_TABLE_SIZE
// entries per replica; bucket and slot numbers have the same range.
// The paper gives the replication and the chained layout; the entry format
// and valid bits are this design's.
module join_hash_table
  import hbm_pkg::*;
#(
  parameter int unsigned HASH_TABLE_SIZE = 8192,
  localparam int unsigned HW = $clog2(HASH_TABLE_SIZE)
) (
  input  logic                 clk,
  // shared write ports (build)
  input  logic                 bkt_we,
  input  logic [HW-1:0]        bkt_waddr,
  input  logic [HW:0]          bkt_wdata,      // {valid, slot}
  input  logic                 ent_we,
  input  logic [HW-1:0]        ent_waddr,
  input  logic [HW+WORD_W:0]   ent_wdata,      // {next valid, next slot, key}
  // per-replica read ports (probe lanes; lane 0 also serves the build)
  input  logic [HW-1:0]        bkt_raddr [PARALLELISM],
  output logic [HW:0]          bkt_rdata [PARALLELISM],
  input  logic [HW-1:0]        ent_raddr [PARALLELISM],
  output logic [HW+WORD_W:0]   ent_rdata [PARALLELISM]
);
  for (genvar r = 0; r < PARALLELISM; r++) begin : g_rep
    logic [HW:0]        bucket  [HASH_TABLE_SIZE];
    logic [HW+WORD_W:0] entry   [HASH_TABLE_SIZE];   // next[] and storage[]
    always_ff @(posedge clk) begin
      if (bkt_we) bucket[bkt_waddr] <= bkt_wdata;
      if (ent_we) entry[ent_waddr]  <= ent_wdata;
      bkt_rdata[r] <= bucket[bkt_raddr[r]];
      ent_rdata[r] <= entry[ent_raddr[r]];
    end
  end
endmodule

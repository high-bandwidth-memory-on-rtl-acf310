// join_build: the Build module of the join engine. It reads the small side
// S as 512-bit lines, reduces each line to single keys with a 16-to-1
// multiplexer, and inserts the keys one after the other into the hash
// table: storage[i] = key, next[i] = bucket[h], bucket[h] = i, where i is the
// key's position in S and h = hash(key). Inserts are serial because each one
// depends on the bucket written by the previous one.
//
// Timing: start latches the number of keys (at most HASH_TABLE_SIZE). The
// module first marks all HASH_TABLE_SIZE buckets empty (one per cycle),
// then inserts one key every two cycles (bucket read, then the writes).
// done pulses after the last insert. The hash is the low log2(
// HASH_TABLE_SIZE) bits of the key (join_probe_lane uses the same).
// The paper gives the serial insert and the 16-to-1 multiplexer; the hash
// and the bucket clear at start are this design's.
module join_build
  import hbm_pkg::*;
#(
  parameter int unsigned HASH_TABLE_SIZE = 8192,
  localparam int unsigned HW = $clog2(HASH_TABLE_SIZE)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        num_keys,
  output logic               busy,
  output logic               done,
  // S lines
  input  logic               in_valid,
  input  line_t              in_line,
  output logic               in_ready,
  // hash table
  output logic               bkt_we,
  output logic [HW-1:0]      bkt_waddr,
  output logic [HW:0]        bkt_wdata,
  output logic               ent_we,
  output logic [HW-1:0]      ent_waddr,
  output logic [HW+WORD_W:0] ent_wdata,
  output logic [HW-1:0]      bkt_raddr,
  input  logic [HW:0]        bkt_rdata
);
  typedef enum logic [1:0] {B_IDLE, B_CLEAR, B_READ, B_WRITE} state_e;
  state_e state;

  logic [31:0] left, slot;
  logic [3:0]  word;               // 16-to-1 multiplexer select
  logic [HW:0] clr;

  wire [WORD_W-1:0] key = in_line[word];
  wire [HW-1:0]     h   = key[HW-1:0];

  assign bkt_raddr = h;
  // the line is released after its last word, or after the last key
  assign in_ready  = (state == B_WRITE) && (word == 4'd15 || left == 1);

  always_comb begin
    bkt_we    = 1'b0;
    bkt_waddr = h;
    bkt_wdata = {1'b1, HW'(slot)};
    ent_we    = 1'b0;
    ent_waddr = HW'(slot);
    ent_wdata = {bkt_rdata, key};     // next = previous head of the chain
    if (state == B_CLEAR) begin
      bkt_we    = 1'b1;
      bkt_waddr = HW'(clr);
      bkt_wdata = '0;
    end else if (state == B_WRITE) begin
      bkt_we = 1'b1;
      ent_we = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= B_IDLE;
      left  <= '0;
      slot  <= '0;
      word  <= '0;
      clr   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        B_IDLE: if (start) begin
          left  <= num_keys;
          slot  <= '0;
          word  <= '0;
          clr   <= '0;
          state <= B_CLEAR;
        end
        B_CLEAR: begin
          clr <= clr + 1'b1;
          if (clr == (HW+1)'(HASH_TABLE_SIZE - 1)) begin
            if (left == 0) begin done <= 1'b1; state <= B_IDLE; end
            else state <= B_READ;
          end
        end
        B_READ: if (in_valid) state <= B_WRITE;   // bucket[h] read this cycle
        B_WRITE: begin
          left <= left - 1;
          slot <= slot + 1;
          word <= word + 1'b1;
          if (left == 1) begin done <= 1'b1; state <= B_IDLE; end
          else state <= B_READ;
        end
        default: state <= B_IDLE;
      endcase
    end
  end

  assign busy = (state != B_IDLE);

  a_fits: assert property (@(posedge clk) disable iff (!rst_n)
            start |-> num_keys <= HASH_TABLE_SIZE);
endmodule

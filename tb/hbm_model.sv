// hbm_model: behavioural stand-in for the HBM IP and its two stacks, for
// system testbenches. 32 AXI3 ports of 256 bits share one sparse 8 GiB
// memory (any port reaches any address, as through the IP's crossbar);
// unwritten data reads as zero. Each port accepts up to 8 bursts per
// direction and returns read data LATENCY cycles after the address, in
// order. Pseudo-channel contention and refresh are not modelled. It
// counts beats per stack (address below or above 4 GiB) so a test can see
// that the shim keeps each half of a line in its own stack.
// From the paper: 32 ports of 256 bits, 8 GiB in two stacks of 4 GiB, any
// port reaching any address. Latency, queue depths and the lack of channel
// contention are this model's own simplifications.
module hbm_model
  import hbm_pkg::*;
#(
  parameter int LATENCY = 12
) (
  input  logic        clk,
  input  axi256_req_t req [HBM_PORTS],
  output axi256_rsp_t rsp [HBM_PORTS]
);
  typedef struct {
    longint unsigned unit;     // 32-byte unit address
    int              len;
    longint unsigned t;
  } burst_t;

  logic [HBM_DATA_W-1:0] mem [longint unsigned];
  burst_t arq [HBM_PORTS][$];
  burst_t awq [HBM_PORTS][$];
  longint unsigned bq [HBM_PORTS][$];
  int rbeat [HBM_PORTS];
  int wbeat [HBM_PORTS];
  longint unsigned cyc = 0;
  longint unsigned beats_stack [2] = '{0, 0};
  longint unsigned beats_port [HBM_PORTS];

  function automatic logic [HBM_DATA_W-1:0] peek(longint unsigned unit);
    return mem.exists(unit) ? mem[unit] : '0;
  endfunction
  function automatic void poke(longint unsigned unit, logic [HBM_DATA_W-1:0] d);
    mem[unit] = d;
  endfunction

  initial begin
    for (int p = 0; p < HBM_PORTS; p++) begin
      rsp[p] = '0; rbeat[p] = 0; wbeat[p] = 0; beats_port[p] = 0;
    end
  end

  always @(posedge clk) begin
    cyc++;
    for (int p = 0; p < HBM_PORTS; p++) begin
      if (req[p].arvalid && rsp[p].arready)
        arq[p].push_back('{req[p].araddr >> 5, int'(req[p].arlen), cyc + LATENCY});
      if (rsp[p].rvalid && req[p].rready) begin
        beats_stack[arq[p][0].unit >= (64'h1_0000_0000 >> 5)]++;
        beats_port[p]++;
        if (rbeat[p] == arq[p][0].len) begin
          void'(arq[p].pop_front());
          rbeat[p] = 0;
        end else rbeat[p]++;
      end
      if (req[p].awvalid && rsp[p].awready)
        awq[p].push_back('{req[p].awaddr >> 5, int'(req[p].awlen), 0});
      if (req[p].wvalid && rsp[p].wready) begin
        mem[awq[p][0].unit + longint'(wbeat[p])] = req[p].wdata;
        beats_stack[awq[p][0].unit >= (64'h1_0000_0000 >> 5)]++;
        beats_port[p]++;
        if (wbeat[p] == awq[p][0].len) begin
          if (!req[p].wlast) $error("hbm_model: wlast missing on port %0d", p);
          void'(awq[p].pop_front());
          bq[p].push_back(cyc + 2);
          wbeat[p] = 0;
        end else wbeat[p]++;
      end
      if (rsp[p].bvalid && req[p].bready) void'(bq[p].pop_front());

      rsp[p].arready <= (arq[p].size() < 8);
      rsp[p].awready <= (awq[p].size() < 8);
      rsp[p].wready  <= (awq[p].size() > 0);
      if (arq[p].size() > 0 && arq[p][0].t <= cyc) begin
        rsp[p].rvalid <= 1'b1;
        rsp[p].rdata  <= peek(arq[p][0].unit + longint'(rbeat[p]));
        rsp[p].rlast  <= (rbeat[p] == arq[p][0].len);
      end else begin
        rsp[p].rvalid <= 1'b0;
      end
      rsp[p].bvalid <= (bq[p].size() > 0) && (bq[p][0] <= cyc);
    end
  end
endmodule

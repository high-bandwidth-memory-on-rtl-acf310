// axi_mem_model: behavioural 512-bit AXI3 memory for testbenches. Stands in
// for host memory behind the OpenCAPI endpoint, or for one HBM-shim port
// when an engine is tested on its own. Sparse storage keyed by 64-byte line
// address (unwritten lines read as zero), up to 8 bursts accepted per
// direction, read data LATENCY cycles after the address, responses in
// order. STALL_PCT > 0 drops the ready/valid signals at random to exercise
// back pressure (stall_pct can be changed at run time). Tasks poke/peek give the testbench direct access.
// Nothing here comes from the paper: it is a test stand-in whose latency and
// back-pressure behaviour are this design's choice.
module axi_mem_model
  import hbm_pkg::*;
#(
  parameter int LATENCY   = 8,
  parameter int STALL_PCT = 0
) (
  input  logic        clk,
  input  axi512_req_t req,
  output axi512_rsp_t rsp
);
  typedef struct {
    longint unsigned line;
    int              len;
    longint unsigned t;
  } burst_t;

  logic [LINE_W-1:0] mem [longint unsigned];
  burst_t arq[$], awq[$];
  longint unsigned bq[$];
  int rbeat = 0, wbeat = 0;
  longint unsigned cyc = 0;
  longint unsigned reads = 0, writes = 0;

  function automatic logic [LINE_W-1:0] peek(longint unsigned line);
    return mem.exists(line) ? mem[line] : '0;
  endfunction
  function automatic void poke(longint unsigned line, logic [LINE_W-1:0] d);
    mem[line] = d;
  endfunction

  int stall_pct = STALL_PCT;   // a testbench may change it between jobs
  function automatic bit stall();
    return (stall_pct > 0) && (($urandom % 100) < stall_pct);
  endfunction

  initial rsp = '0;

  always @(posedge clk) begin
    cyc++;
    if (req.arvalid && rsp.arready) arq.push_back('{req.araddr >> 6, int'(req.arlen), cyc + LATENCY});
    if (rsp.rvalid && req.rready) begin
      reads++;
      if (rbeat == arq[0].len) begin
        void'(arq.pop_front());
        rbeat = 0;
      end else rbeat++;
    end
    if (req.awvalid && rsp.awready) awq.push_back('{req.awaddr >> 6, int'(req.awlen), 0});
    if (req.wvalid && rsp.wready) begin
      writes++;
      mem[awq[0].line + longint'(wbeat)] = req.wdata;
      if (wbeat == awq[0].len) begin
        if (!req.wlast) $error("axi_mem_model: wlast missing");
        void'(awq.pop_front());
        bq.push_back(cyc + 2);
        wbeat = 0;
      end else begin
        if (req.wlast) $error("axi_mem_model: early wlast");
        wbeat++;
      end
    end
    if (rsp.bvalid && req.bready) void'(bq.pop_front());

    rsp.arready <= (arq.size() < 8) && !stall();
    rsp.awready <= (awq.size() < 8) && !stall();
    rsp.wready  <= (awq.size() > 0) && !stall();
    if (arq.size() > 0 && arq[0].t <= cyc && !stall()) begin
      rsp.rvalid <= 1'b1;
      rsp.rdata  <= peek(arq[0].line + longint'(rbeat));
      rsp.rlast  <= (rbeat == arq[0].len);
    end else begin
      rsp.rvalid <= 1'b0;
    end
    rsp.bvalid <= (bq.size() > 0) && (bq[0] <= cyc);
  end
endmodule

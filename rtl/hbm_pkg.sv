// hbm_pkg: types and constants shared by the HBM analytics design.
//
// The memory side of the design is AXI3. Xilinx's HBM IP exposes 32 ports of
// 256 bits (two stacks of 16 pseudo channels); the HBM-shim pairs them into 16
// ports of 512 bits. Both widths are carried here as packed structs, one for
// the manager-to-subordinate direction (req) and one for the other (rsp).
// Only the AXI3 fields this design uses are present: one transaction ID (all
// responses in order), full-line writes (no strobes), INCR bursts of up to 16
// beats (arlen/awlen 4 bits, as in AXI3). Addresses are byte addresses.
//
// From the paper: 32 ports x 256 bits, 2 stacks, 512-bit shim ports,
// PARALLELISM = 16 32-bit words per line, 14 compute-engine slots and 2
// datamovers on the 16 shim ports, 4 GiB per stack. The register map of the
// control unit (unit slot x 16 registers) is this design's own choice.
package hbm_pkg;

  // ---- memory geometry ------------------------------------------------------
  localparam int unsigned HBM_PORTS      = 32;   // AXI3 ports of the HBM IP
  localparam int unsigned HBM_DATA_W     = 256;  // width of one HBM IP port
  localparam int unsigned SHIM_PORTS     = 16;   // merged 512-bit ports
  localparam int unsigned LINE_W         = 512;  // width of one shim port
  localparam int unsigned LINE_BYTES     = LINE_W / 8;
  localparam int unsigned PARALLELISM    = 16;   // 32-bit words per line
  localparam int unsigned WORD_W         = 32;
  localparam int unsigned ADDR_W         = 64;   // AXI address field width
  localparam int unsigned HBM_ADDR_W     = 33;   // 8 GiB of HBM
  // constant offset the shim adds on the second (stack 1) port: base of stack 1
  localparam logic [ADDR_W-1:0] STACK1_OFFSET = 64'h1_0000_0000;
  localparam int unsigned MAX_BURST      = 16;   // AXI3 burst length limit

  // ---- system slots ---------------------------------------------------------
  localparam int unsigned NUM_DM         = 2;    // datamovers on shim ports 0,1
  localparam int unsigned NUM_CE         = 14;   // compute-engine slots, shim ports 2..15
  localparam int unsigned NUM_UNITS      = NUM_DM + NUM_CE;

  // ---- control registers ----------------------------------------------------
  localparam int unsigned NUM_CFG        = 12;   // configuration words per unit
  localparam int unsigned REG_CTRL       = 12;   // write 1: start
  localparam int unsigned REG_STATUS     = 13;   // bit0 busy, bit1 done
  localparam int unsigned REG_RESULT0    = 14;
  localparam int unsigned REG_RESULT1    = 15;

  typedef logic [NUM_CFG-1:0][31:0] cfg_t;      // one unit's configuration words
  typedef logic [PARALLELISM-1:0][WORD_W-1:0] line_t;

  // which compute engine fills the 14 slots (one bitstream per kind in the paper)
  typedef enum logic [1:0] {ENG_SELECTION = 2'd0, ENG_JOIN = 2'd1, ENG_SGD = 2'd2} engine_kind_e;

  // ---- AXI3 subset, 256-bit (HBM IP side) -----------------------------------
  typedef struct packed {
    logic                  arvalid;
    logic [ADDR_W-1:0]     araddr;
    logic [3:0]            arlen;
    logic                  rready;
    logic                  awvalid;
    logic [ADDR_W-1:0]     awaddr;
    logic [3:0]            awlen;
    logic                  wvalid;
    logic [HBM_DATA_W-1:0] wdata;
    logic                  wlast;
    logic                  bready;
  } axi256_req_t;

  typedef struct packed {
    logic                  arready;
    logic                  rvalid;
    logic [HBM_DATA_W-1:0] rdata;
    logic                  rlast;
    logic                  awready;
    logic                  wready;
    logic                  bvalid;
  } axi256_rsp_t;

  // ---- AXI3 subset, 512-bit (shim side, engines, host) ----------------------
  typedef struct packed {
    logic              arvalid;
    logic [ADDR_W-1:0] araddr;
    logic [3:0]        arlen;
    logic              rready;
    logic              awvalid;
    logic [ADDR_W-1:0] awaddr;
    logic [3:0]        awlen;
    logic              wvalid;
    logic [LINE_W-1:0] wdata;
    logic              wlast;
    logic              bready;
  } axi512_req_t;

  typedef struct packed {
    logic              arready;
    logic              rvalid;
    logic [LINE_W-1:0] rdata;
    logic              rlast;
    logic              awready;
    logic              wready;
    logic              bvalid;
  } axi512_rsp_t;

  // SGD number format: signed 32-bit fixed point with SGD_FRAC fraction
  // bits (the paper's engine uses 32-bit floats; see sgd_engine)
  localparam int unsigned SGD_FRAC = 16;

  // fixed-point product a*b >> SGD_FRAC, kept to 32 bits (wraps)
  function automatic logic signed [31:0] fx_mul(logic signed [31:0] a, logic signed [31:0] b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return 32'(p >>> SGD_FRAC);
  endfunction

  // dummy element used to pad result lines (selection and join)
  localparam logic [WORD_W-1:0] DUMMY_WORD = 32'hFFFF_FFFF;

endpackage

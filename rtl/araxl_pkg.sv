// araxl_pkg: configuration constants and shared types of the AraXL vector
// interconnect (request interface, global load-store unit, ring interface).
//
// The main configuration is the 64-lane machine: 16 clusters of 4 lanes,
// VLEN = 64 Kibit per vector register, a memory bus of 32 bits per lane
// (32*L*C = 2048 bits) and 64-bit ring links.  Modules take these values as
// parameter defaults so that testbenches can build smaller instances.
// The instruction/response bundle widths, the metadata carried with GLSU
// beats and the ring packet format are this implementation's own choices.
package araxl_pkg;

  // ---------------------------------------------------------------------
  // Configuration (paper values)
  // ---------------------------------------------------------------------
  localparam int unsigned NrLanes      = 4;      // lanes per cluster
  localparam int unsigned NrClusters   = 16;     // 64 lanes in total
  localparam int unsigned VLEN         = 65536;  // bits per vector register
  localparam int unsigned RingWidth    = 64;     // bits per ring bus
  localparam int unsigned AxiAddrWidth = 64;     // assumed

  // Register cuts added on top of the baseline (0 = baseline machine)
  localparam int unsigned NumReqCuts   = 0;
  localparam int unsigned NumGlsuCuts  = 0;
  localparam int unsigned NumRingCuts  = 0;

  // ---------------------------------------------------------------------
  // Shared types
  // ---------------------------------------------------------------------
  typedef logic [63:0] xlen_t;
  typedef logic [31:0] vlen_t;       // vector length in elements
  typedef logic [AxiAddrWidth-1:0] addr_t;

  // Element width (vsew encoding of RVV 1.0)
  typedef enum logic [1:0] {
    EW8  = 2'd0,
    EW16 = 2'd1,
    EW32 = 2'd2,
    EW64 = 2'd3
  } vew_e;

  // Accelerator request: one vector instruction with its scalar operands
  typedef struct packed {
    logic [31:0] insn;
    xlen_t       rs1;
    xlen_t       rs2;
  } acc_req_t;

  // Accelerator response, sent by cluster 0 only
  typedef struct packed {
    xlen_t result;
    logic  error;
  } acc_resp_t;

  // Unit-stride vector memory request seen by the GLSU
  typedef struct packed {
    logic  store;
    addr_t addr;
    vlen_t vl;
    vew_e  ew;
  } glsu_req_t;

  // Per-beat control carried through the align and shuffle pipelines
  // (the "align table" / "shuffle table" entries travel with the data).
  typedef struct packed {
    vew_e        ew;
    logic [15:0] off;     // address offset inside the memory bus word
    logic [31:0] nbytes;  // bytes of the whole vector access
    logic        first;   // first beat of the access
    logic        last;    // last beat of the access
    logic        drop1;   // store path, 64-bit elements: second beat of the pair is past the end
  } beat_meta_t;

  // Ring packet: payload, number of hops still to travel, and a tag
  // (reduction step of the packet; 0 for slides)
  typedef struct packed {
    logic [RingWidth-1:0] data;
    logic [7:0]           hops;
    logic [3:0]           tag;
  } ring_pkt_t;

  // Operations of the ring extension of the slide unit
  typedef enum logic [1:0] {
    RING_SLIDE1UP   = 2'd0,
    RING_SLIDE1DOWN = 2'd1,
    RING_REDUCE     = 2'd2
  } ring_op_e;

  // Integer reduction operators of the inter-cluster stage
  typedef enum logic [2:0] {
    RED_SUM  = 3'd0,
    RED_AND  = 3'd1,
    RED_OR   = 3'd2,
    RED_XOR  = 3'd3,
    RED_MINU = 3'd4,
    RED_MAXU = 3'd5
  } red_op_e;

  function automatic int unsigned ew_bytes(vew_e ew);
    return 1 << ew;
  endfunction

endpackage

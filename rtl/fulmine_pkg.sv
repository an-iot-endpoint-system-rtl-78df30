// fulmine_pkg: types and constants shared by the cluster blocks.
//
// The cluster's memory-side protocol is a simple request/grant/response
// bundle used for every TCDM port, every peripheral register port and the
// core-side ports of the per-core demultiplexers:
//   * a master raises req together with addr/we/be/wdata and holds them
//     until gnt is seen high in the same cycle;
//   * exactly one cycle after the grant the slave raises rvalid, with rdata
//     for a read (writes get an rvalid as well, rdata is then undefined).
// The paper states that the TCDM interconnect gives single-cycle access and
// stalls the loser of a bank conflict; the field names and the one-cycle
// response are this design's choice. The address map is also this design's
// own (the paper only gives the sizes: 64 kB TCDM, 4 kB per peripheral).
package fulmine_pkg;

  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

  localparam mem_req_t MEM_REQ_IDLE = '{req: 1'b0, we: 1'b0, be: 4'h0, addr: 32'h0, wdata: 32'h0};

  // Address map (this design's choice, PULP-like).
  localparam logic [31:0] TCDM_BASE   = 32'h1000_0000;
  localparam int unsigned TCDM_BYTES  = 64 * 1024;
  localparam logic [31:0] PERIPH_BASE = 32'h1020_0000;
  // 4 kB peripheral slots, in order: 0 timer, 1 HWCE, 2 HWCRYPT, 3 DMA,
  // 4 event unit (reached through the private per-core port).
  localparam int unsigned PERIPH_SLOT_BITS = 12;
  localparam int unsigned N_PERIPH         = 4;
  localparam int unsigned EU_SLOT          = 4;

  // Events delivered to the event unit.
  localparam int unsigned EVT_DMA     = 0;
  localparam int unsigned EVT_HWCE    = 1;
  localparam int unsigned EVT_HWCRYPT = 2;
  localparam int unsigned EVT_TIMER   = 3;
  localparam int unsigned EVT_IO_LSB  = 4;   // 8 I/O events, Fig. 2
  localparam int unsigned EVT_BARRIER = 12;
  localparam int unsigned EVT_SW_LSB  = 16;  // 8 software events
  localparam int unsigned N_EVENTS    = 32;

  // Link between the cluster DMA and L2, carried through the dual-clock FIFOs.
  typedef struct packed {
    logic        we;
    logic [7:0]  be;
    logic [31:0] addr;
    logic [63:0] wdata;
  } l2_req_t;

  // HWCE weight precision.
  typedef enum logic [1:0] {
    WPREC_16 = 2'd0,
    WPREC_8  = 2'd1,
    WPREC_4  = 2'd2
  } wprec_e;

  // Power modes of the cluster.
  typedef enum logic [1:0] {
    PM_ACTIVE     = 2'd0,
    PM_IDLE       = 2'd1,
    PM_DEEP_SLEEP = 2'd2
  } pmode_e;

endpackage

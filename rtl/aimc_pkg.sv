// aimc_pkg: types and constants shared by the many-tile analog in-memory
// computing (AIMC) system. A 32-bit word-level request/response pair is used on
// every L1 (TCDM) port; a 256-bit beat-level pair is used on the wireless
// channel between the clusters and L2. A small write-only configuration bus
// carries the cores' programming writes to the cluster peripherals.
//
// Numbers that follow the paper: 256x256 crossbar, 16 IMA ports of 4 bytes,
// 8-bit activations, 4-bit one's-complement weights, 256 bit/cycle wireless
// bandwidth (89.6 Gbit/s at 350 MHz), 130 ns analog evaluation (46 cycles at
// 350 MHz), 16 clusters, 4 cores, 10 L1 banks. Everything else (the bus
// formats and the register map) is this design's own choice.
// Lint note: a module that imports this package and does not use every
// constant gets 'unused parameter' lint notes; they are harmless.
package aimc_pkg;

  // ---------------- sizes ----------------
  localparam int unsigned XBAR_ROWS   = 256;  // crossbar inputs  (C_in)
  localparam int unsigned XBAR_COLS   = 256;  // crossbar outputs (C_out)
  localparam int unsigned IMA_PORTS   = 16;   // 16 ports of 4 bytes
  localparam int unsigned EVAL_CYCLES = 46;   // ceil(130 ns * 350 MHz)
  localparam int unsigned BEAT_BITS   = 256;  // wireless channel width
  localparam int unsigned BEAT_WORDS  = BEAT_BITS / 32;
  localparam int unsigned MAX_CL      = 16;   // cluster id field covers 16

  // ---------------- L1 word port (TCDM) ----------------
  // A master holds req (with we/be/addr/wdata stable) until gnt is seen in the
  // same cycle. rvalid/rdata follow exactly one cycle after the grant, for
  // reads and writes alike.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;   // byte address inside the cluster's L1
    logic [31:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } tcdm_rsp_t;

  // ---------------- wireless channel (beat level) ----------------
  // A transceiver holds req until gnt. Reads go to L2 only; read data is put
  // on the shared broadcast bus one cycle after the grant (rvalid). A write
  // goes to L2 (to_l1 = 0) or to the L1 of cluster tgt_cl (to_l1 = 1); wack
  // tells the sender that the beat has been stored.
  typedef struct packed {
    logic                  req;
    logic                  we;
    logic                  to_l1;
    logic [3:0]            tgt_cl;
    logic [31:0]           addr;   // byte address, 32-byte aligned
    logic [BEAT_BITS-1:0]  wdata;
  } wl_req_t;

  typedef struct packed {
    logic gnt;
    logic rvalid;
    logic wack;
  } wl_rsp_t;

  // Beat delivered by the channel to a cluster's receive port.
  typedef struct packed {
    logic                 valid;
    logic [31:0]          addr;   // L1 byte address, 32-byte aligned
    logic [BEAT_BITS-1:0] data;
  } wl_rx_t;

  // ---------------- configuration bus ----------------
  // Write-only bus from the cores to the cluster peripherals; one write per
  // cycle, always accepted.
  typedef struct packed {
    logic        valid;
    logic [11:0] addr;   // byte offset in the cluster peripheral space
    logic [31:0] wdata;
  } cfg_req_t;

  // Peripheral base offsets on the configuration bus.
  localparam logic [3:0] CFG_DMA = 4'h0;  // 0x000 - 0x0FF
  localparam logic [3:0] CFG_IMA = 4'h1;  // 0x100 - 0x1FF
  localparam logic [3:0] CFG_EU  = 4'h2;  // 0x200 - 0x2FF

  // ---------------- event numbers ----------------
  localparam int unsigned EVT_W       = 32;
  localparam int unsigned EVT_DMA_RD  = 0;
  localparam int unsigned EVT_DMA_WR  = 1;
  localparam int unsigned EVT_IMA     = 2;
  localparam int unsigned EVT_BARRIER = 3;
  localparam int unsigned EVT_SW_BASE = 8;   // software events 8..15
  localparam int unsigned N_SW_EVT    = 8;

  // Software event sent from one cluster to others.
  typedef struct packed {
    logic                valid;
    logic [MAX_CL-1:0]   cl_mask;
    logic [2:0]          id;
  } sw_evt_t;

endpackage

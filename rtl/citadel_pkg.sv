// citadel_pkg: constants and types shared by the Citadel isolation hardware.
//
// The sizes follow the prototype configuration: two cores, a 64-entry ROB, a
// 16-entry memory reservation station, 64 physical memory regions of 32 MB, a
// 1 MB 16-way LLC with a 10-cycle hit latency and at most 16 outstanding
// requests, and DRAM with a 120-cycle latency and 24 outstanding requests.
// The address map (DRAM at 0x8000_0000, the zero device one DRAM-size window
// above bit 32), the 64-byte line, the Sv39/56-bit address widths and the
// MSPEC field layout are choices of this design where the paper is silent.
package citadel_pkg;

  // ---------------------------------------------------------------- system
  parameter int unsigned NCORES     = 2;
  parameter int unsigned CORE_W     = 1;          // $clog2(NCORES)
  parameter int unsigned XLEN       = 64;
  parameter int unsigned PADDR_W    = 56;         // RISC-V Sv39 physical address
  parameter int unsigned LINE_BYTES = 64;
  parameter int unsigned LINE_OFF_W = 6;
  parameter int unsigned LINE_W     = LINE_BYTES * 8;
  parameter int unsigned LADDR_W    = PADDR_W - LINE_OFF_W;  // line address width

  // ---------------------------------------------------------- core sizes
  parameter int unsigned ROB_ENTRIES = 64;
  parameter int unsigned ROB_TAG_W   = 6;
  parameter int unsigned MEMRS_ENTRIES = 16;
  parameter int unsigned PREG_W      = 7;         // physical register tag

  // ------------------------------------------------ physical memory regions
  parameter logic [PADDR_W-1:0] DRAM_BASE = 56'h80000000;
  parameter int unsigned NREGIONS     = 64;
  parameter int unsigned REGION_ID_W  = 6;
  parameter int unsigned REGION_SHIFT = 25;       // 32 MB regions
  parameter int unsigned DRAM_W       = REGION_SHIFT + REGION_ID_W; // 2 GB
  // Zero device: same size as DRAM, aliases DRAM in every LLC index bit.
  parameter logic [PADDR_W-1:0] ZERO_BASE = 56'h180000000;

  // ------------------------------------------------------------------ LLC
  parameter int unsigned LLC_SETS      = 1024;
  parameter int unsigned LLC_WAYS      = 16;
  parameter int unsigned LLC_LATENCY   = 10;
  parameter int unsigned LLC_MAX_OUTST = 16;
  parameter int unsigned SET_BASE_W    = 10;      // base of a set-index range
  parameter int unsigned SET_SIZE_W    = 9;       // size-1 of a set-index range
  parameter int unsigned SIRT_ENTRY_W  = SET_BASE_W + SET_SIZE_W;  // 19
  parameter int unsigned SIRT_W        = NREGIONS * SIRT_ENTRY_W;  // 1216 bits

  // --------------------------------------------------------------- memory
  parameter int unsigned MEM_LATENCY   = 120;
  parameter int unsigned MEM_MAX_OUTST = 24;

  // ---------------------------------------------------------- privilege
  typedef enum logic [1:0] {
    PRIV_U = 2'd0,
    PRIV_S = 2'd1,
    PRIV_M = 2'd3
  } priv_e;

  // ---------------------------------------------------- MSPEC CSR layout
  // MSPEC = 0 is Safe mode, the reset value.
  parameter logic [11:0] CSR_MSPEC  = 12'h7C0;
  parameter int unsigned MSPEC_BURST   = 0;   // straight-line speculation, shared accesses pipelined
  parameter int unsigned MSPEC_NOSPEC  = 1;   // every instruction waits for the ROB head
  parameter int unsigned MSPEC_NOTRAIN = 2;   // predictors are not trained
  parameter int unsigned MSPEC_NOPRED  = 3;   // predictors are not used (pc+4 only)
  parameter logic [4:0] BURST_ON  = 5'b00001;
  parameter logic [4:0] BURST_OFF = 5'b00000;

  typedef struct packed {
    logic btb_en;          // BTB may redirect fetch
    logic ras_en;          // RAS may predict returns
    logic bht_en;          // BHT may predict branch directions
    logic train_en;        // predictors may be trained
    logic delay_shared;    // shared accesses wait for the ROB head (Safe mode)
    logic spec_disable;    // every access waits for the ROB head
  } spec_ctrl_t;

  // ------------------------------------------------ memory micro-operation
  typedef struct packed {
    logic                 is_store;
    logic [1:0]           size;      // log2 bytes
    logic [XLEN-1:0]      base;      // rs1 value
    logic [11:0]          imm;
    logic [XLEN-1:0]      sdata;     // rs2 value for stores
    logic [ROB_TAG_W-1:0] rob_tag;
  } mem_uop_t;

  // ------------------------------------------------- line-level memory bus
  typedef struct packed {
    logic [CORE_W-1:0]     core;
    logic                  src;      // 0: L1 refill/write-back, 1: L1-bypass access
    logic                  write;
    logic [LADDR_W-1:0]    laddr;
    logic [LINE_BYTES-1:0] be;       // byte enables for writes
    logic [LINE_W-1:0]     data;
  } llc_req_t;

  typedef struct packed {
    logic [CORE_W-1:0]  core;
    logic               src;
    logic               write;
    logic [LINE_W-1:0]  data;
  } llc_resp_t;

  typedef struct packed {
    logic               write;
    logic [LADDR_W-1:0] laddr;
    logic [LINE_W-1:0]  data;
  } mem_req_t;

  typedef struct packed {
    logic [LINE_W-1:0] data;
  } mem_resp_t;

endpackage

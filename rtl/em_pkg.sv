// em_pkg: constants shared by the EM-aware resource-allocation blocks.
//
// The numbers below are the configuration of the evaluated core: three
// single-cycle ALUs, 32 integer and 32 vector/FP architectural registers,
// the cache and TLB geometries of the baseline core, and the 10-million
// event rotation interval used in the evaluation. The 48-bit address, the
// 64-bit integer and 512-bit vector register widths and the two-read-port
// register files are choices of this implementation (x86-64 conventions),
// not numbers the design description fixes.
package em_pkg;

  // ALU allocation
  localparam int unsigned N_ALU        = 3;   // three ALUs, 1-cycle latency
  localparam int unsigned ALU_CNT_W    = 32;  // option-1 free-running counter

  // Register files
  localparam int unsigned N_GPR        = 32;  // GPRs in the rotated integer RF
  localparam int unsigned N_INT_EXTRA  = 2;   // flags and stack pointer join the rotation
  localparam int unsigned GPR_W        = 64;
  localparam int unsigned N_FPR        = 32;  // ZMM0..ZMM31
  localparam int unsigned FPR_W        = 512;
  localparam int unsigned RF_RD_PORTS  = 2;

  // Rotation interval: every 10M clock cycles (RF) or 10M accesses (caches, TLB)
  localparam int unsigned ROT_PERIOD   = 10_000_000;

  // Addresses and lines
  localparam int unsigned PADDR_W      = 48;
  localparam int unsigned VADDR_W      = 48;
  localparam int unsigned LINE_BYTES   = 64;
  localparam int unsigned LINE_W       = LINE_BYTES * 8;
  localparam int unsigned LINE_OFF_W   = 6;
  localparam int unsigned PAGE_OFF_W   = 12;  // 4 KiB pages
  localparam int unsigned PPN_W        = PADDR_W - PAGE_OFF_W;

  // Cache geometries: sets = size / (64 B * ways)
  localparam int unsigned L1D_SETS = 64,   L1D_WAYS = 8;   // 32 KiB, 8-way, 6 index bits
  localparam int unsigned L1I_SETS = 128,  L1I_WAYS = 4;   // 32 KiB, 4-way, 7 index bits
  localparam int unsigned L2_SETS  = 512,  L2_WAYS  = 8;   // 256 KiB, 8-way, 9 index bits
  localparam int unsigned L3_SETS  = 8192, L3_WAYS  = 16;  // 8 MiB, 16-way, 13 index bits
  localparam int unsigned DTLB_SETS = 16,  DTLB_WAYS = 4;  // 64 entries, 4-way

  // Allocation-policy selector of the top
  typedef enum logic [1:0] {
    ALLOC_COUNTER = 2'd1,  // option 1: leading ALU = counter mod N
    ALLOC_EM_BITS = 2'd2   // option 2: Algorithm 1, one bit per ALU plus a global bit
  } alu_alloc_e;

  // Port bundles of the top (widths fixed by the constants above)
  typedef struct packed {
    logic                  valid;
    logic [PADDR_W-1:0]    addr;
    logic                  write;
    logic [LINE_W-1:0]     wdata;
    logic [LINE_BYTES-1:0] be;
  } line_req_t;

  typedef struct packed {
    logic              valid;
    logic [PADDR_W-1:0] addr;
    logic [LINE_W-1:0] data;
  } line_fill_t;

  typedef struct packed {
    logic              hit;
    logic [LINE_W-1:0] data;
  } line_resp_t;

  typedef struct packed {
    logic               valid;
    logic [VADDR_W-1:0] vaddr;
  } tlb_req_t;

  typedef struct packed {
    logic               valid;
    logic [VADDR_W-1:0] vaddr;
    logic [PPN_W-1:0]   ppn;
  } tlb_fill_t;

  typedef struct packed {
    logic             hit;
    logic [PPN_W-1:0] ppn;
  } tlb_resp_t;

  // one rotate pulse per rotated structure, reported by the top
  typedef struct packed {
    logic rf;    // integer and FP register files
    logic dtlb;
    logic l1d;
    logic l1i;
    logic l2;
    logic l3;
  } rot_pulse_t;

endpackage

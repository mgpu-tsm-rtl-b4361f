// tsm_pkg: types and sizes shared by every block of the truly-shared-memory
// multi-GPU system.
//
// The system has 4 GPUs, each with 32 compute units (CUs), 8 L2 cache banks
// and L1 vector/scalar/instruction caches, and 4 HBM stacks of 16 banks of
// 512 MB each (32 GB of main memory in total). Every L2 bank of every GPU
// reaches every DRAM bank through one central switch, so all GPUs see one
// physical memory with uniform access cost.
//
// Counts, capacities and associativities are the published configuration.
// The 64-byte cache line, the 32-bit CU word, the packet layout and the
// command encoding are this design's own choices.
package tsm_pkg;

  // ---- system organisation (published numbers) ----
  localparam int unsigned N_GPU          = 4;   // GPUs in the system
  localparam int unsigned N_CU           = 32;  // CUs (and L1 vector caches) per GPU
  localparam int unsigned N_L1S          = 8;   // L1 scalar caches per GPU
  localparam int unsigned N_L1I          = 8;   // L1 instruction caches per GPU
  localparam int unsigned N_L2           = 8;   // L2 banks per GPU
  localparam int unsigned N_STACK        = 4;   // HBM stacks
  localparam int unsigned N_BANK_PER_STK = 16;  // DRAM banks per stack (512 MB each)
  localparam int unsigned N_DRAM         = N_STACK * N_BANK_PER_STK; // 64 DRAM banks
  localparam int unsigned PAGE_BITS      = 12;  // 4 KB pages
  localparam int unsigned PADDR_W        = 35;  // 32 GB physical address space
  localparam int unsigned BANK_ADDR_W    = 29;  // 512 MB per DRAM bank

  // ---- this design's choices ----
  localparam int unsigned LINE_BYTES     = 64;  // cache line
  localparam int unsigned LINE_BITS      = LINE_BYTES * 8;
  localparam int unsigned OFFS_BITS      = $clog2(LINE_BYTES);
  localparam int unsigned WORD_BITS      = 32;  // CU access size
  localparam int unsigned ID_W           = 8;   // source / destination port id
  localparam int unsigned SW_LINK_BYTES  = 16;  // switch link: 32 GB/s both ways = 16 B/cycle each way at 1 GHz

  typedef logic [PADDR_W-1:0] paddr_t;
  typedef logic [ID_W-1:0]    port_id_t;

  // Commands carried by the memory network. Every request receives exactly
  // one response: RD -> RD_RESP (with the line), WR -> WR_ACK.
  typedef enum logic [1:0] {
    CMD_RD      = 2'd0,
    CMD_WR      = 2'd1,
    CMD_RD_RESP = 2'd2,
    CMD_WR_ACK  = 2'd3
  } cmd_e;

  // One packet on a crossbar or the central switch. addr is a byte address
  // whose low OFFS_BITS are zero for line requests. mask marks the bytes of
  // data that a write changes.
  typedef struct packed {
    cmd_e                  cmd;
    port_id_t              src;
    port_id_t              dst;
    paddr_t                addr;
    logic [LINE_BYTES-1:0] mask;
    logic [LINE_BITS-1:0]  data;
  } mem_pkt_t;

  // Word request from a CU (or the CU's front end) to its L1 cache.
  typedef struct packed {
    logic                   we;
    paddr_t                 addr;   // byte address, word aligned
    logic [WORD_BITS-1:0]   wdata;
    logic [WORD_BITS/8-1:0] be;
  } cu_req_t;

  typedef struct packed {
    logic                 we;      // 1: acknowledgement of a write
    logic [WORD_BITS-1:0] rdata;
  } cu_resp_t;

  // Number of link cycles a packet occupies on a link of link_bytes per
  // cycle: a header-only packet takes one cycle, a packet that carries a
  // line takes LINE_BYTES / link_bytes cycles.
  function automatic int unsigned pkt_cycles(cmd_e cmd, int unsigned link_bytes);
    if (link_bytes == 0 || link_bytes >= LINE_BYTES) return 1;
    if (cmd == CMD_WR || cmd == CMD_RD_RESP) return LINE_BYTES / link_bytes;
    return 1;
  endfunction

endpackage

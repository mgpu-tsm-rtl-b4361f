// addr_map: physical-address decoder of the shared main memory.
//
// Pages (4 KB by default) are spread round-robin over the DRAM banks of all
// HBM stacks: page p lives in global DRAM bank p mod N_DRAM, and consecutive
// pages sit in neighbouring banks. The L2 bank that serves an address inside
// each GPU is chosen the same way, p mod N_L2, so with the default sizes
// (64 DRAM banks, 8 L2 banks) L2 bank b of every GPU serves the 8 DRAM banks
// b, b+8, ... b+56, i.e. 4 GB of the 32 GB memory.
//
// Purely combinational. Outputs: the L2 bank, the global DRAM bank, its
// hbm_stack and bank-in-hbm_stack numbers, and the byte address inside the bank.
// Round-robin page interleaving across all memory modules is the paper's;
// interleaving the L2 banks by page as well is this design's choice.
module addr_map
  import tsm_pkg::*;
#(
  parameter int unsigned N_L2B      = N_L2,
  parameter int unsigned N_DRAMB    = N_DRAM,
  parameter int unsigned BANKS_STK  = N_BANK_PER_STK,
  parameter int unsigned PG_BITS    = PAGE_BITS
) (
  input  paddr_t                   addr,
  output logic [ID_W-1:0]          l2_bank,
  output logic [ID_W-1:0]          dram_bank,
  output logic [ID_W-1:0]          hbm_stack,
  output logic [ID_W-1:0]          bank_in_stack,
  output logic [BANK_ADDR_W-1:0]   bank_addr
);
  localparam int unsigned PAGE_W = PADDR_W - PG_BITS;
  logic [PAGE_W-1:0] page;
  logic [PAGE_W-1:0] bank_page;

  always_comb begin
    page          = addr[PADDR_W-1:PG_BITS];
    l2_bank       = ID_W'(page % N_L2B);
    dram_bank     = ID_W'(page % N_DRAMB);
    hbm_stack         = ID_W'((page % N_DRAMB) / BANKS_STK);
    bank_in_stack = ID_W'((page % N_DRAMB) % BANKS_STK);
    bank_page     = PAGE_W'(page / N_DRAMB);
    bank_addr     = BANK_ADDR_W'({bank_page, addr[PG_BITS-1:0]});
  end
endmodule

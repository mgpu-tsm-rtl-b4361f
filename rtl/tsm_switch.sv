// tsm_switch: the central switch between all L2 banks and all DRAM banks.
//
// Every L2 bank of every GPU (N_L2P = 4 GPUs x 8 banks = 32 ports) and every
// DRAM bank (N_MEM = 4 stacks x 16 banks = 64 ports) has its own link to this
// switch, so any L2 bank reaches any DRAM bank in two hops (L2 -> switch ->
// DRAM) with the same cost for every GPU. There are no local or remote
// memories.
//
// Request path: a packet from L2 port i gets src = i and dst = the DRAM bank
// that owns its page (round-robin page interleaving, see addr_map), then
// crosses a request crossbar. Response path: the DRAM side answers with
// dst = the request's src, and a response crossbar carries it back. Each
// output of both crossbars models a link of LINK_B bytes per cycle: the
// 32 GB/s bidirectional link of the paper is taken as 16 GB/s each way,
// i.e. 16 bytes per 1 GHz cycle, so a packet that carries a 64-byte line
// occupies an output for 4 cycles and a header-only packet for 1.
// Contention for one output is resolved round-robin; the losers stall.
//
// Port counts, the per-link bandwidth and the two-hop topology are the
// paper's. Link clock, the split of bandwidth between directions, the
// arbitration and the one-cycle crossbar latency are this design's choices.
module tsm_switch
  import tsm_pkg::*;
#(
  parameter int unsigned N_L2P  = N_GPU * N_L2,
  parameter int unsigned N_MEM  = N_DRAM,
  parameter int unsigned LINK_B = SW_LINK_BYTES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // L2 side
  input  logic     [N_L2P-1:0] l2_req_valid,
  input  mem_pkt_t             l2_req [N_L2P],
  output logic     [N_L2P-1:0] l2_req_ready,
  output logic     [N_L2P-1:0] l2_resp_valid,
  output mem_pkt_t             l2_resp [N_L2P],
  input  logic     [N_L2P-1:0] l2_resp_ready,
  // DRAM side
  output logic     [N_MEM-1:0] mem_req_valid,
  output mem_pkt_t             mem_req [N_MEM],
  input  logic     [N_MEM-1:0] mem_req_ready,
  input  logic     [N_MEM-1:0] mem_resp_valid,
  input  mem_pkt_t             mem_resp [N_MEM],
  output logic     [N_MEM-1:0] mem_resp_ready
);
  mem_pkt_t req_routed [N_L2P];

  for (genvar i = 0; i < N_L2P; i++) begin : g_in
    logic [ID_W-1:0]        dram_bank;
    logic [ID_W-1:0]        unused_l2b, unused_stk, unused_bis;
    logic [BANK_ADDR_W-1:0] unused_baddr;
    addr_map #(.N_DRAMB(N_MEM)) u_map (
      .addr         (l2_req[i].addr),
      .l2_bank      (unused_l2b),
      .dram_bank    (dram_bank),
      .hbm_stack    (unused_stk),
      .bank_in_stack(unused_bis),
      .bank_addr    (unused_baddr)
    );
    always_comb begin
      req_routed[i]     = l2_req[i];
      req_routed[i].src = ID_W'(i);
      req_routed[i].dst = dram_bank;
    end
  end

  xbar #(.N_IN(N_L2P), .N_OUT(N_MEM), .LINK_BYTES(LINK_B)) u_req_xbar (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (l2_req_valid),
    .in_pkt   (req_routed),
    .in_ready (l2_req_ready),
    .out_valid(mem_req_valid),
    .out_pkt  (mem_req),
    .out_ready(mem_req_ready)
  );

  xbar #(.N_IN(N_MEM), .N_OUT(N_L2P), .LINK_BYTES(LINK_B)) u_resp_xbar (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (mem_resp_valid),
    .in_pkt   (mem_resp),
    .in_ready (mem_resp_ready),
    .out_valid(l2_resp_valid),
    .out_pkt  (l2_resp),
    .out_ready(l2_resp_ready)
  );
endmodule

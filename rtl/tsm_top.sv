// tsm_top: multi-GPU system with truly shared memory.
//
// N_GPU GPUs (gpu_node: L1 caches, L1-to-L2 crossbar, L2 banks) share one
// physical main memory of N_DRAM DRAM banks. Every L2 bank of every GPU is
// linked to the central switch (tsm_switch), and so is every DRAM bank, so a
// memory access from any GPU takes the same two hops to any bank. Pages are
// interleaved round-robin over all DRAM banks.
//
// The compute units and the HBM DRAM banks are not part of this RTL. The
// CUs' memory ports are the cu_*/sc_*/ic_* ports, indexed [gpu][port]. Each
// DRAM bank is reached through a mem_* port pair: a bank takes CMD_RD /
// CMD_WR packets and must answer each with one CMD_RD_RESP (carrying the
// line) or CMD_WR_ACK whose dst is the request's src. Switch port of L2 bank
// b of GPU g is g*N_L2 + b.
//
// Default sizes are the paper's main configuration: 4 GPUs, 32 CUs per GPU,
// 8 L2 banks per GPU, 4 HBM stacks x 16 banks = 64 DRAM banks of 512 MB.
module tsm_top
  import tsm_pkg::*;
#(
  parameter int unsigned NGPU    = N_GPU,
  parameter int unsigned NCU     = N_CU,
  parameter int unsigned NSC     = N_L1S,
  parameter int unsigned NIC     = N_L1I,
  parameter int unsigned NL2     = N_L2,
  parameter int unsigned NMEM    = N_DRAM,
  parameter int unsigned L1V_SZ  = 16 * 1024,
  parameter int unsigned L1S_SZ  = 16 * 1024,
  parameter int unsigned L1I_SZ  = 32 * 1024,
  parameter int unsigned L2_SZ   = 256 * 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // compute-unit ports
  input  logic     [NGPU-1:0][NCU-1:0]   cu_req_valid,
  input  cu_req_t                       cu_req [NGPU][NCU],
  output logic     [NGPU-1:0][NCU-1:0]   cu_req_ready,
  output logic     [NGPU-1:0][NCU-1:0]   cu_resp_valid,
  output cu_resp_t               cu_resp [NGPU][NCU],
  input  logic     [NGPU-1:0][NSC-1:0]   sc_req_valid,
  input  cu_req_t                       sc_req [NGPU][NSC],
  output logic     [NGPU-1:0][NSC-1:0]   sc_req_ready,
  output logic     [NGPU-1:0][NSC-1:0]   sc_resp_valid,
  output cu_resp_t               sc_resp [NGPU][NSC],
  input  logic     [NGPU-1:0][NIC-1:0]   ic_req_valid,
  input  cu_req_t                       ic_req [NGPU][NIC],
  output logic     [NGPU-1:0][NIC-1:0]   ic_req_ready,
  output logic     [NGPU-1:0][NIC-1:0]   ic_resp_valid,
  output cu_resp_t               ic_resp [NGPU][NIC],
  // DRAM bank ports
  output logic     [NMEM-1:0]            mem_req_valid,
  output mem_pkt_t                        mem_req [NMEM],
  input  logic     [NMEM-1:0]            mem_req_ready,
  input  logic     [NMEM-1:0]            mem_resp_valid,
  input  mem_pkt_t                        mem_resp [NMEM],
  output logic     [NMEM-1:0]            mem_resp_ready
);
  localparam int unsigned NL2P = NGPU * NL2;

  logic     [NL2P-1:0] l2_req_valid, l2_req_ready, l2_resp_valid, l2_resp_ready;
  mem_pkt_t            l2_req [NL2P], l2_resp [NL2P];

  for (genvar g = 0; g < NGPU; g++) begin : g_gpu
    mem_pkt_t gq [NL2], gr [NL2];
    for (genvar b = 0; b < NL2; b++) begin : g_port
      assign l2_req[g*NL2 + b] = gq[b];
      assign gr[b]             = l2_resp[g*NL2 + b];
    end
    gpu_node #(
      .NCU(NCU), .NSC(NSC), .NIC(NIC), .NL2(NL2),
      .L1V_SZ(L1V_SZ), .L1S_SZ(L1S_SZ), .L1I_SZ(L1I_SZ), .L2_SZ(L2_SZ)
    ) u_gpu (
      .clk          (clk),
      .rst_n        (rst_n),
      .cu_req_valid (cu_req_valid[g]),
      .cu_req       (cu_req[g]),
      .cu_req_ready (cu_req_ready[g]),
      .cu_resp_valid(cu_resp_valid[g]),
      .cu_resp      (cu_resp[g]),
      .sc_req_valid (sc_req_valid[g]),
      .sc_req       (sc_req[g]),
      .sc_req_ready (sc_req_ready[g]),
      .sc_resp_valid(sc_resp_valid[g]),
      .sc_resp      (sc_resp[g]),
      .ic_req_valid (ic_req_valid[g]),
      .ic_req       (ic_req[g]),
      .ic_req_ready (ic_req_ready[g]),
      .ic_resp_valid(ic_resp_valid[g]),
      .ic_resp      (ic_resp[g]),
      .l2_req_valid (l2_req_valid[g*NL2 +: NL2]),
      .l2_req       (gq),
      .l2_req_ready (l2_req_ready[g*NL2 +: NL2]),
      .l2_resp_valid(l2_resp_valid[g*NL2 +: NL2]),
      .l2_resp      (gr),
      .l2_resp_ready(l2_resp_ready[g*NL2 +: NL2])
    );
  end

  tsm_switch #(.N_L2P(NL2P), .N_MEM(NMEM)) u_switch (
    .clk           (clk),
    .rst_n         (rst_n),
    .l2_req_valid  (l2_req_valid),
    .l2_req        (l2_req),
    .l2_req_ready  (l2_req_ready),
    .l2_resp_valid (l2_resp_valid),
    .l2_resp       (l2_resp),
    .l2_resp_ready (l2_resp_ready),
    .mem_req_valid (mem_req_valid),
    .mem_req       (mem_req),
    .mem_req_ready (mem_req_ready),
    .mem_resp_valid(mem_resp_valid),
    .mem_resp      (mem_resp),
    .mem_resp_ready(mem_resp_ready)
  );
endmodule

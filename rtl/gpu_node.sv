// gpu_node: the memory hierarchy of one GPU of the shared-memory system.
//
// Holds N_CU L1 vector caches (one per compute unit), N_L1S L1 scalar caches,
// N_L1I L1 instruction caches, the crossbar that connects all of them to the
// N_L2 L2 banks, and the L2 banks themselves. The compute units are outside:
// their word requests enter through the cu_*, sc_* and ic_* ports. Each L2
// bank has its own link port (l2_*) to the central switch.
//
// An L1 miss or write becomes a line packet. The packet's src is the L1's
// index (vector caches first, then scalar, then instruction caches) and its
// dst is the L2 bank that owns the page (page mod N_L2, see addr_map). The
// request crossbar carries it to that bank; the bank answers with
// dst = src, and the response crossbar carries the answer back.
//
// Counts and cache geometries are the paper's (32 CUs with 16 KB 4-way
// vector caches, 8 scalar caches of 16 KB 4-way, 8 instruction caches of
// 32 KB 4-way, 8 L2 banks of 256 KB 16-way). The single-stage crossbar
// with one packet per port per cycle is this design's choice.
module gpu_node
  import tsm_pkg::*;
#(
  parameter int unsigned NCU     = N_CU,
  parameter int unsigned NSC     = N_L1S,
  parameter int unsigned NIC     = N_L1I,
  parameter int unsigned NL2     = N_L2,
  parameter int unsigned L1V_SZ  = 16 * 1024,
  parameter int unsigned L1V_WAY = 4,
  parameter int unsigned L1S_SZ  = 16 * 1024,
  parameter int unsigned L1S_WAY = 4,
  parameter int unsigned L1I_SZ  = 32 * 1024,
  parameter int unsigned L1I_WAY = 4,
  parameter int unsigned L2_SZ   = 256 * 1024,
  parameter int unsigned L2_WAY  = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // vector memory ports of the compute units
  input  logic     [NCU-1:0]   cu_req_valid,
  input  cu_req_t                cu_req [NCU],
  output logic     [NCU-1:0]   cu_req_ready,
  output logic     [NCU-1:0]   cu_resp_valid,
  output cu_resp_t               cu_resp [NCU],
  // scalar data ports
  input  logic     [NSC-1:0]   sc_req_valid,
  input  cu_req_t                sc_req [NSC],
  output logic     [NSC-1:0]   sc_req_ready,
  output logic     [NSC-1:0]   sc_resp_valid,
  output cu_resp_t               sc_resp [NSC],
  // instruction fetch ports (reads only)
  input  logic     [NIC-1:0]   ic_req_valid,
  input  cu_req_t                ic_req [NIC],
  output logic     [NIC-1:0]   ic_req_ready,
  output logic     [NIC-1:0]   ic_resp_valid,
  output cu_resp_t               ic_resp [NIC],
  // L2 bank links to the central switch
  output logic     [NL2-1:0]   l2_req_valid,
  output mem_pkt_t               l2_req [NL2],
  input  logic     [NL2-1:0]   l2_req_ready,
  input  logic     [NL2-1:0]   l2_resp_valid,
  input  mem_pkt_t               l2_resp [NL2],
  output logic     [NL2-1:0]   l2_resp_ready
);
  localparam int unsigned NL1 = NCU + NSC + NIC;

  // flattened CU-side view of all L1 caches
  logic     [NL1-1:0] f_req_valid, f_req_ready, f_resp_valid;
  cu_req_t            f_req  [NL1];
  cu_resp_t           f_resp [NL1];

  assign f_req_valid = {ic_req_valid, sc_req_valid, cu_req_valid};
  assign {ic_req_ready,  sc_req_ready,  cu_req_ready}  = f_req_ready;
  assign {ic_resp_valid, sc_resp_valid, cu_resp_valid} = f_resp_valid;
  for (genvar i = 0; i < NCU; i++) begin : g_cu_map
    assign f_req[i]  = cu_req[i];
    assign cu_resp[i] = f_resp[i];
  end
  for (genvar i = 0; i < NSC; i++) begin : g_sc_map
    assign f_req[NCU + i] = sc_req[i];
    assign sc_resp[i]     = f_resp[NCU + i];
  end
  for (genvar i = 0; i < NIC; i++) begin : g_ic_map
    assign f_req[NCU + NSC + i] = ic_req[i];
    assign ic_resp[i]           = f_resp[NCU + NSC + i];
  end

  // L1 <-> crossbar
  logic     [NL1-1:0] l1_req_valid, l1_req_ready, l1_resp_valid, l1_resp_ready;
  mem_pkt_t           l1_req_raw [NL1], l1_req [NL1], l1_resp [NL1];
  // crossbar <-> L2
  logic     [NL2-1:0] b_req_valid, b_req_ready, b_resp_valid, b_resp_ready;
  mem_pkt_t           b_req [NL2], b_resp [NL2];

  for (genvar i = 0; i < NL1; i++) begin : g_l1
    localparam int unsigned SZ  = (i < NCU) ? L1V_SZ  : (i < NCU + NSC) ? L1S_SZ  : L1I_SZ;
    localparam int unsigned WY  = (i < NCU) ? L1V_WAY : (i < NCU + NSC) ? L1S_WAY : L1I_WAY;
    localparam bit          RO  = (i >= NCU + NSC);
    logic [ID_W-1:0]        l2b;
    logic [ID_W-1:0]        unused_db, unused_stk, unused_bis;
    logic [BANK_ADDR_W-1:0] unused_baddr;

    l1_cache #(.SIZE_BYTES(SZ), .WAYS(WY), .READ_ONLY(RO)) u_l1 (
      .clk           (clk),
      .rst_n         (rst_n),
      .cu_req_valid  (f_req_valid[i]),
      .cu_req        (f_req[i]),
      .cu_req_ready  (f_req_ready[i]),
      .cu_resp_valid (f_resp_valid[i]),
      .cu_resp       (f_resp[i]),
      .mem_req_valid (l1_req_valid[i]),
      .mem_req       (l1_req_raw[i]),
      .mem_req_ready (l1_req_ready[i]),
      .mem_resp_valid(l1_resp_valid[i]),
      .mem_resp      (l1_resp[i]),
      .mem_resp_ready(l1_resp_ready[i])
    );

    addr_map #(.N_L2B(NL2)) u_map (
      .addr         (l1_req_raw[i].addr),
      .l2_bank      (l2b),
      .dram_bank    (unused_db),
      .hbm_stack    (unused_stk),
      .bank_in_stack(unused_bis),
      .bank_addr    (unused_baddr)
    );

    always_comb begin
      l1_req[i]     = l1_req_raw[i];
      l1_req[i].src = ID_W'(i);
      l1_req[i].dst = l2b;
    end
  end

  xbar #(.N_IN(NL1), .N_OUT(NL2), .LINK_BYTES(0)) u_req_xbar (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (l1_req_valid),
    .in_pkt   (l1_req),
    .in_ready (l1_req_ready),
    .out_valid(b_req_valid),
    .out_pkt  (b_req),
    .out_ready(b_req_ready)
  );

  xbar #(.N_IN(NL2), .N_OUT(NL1), .LINK_BYTES(0)) u_resp_xbar (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (b_resp_valid),
    .in_pkt   (b_resp),
    .in_ready (b_resp_ready),
    .out_valid(l1_resp_valid),
    .out_pkt  (l1_resp),
    .out_ready(l1_resp_ready)
  );

  for (genvar b = 0; b < NL2; b++) begin : g_l2
    l2_cache #(.SIZE_BYTES(L2_SZ), .WAYS(L2_WAY), .N_BANKS(NL2)) u_l2 (
      .clk          (clk),
      .rst_n        (rst_n),
      .up_req_valid (b_req_valid[b]),
      .up_req       (b_req[b]),
      .up_req_ready (b_req_ready[b]),
      .up_resp_valid(b_resp_valid[b]),
      .up_resp      (b_resp[b]),
      .up_resp_ready(b_resp_ready[b]),
      .dn_req_valid (l2_req_valid[b]),
      .dn_req       (l2_req[b]),
      .dn_req_ready (l2_req_ready[b]),
      .dn_resp_valid(l2_resp_valid[b]),
      .dn_resp      (l2_resp[b]),
      .dn_resp_ready(l2_resp_ready[b])
    );
  end
endmodule

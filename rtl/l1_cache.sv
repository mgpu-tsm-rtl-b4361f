// l1_cache: blocking, write-through, set-associative L1 cache of one CU.
//
// The same module serves as L1 vector cache (16 KB, 4-way, default), L1
// scalar cache (16 KB, 4-way) and L1 instruction cache (32 KB, 4-way,
// READ_ONLY=1). The CU side carries 32-bit word requests; the memory side
// sends line requests (mem_pkt_t) towards the L2 banks through the GPU
// crossbar and receives one response per request.
//
// Operation: a request is taken in IDLE and looked up the next cycle.
//  - read hit : the word is returned one cycle after the lookup.
//  - read miss: the line is fetched (CMD_RD), written into the victim way of
//               the set (per-set round-robin) and the word returned.
//  - write    : write-through and no write-allocate. A hit line is updated in
//               place; in every case the bytes go to L2 as CMD_WR with a byte
//               mask, and the CU gets its acknowledgement after CMD_WR_ACK.
// Only one request is in flight. cu_resp_valid is a one-cycle pulse that
// the CU must accept. src and dst of outgoing packets are left at zero and
// are filled in by the GPU that routes them.
//
// Sizes, associativity and write-through are the paper's; the line size,
// word width, replacement policy, blocking operation and no-write-allocate
// are this design's choices.
module l1_cache
  import tsm_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 16 * 1024,
  parameter int unsigned WAYS       = 4,
  parameter bit          READ_ONLY  = 1'b0
) (
  input  logic     clk,
  input  logic     rst_n,
  // CU side
  input  logic     cu_req_valid,
  input  cu_req_t  cu_req,
  output logic     cu_req_ready,
  output logic     cu_resp_valid,
  output cu_resp_t cu_resp,
  // memory side (towards L2)
  output logic     mem_req_valid,
  output mem_pkt_t mem_req,
  input  logic     mem_req_ready,
  input  logic     mem_resp_valid,
  input  mem_pkt_t mem_resp,
  output logic     mem_resp_ready
);
  localparam int unsigned SETS   = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned IDX_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned TAG_W  = PADDR_W - OFFS_BITS - IDX_W;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned WPL    = LINE_BITS / WORD_BITS;   // words per line
  localparam int unsigned WSEL_W = $clog2(WPL);

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_MEM_REQ, S_MEM_WAIT, S_RESP} state_e;
  state_e state_q;

  logic [TAG_W-1:0]     tag_q   [SETS][WAYS];
  logic [LINE_BITS-1:0] data_q  [SETS][WAYS];
  logic [WAYS-1:0]      valid_q [SETS];
  logic [WAY_W-1:0]     vict_q  [SETS];

  cu_req_t              req_q;
  logic [WORD_BITS-1:0] rdata_q;

  logic [IDX_W-1:0]     idx;
  logic [TAG_W-1:0]     tag;
  logic [WSEL_W-1:0]    wsel;
  logic                 hit;
  logic [WAY_W-1:0]     hway;

  assign idx  = req_q.addr[OFFS_BITS +: IDX_W];
  assign tag  = req_q.addr[PADDR_W-1 -: TAG_W];
  assign wsel = req_q.addr[2 +: WSEL_W];

  always_comb begin
    hit  = 1'b0;
    hway = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (valid_q[idx][w] && tag_q[idx][w] == tag) begin
        hit  = 1'b1;
        hway = WAY_W'(w);
      end
  end

  // Byte-lane view of the word inside its line.
  logic [LINE_BYTES-1:0] line_mask;
  logic [LINE_BITS-1:0]  line_wdata;
  always_comb begin
    line_mask  = '0;
    line_wdata = '0;
    line_mask[int'(wsel) * (WORD_BITS/8) +: WORD_BITS/8] = req_q.be;
    line_wdata[int'(wsel) * WORD_BITS +: WORD_BITS]      = req_q.wdata;
  end

  function automatic logic [LINE_BITS-1:0] merge(logic [LINE_BITS-1:0] old,
                                                 logic [LINE_BITS-1:0] nw,
                                                 logic [LINE_BYTES-1:0] m);
    logic [LINE_BITS-1:0] r;
    r = old;
    for (int unsigned b = 0; b < LINE_BYTES; b++)
      if (m[b]) r[b*8 +: 8] = nw[b*8 +: 8];
    return r;
  endfunction

  assign cu_req_ready   = (state_q == S_IDLE);
  assign mem_resp_ready = (state_q == S_MEM_WAIT);
  assign mem_req_valid  = (state_q == S_MEM_REQ);
  assign cu_resp_valid  = (state_q == S_RESP);
  assign cu_resp.we     = req_q.we;
  assign cu_resp.rdata  = rdata_q;

  always_comb begin
    mem_req      = '0;
    mem_req.cmd  = req_q.we ? CMD_WR : CMD_RD;
    mem_req.addr = {req_q.addr[PADDR_W-1:OFFS_BITS], {OFFS_BITS{1'b0}}};
    if (req_q.we) begin
      mem_req.mask = line_mask;
      mem_req.data = line_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      req_q   <= '0;
      rdata_q <= '0;
      for (int unsigned s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        vict_q[s]  <= '0;
      end
    end else begin
      unique case (state_q)
        S_IDLE: if (cu_req_valid) begin
          req_q   <= cu_req;
          state_q <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (!req_q.we && hit) begin
            rdata_q <= data_q[idx][hway][int'(wsel) * WORD_BITS +: WORD_BITS];
            state_q <= S_RESP;
          end else begin
            if (req_q.we && hit)
              data_q[idx][hway] <= merge(data_q[idx][hway], line_wdata, line_mask);
            state_q <= S_MEM_REQ;
          end
        end
        S_MEM_REQ: if (mem_req_ready) state_q <= S_MEM_WAIT;
        S_MEM_WAIT: if (mem_resp_valid) begin
          if (!req_q.we) begin
            data_q[idx][vict_q[idx]]  <= mem_resp.data;
            tag_q[idx][vict_q[idx]]   <= tag;
            valid_q[idx][vict_q[idx]] <= 1'b1;
            vict_q[idx] <= (int'(vict_q[idx]) == WAYS - 1) ? '0 : vict_q[idx] + 1'b1;
            rdata_q <= mem_resp.data[int'(wsel) * WORD_BITS +: WORD_BITS];
          end
          state_q <= S_RESP;
        end
        S_RESP: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  if (READ_ONLY) begin : g_ro_chk
    a_no_write: assert property (@(posedge clk) disable iff (!rst_n)
      (cu_req_valid && cu_req_ready) |-> !cu_req.we);
  end
  a_resp_match: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_resp_valid && mem_resp_ready) |->
      (mem_resp.cmd == (req_q.we ? CMD_WR_ACK : CMD_RD_RESP)));
endmodule

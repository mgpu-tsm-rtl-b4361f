// l2_cache: one L2 cache bank of a GPU (256 KB, 16-way by default).
//
// Each GPU has N_BANKS of these. A bank receives line requests from the
// GPU's L1 caches through the L1-to-L2 crossbar and sends its misses and
// writes over its own link to the central switch, which reaches every DRAM
// bank of the shared memory. Pages are interleaved over the banks, so the
// bank-select bits (page mod N_BANKS) are removed before the set index is
// taken; otherwise most sets of a bank would never be used.
//
// Operation (blocking, one request at a time):
//  - CMD_RD hit : CMD_RD_RESP with the line, sent back to the requester
//                 (dst = request src) two cycles after the request is taken.
//  - CMD_RD miss: CMD_RD to memory, fill the per-set round-robin victim way,
//                 then answer.
//  - CMD_WR     : write-through, no write-allocate. A hit line is merged with
//                 the masked bytes; the write goes on to memory and the L1
//                 gets CMD_WR_ACK when memory has acknowledged it.
// Write-through keeps the one shared main memory up to date for the other
// GPUs; keeping their caches coherent is outside this design (the paper
// leaves the coherence protocol to future work).
//
// Capacity, associativity and bank count are the paper's. Line size, write
// policy, replacement and blocking operation are this design's choices.
module l2_cache
  import tsm_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 256 * 1024,
  parameter int unsigned WAYS       = 16,
  parameter int unsigned N_BANKS    = N_L2,
  parameter int unsigned PG_BITS    = PAGE_BITS
) (
  input  logic     clk,
  input  logic     rst_n,
  // L1 side (from the GPU crossbar)
  input  logic     up_req_valid,
  input  mem_pkt_t up_req,
  output logic     up_req_ready,
  output logic     up_resp_valid,
  output mem_pkt_t up_resp,
  input  logic     up_resp_ready,
  // memory side (link to the central switch)
  output logic     dn_req_valid,
  output mem_pkt_t dn_req,
  input  logic     dn_req_ready,
  input  logic     dn_resp_valid,
  input  mem_pkt_t dn_resp,
  output logic     dn_resp_ready
);
  localparam int unsigned SETS    = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned IDX_W   = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned LPP_W   = PG_BITS - OFFS_BITS;             // line-in-page bits
  localparam int unsigned LLINE_W = PADDR_W - OFFS_BITS;             // bank-local line number width
  localparam int unsigned TAG_W   = LLINE_W - IDX_W;
  localparam int unsigned WAY_W   = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned PAGE_W  = PADDR_W - PG_BITS;

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_MEM_REQ, S_MEM_WAIT, S_RESP} state_e;
  state_e state_q;

  logic [TAG_W-1:0]     tag_q   [SETS][WAYS];
  logic [LINE_BITS-1:0] data_q  [SETS][WAYS];
  logic [WAYS-1:0]      valid_q [SETS];
  logic [WAY_W-1:0]     vict_q  [SETS];

  mem_pkt_t             req_q;
  logic [LINE_BITS-1:0] line_q;     // line returned by a read

  logic [PAGE_W-1:0]    page, bpage;
  logic [LLINE_W-1:0]   lline;
  logic [IDX_W-1:0]     idx;
  logic [TAG_W-1:0]     tag;
  logic                 hit;
  logic [WAY_W-1:0]     hway;

  always_comb begin
    page  = req_q.addr[PADDR_W-1:PG_BITS];
    bpage = PAGE_W'(page / N_BANKS);
    lline = LLINE_W'({bpage, req_q.addr[PG_BITS-1:OFFS_BITS]});
    idx   = lline[IDX_W-1:0];
    tag   = lline[LLINE_W-1:IDX_W];
    hit   = 1'b0;
    hway  = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (valid_q[idx][w] && tag_q[idx][w] == tag) begin
        hit  = 1'b1;
        hway = WAY_W'(w);
      end
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

  assign up_req_ready  = (state_q == S_IDLE);
  assign dn_req_valid  = (state_q == S_MEM_REQ);
  assign dn_resp_ready = (state_q == S_MEM_WAIT);
  assign up_resp_valid = (state_q == S_RESP);

  always_comb begin
    dn_req     = req_q;          // RD or WR, same address, mask and data
    dn_req.src = '0;             // stamped by the switch
    dn_req.dst = '0;             // chosen by the switch from the address
    up_resp      = '0;
    up_resp.cmd  = (req_q.cmd == CMD_WR) ? CMD_WR_ACK : CMD_RD_RESP;
    up_resp.dst  = req_q.src;
    up_resp.addr = req_q.addr;
    up_resp.data = (req_q.cmd == CMD_WR) ? '0 : line_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      req_q   <= '0;
      line_q  <= '0;
      for (int unsigned s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        vict_q[s]  <= '0;
      end
    end else begin
      unique case (state_q)
        S_IDLE: if (up_req_valid) begin
          req_q   <= up_req;
          state_q <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (req_q.cmd == CMD_RD && hit) begin
            line_q  <= data_q[idx][hway];
            state_q <= S_RESP;
          end else begin
            if (req_q.cmd == CMD_WR && hit)
              data_q[idx][hway] <= merge(data_q[idx][hway], req_q.data, req_q.mask);
            state_q <= S_MEM_REQ;
          end
        end
        S_MEM_REQ: if (dn_req_ready) state_q <= S_MEM_WAIT;
        S_MEM_WAIT: if (dn_resp_valid) begin
          if (req_q.cmd == CMD_RD) begin
            data_q[idx][vict_q[idx]]  <= dn_resp.data;
            tag_q[idx][vict_q[idx]]   <= tag;
            valid_q[idx][vict_q[idx]] <= 1'b1;
            vict_q[idx] <= (int'(vict_q[idx]) == WAYS - 1) ? '0 : vict_q[idx] + 1'b1;
            line_q <= dn_resp.data;
          end
          state_q <= S_RESP;
        end
        S_RESP: if (up_resp_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_req_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    up_req_valid |-> (up_req.cmd == CMD_RD || up_req.cmd == CMD_WR));
  a_resp_match: assert property (@(posedge clk) disable iff (!rst_n)
    (dn_resp_valid && dn_resp_ready) |->
      (dn_resp.cmd == ((req_q.cmd == CMD_WR) ? CMD_WR_ACK : CMD_RD_RESP)));
endmodule

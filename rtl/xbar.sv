// xbar: packet crossbar with per-output round-robin arbitration and link
// serialisation.
//
// N_IN sources send mem_pkt_t packets to N_OUT sinks; each packet goes to the
// output named by its dst field. Every output owns a round-robin arbiter and
// a one-packet output register, so a packet leaves one cycle after it is
// accepted and a full output stalls its senders (in_ready low). When
// LINK_BYTES is non-zero the output models a link of that many bytes per
// cycle: after accepting a packet that carries a line the output refuses new
// packets until the line has been sent (LINE_BYTES / LINK_BYTES cycles per
// packet). LINK_BYTES = 0 means one packet per cycle.
//
// Interface: valid/ready on both sides; a packet moves when valid and ready
// are both high at a clock edge. A source must hold its packet steady while
// valid is high and ready is low.
//
// The paper gives the crossbar between L1 and L2 caches and the central
// switch by name, port counts and link bandwidth only. The single-stage
// round-robin organisation and the one-cycle output register are this
// design's own choices.
module xbar
  import tsm_pkg::*;
#(
  parameter int unsigned N_IN       = 4,
  parameter int unsigned N_OUT      = 4,
  parameter int unsigned LINK_BYTES = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic     [N_IN-1:0]  in_valid,
  input  mem_pkt_t             in_pkt  [N_IN],
  output logic     [N_IN-1:0]  in_ready,
  output logic     [N_OUT-1:0] out_valid,
  output mem_pkt_t             out_pkt [N_OUT],
  input  logic     [N_OUT-1:0] out_ready
);
  localparam int unsigned BW = $clog2(LINE_BYTES + 1);

  logic [N_OUT-1:0][N_IN-1:0] req, gnt;
  logic [N_OUT-1:0]           accept;
  logic [N_OUT-1:0][BW-1:0]   busy_q;
  localparam int unsigned IW = (N_IN > 1) ? $clog2(N_IN) : 1;
  logic [IW-1:0]              gidx [N_OUT];

  always_comb begin
    for (int unsigned o = 0; o < N_OUT; o++)
      for (int unsigned i = 0; i < N_IN; i++)
        req[o][i] = in_valid[i] && (int'(in_pkt[i].dst) == int'(o));
  end

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    logic can_take;
    assign can_take  = (busy_q[o] == '0) && (!out_valid[o] || out_ready[o]);
    assign accept[o] = can_take && (|req[o]);

    rr_arb #(.N(N_IN)) u_arb (
      .clk  (clk),
      .rst_n(rst_n),
      .req  (req[o]),
      .adv  (accept[o]),
      .gnt  (gnt[o]),
      .gnt_idx(gidx[o])
    );

    mem_pkt_t win_pkt;
    assign win_pkt = in_pkt[gidx[o]];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid[o] <= 1'b0;
        out_pkt[o]   <= '0;
        busy_q[o]    <= '0;
      end else begin
        if (accept[o]) begin
          out_valid[o] <= 1'b1;
          out_pkt[o]   <= win_pkt;
          busy_q[o]    <= BW'(pkt_cycles(win_pkt.cmd, LINK_BYTES) - 1);
        end else begin
          if (out_ready[o]) out_valid[o] <= 1'b0;
          if (busy_q[o] != '0) busy_q[o] <= busy_q[o] - 1'b1;
        end
      end
    end
  end

  always_comb begin
    in_ready = '0;
    for (int unsigned o = 0; o < N_OUT; o++)
      for (int unsigned i = 0; i < N_IN; i++)
        if (gnt[o][i] && accept[o]) in_ready[i] = 1'b1;
  end

  // Every packet must name an existing output.
  for (genvar i = 0; i < N_IN; i++) begin : g_chk
    a_dst_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid[i] |-> (int'(in_pkt[i].dst) < N_OUT));
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      (in_valid[i] && !in_ready[i]) |=> (in_valid[i] && $stable(in_pkt[i])));
  end
endmodule

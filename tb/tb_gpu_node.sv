// tb_gpu_node: one GPU's memory hierarchy with 4 CUs, 2 scalar caches,
// 2 instruction caches and 2 L2 banks (cache sizes at their defaults). Each
// L2 link ends in a behavioural memory (latency 15).
// Checks: an L1 miss is routed to the L2 bank that owns the page
// (page mod 2) and only that bank's link is used; a second CU hits in L2;
// a write by one CU is seen by another CU, by a scalar cache and by an
// instruction cache; parallel random reads from all 8 L1 caches return
// the right data.
module tb_gpu_node;
  import tsm_pkg::*;
  localparam int NC = 4, NS = 2, NI = 2, NB = 2;
  localparam int NL1 = NC + NS + NI;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NC-1:0] cu_req_valid, cu_req_ready, cu_resp_valid;
  cu_req_t       cu_req [NC];
  cu_resp_t      cu_resp [NC];
  logic [NS-1:0] sc_req_valid, sc_req_ready, sc_resp_valid;
  cu_req_t       sc_req [NS];
  cu_resp_t      sc_resp [NS];
  logic [NI-1:0] ic_req_valid, ic_req_ready, ic_resp_valid;
  cu_req_t       ic_req [NI];
  cu_resp_t      ic_resp [NI];
  logic [NB-1:0] l2_req_valid, l2_req_ready, l2_resp_valid, l2_resp_ready;
  mem_pkt_t      l2_req [NB], l2_resp [NB];
  int            n_req [NB];

  gpu_node #(.NCU(NC), .NSC(NS), .NIC(NI), .NL2(NB)) dut (.*);

  for (genvar b = 0; b < NB; b++) begin : g_mem
    hbm_bank_model #(.LAT(15)) u_mem (
      .clk(clk), .rst_n(rst_n),
      .req_valid(l2_req_valid[b]), .req(l2_req[b]), .req_ready(l2_req_ready[b]),
      .resp_valid(l2_resp_valid[b]), .resp(l2_resp[b]), .resp_ready(l2_resp_ready[b]),
      .n_req(n_req[b]));
  end

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // port p: 0..NC-1 vector, then scalar, then instruction
  task automatic access(input int p, input logic we, input paddr_t a, input logic [31:0] wd,
                        output logic [31:0] rd, output int d0, output int d1);
    int n0, n1;
    cu_req_t r;
    n0 = n_req[0]; n1 = n_req[1];
    r  = '{we: we, addr: a, wdata: wd, be: 4'hF};
    // drive and sample at the falling edge, away from the rising edge
    @(negedge clk);
    if (p < NC) begin cu_req[p] = r; cu_req_valid[p] = 1'b1; end
    else if (p < NC + NS) begin sc_req[p-NC] = r; sc_req_valid[p-NC] = 1'b1; end
    else begin ic_req[p-NC-NS] = r; ic_req_valid[p-NC-NS] = 1'b1; end
    while (!(p < NC ? cu_req_ready[p] : p < NC + NS ? sc_req_ready[p-NC] : ic_req_ready[p-NC-NS]))
      @(negedge clk);
    @(negedge clk);
    if (p < NC) cu_req_valid[p] = 1'b0;
    else if (p < NC + NS) sc_req_valid[p-NC] = 1'b0;
    else ic_req_valid[p-NC-NS] = 1'b0;
    forever begin
      if (p < NC && cu_resp_valid[p]) begin rd = cu_resp[p].rdata; break; end
      if (p >= NC && p < NC + NS && sc_resp_valid[p-NC]) begin rd = sc_resp[p-NC].rdata; break; end
      if (p >= NC + NS && ic_resp_valid[p-NC-NS]) begin rd = ic_resp[p-NC-NS].rdata; break; end
      @(negedge clk);
    end
    d0 = n_req[0] - n0;
    d1 = n_req[1] - n1;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    int d0, d1;
    cu_req_valid = '0; sc_req_valid = '0; ic_req_valid = '0;
    for (int i = 0; i < NC; i++) cu_req[i] = '0;
    for (int i = 0; i < NS; i++) sc_req[i] = '0;
    for (int i = 0; i < NI; i++) ic_req[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // page 0x12347 is odd -> L2 bank 1
    access(0, 0, 35'h1234_7010, 0, rd, d0, d1);
    chk(rd == tb_pkg::init_word(35'h1234_7010) && d0 == 0 && d1 == 1, "miss routed to L2 bank 1");
    access(1, 0, 35'h1234_7014, 0, rd, d0, d1);
    chk(rd == tb_pkg::init_word(35'h1234_7014) && d0 == 0 && d1 == 0, "second CU hits in L2");
    // page 0x12346 is even -> L2 bank 0
    access(2, 0, 35'h1234_6020, 0, rd, d0, d1);
    chk(rd == tb_pkg::init_word(35'h1234_6020) && d0 == 1 && d1 == 0, "miss routed to L2 bank 0");
    // write by CU3, read by CU0, scalar and instruction caches
    access(3, 1, 35'h1234_7010, 32'h600D_D00D, rd, d0, d1);
    chk(d1 == 1, "write goes through L2 to memory");
    access(0, 0, 35'h1234_7010, 0, rd, d0, d1);
    chk(rd == tb_pkg::init_word(35'h1234_7010), "CU0 still holds its old L1 copy (no L1 coherence)");
    access(2, 0, 35'h1234_7010, 0, rd, d0, d1);
    chk(rd == 32'h600D_D00D && d1 == 0, "CU2 reads the new word from L2");
    access(NC, 0, 35'h1234_7010, 0, rd, d0, d1);
    chk(rd == 32'h600D_D00D, "scalar cache reads the new word");
    access(NC + NS, 0, 35'h1234_7010, 0, rd, d0, d1);
    chk(rd == 32'h600D_D00D, "instruction cache reads the new word");
    // parallel random reads of unwritten lines from all L1 caches
    for (int p = 0; p < NL1; p++)
      fork
        automatic int pp = p;
        begin
          automatic logic [31:0] r;
          automatic int e0, e1;
          automatic paddr_t x;
          for (int k = 0; k < 20; k++) begin
            x = (paddr_t'($urandom_range(32'hFFFF)) << 12) + 35'h4_0000_0000 +
                paddr_t'($urandom_range(1023) * 4);
            access(pp, 0, x, 0, r, e0, e1);
            chk(r == tb_pkg::init_word(x), $sformatf("port %0d random read %h got %h exp %h", pp, x, r, tb_pkg::init_word(x)));
          end
        end
      join_none
    wait fork;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tsm_top: end-to-end test of the whole system at its full default size
// (4 GPUs x 32 CUs, 8 scalar and 8 instruction caches per GPU, 8 L2 banks
// per GPU, 64 DRAM banks behind the central switch). Each DRAM port has a
// behavioural bank (latency 20 cycles). The testbench plays the CUs.
//
// It checks that memory is truly shared: a word written by one GPU is read
// by every other GPU from the same physical address, with no copy. On the
// way it makes each mechanism happen and counts it:
//   write-through  : a CU write reaches DRAM
//   l1_hit         : repeated read answered in 2 cycles, no DRAM access
//   l2_hit         : another CU of the same GPU misses in its L1 but the
//                    L2 bank has the line (no DRAM access)
//   dram_read      : L1 and L2 miss, line fetched over the switch
//   cross_gpu      : a GPU reads data another GPU wrote
//   l2_evict       : 17 lines of one L2 set push the oldest out
//   switch_conflict: two L2 banks want the same DRAM bank in one cycle
//   link_busy      : a bank link is still sending a line when the next
//                    packet for it arrives (16 B/cycle)
//   scalar, ifetch : the scalar and instruction caches read shared memory
// A mechanism that never happened counts as a failure.
module tb_tsm_top;
  import tsm_pkg::*;
  localparam int NG = N_GPU, NC = N_CU, NS = N_L1S, NI = N_L1I, NM = N_DRAM;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     [NG-1:0][NC-1:0] cu_req_valid, cu_req_ready, cu_resp_valid;
  cu_req_t                   cu_req [NG][NC];
  cu_resp_t                  cu_resp [NG][NC];
  logic     [NG-1:0][NS-1:0] sc_req_valid, sc_req_ready, sc_resp_valid;
  cu_req_t                   sc_req [NG][NS];
  cu_resp_t                  sc_resp [NG][NS];
  logic     [NG-1:0][NI-1:0] ic_req_valid, ic_req_ready, ic_resp_valid;
  cu_req_t                   ic_req [NG][NI];
  cu_resp_t                  ic_resp [NG][NI];
  logic     [NM-1:0]         mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_pkt_t                  mem_req [NM], mem_resp [NM];
  int                        n_req [NM];

  tsm_top dut (.*);

  for (genvar b = 0; b < NM; b++) begin : g_bank
    hbm_bank_model #(.LAT(20)) u_bank (
      .clk(clk), .rst_n(rst_n),
      .req_valid(mem_req_valid[b]), .req(mem_req[b]), .req_ready(mem_req_ready[b]),
      .resp_valid(mem_resp_valid[b]), .resp(mem_resp[b]), .resp_ready(mem_resp_ready[b]),
      .n_req(n_req[b]));
  end

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // mechanism counters
  int c_wt = 0, c_l1hit = 0, c_l2hit = 0, c_dram = 0, c_xgpu = 0, c_evict = 0;
  int n_done = 0;  // finished random-traffic processes
  int c_conflict = 0, c_busy = 0, c_scalar = 0, c_ifetch = 0;

  // switch monitors (observed inside the switch's request crossbar)
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NM; o++) begin
      if ($countones(dut.u_switch.u_req_xbar.req[o]) > 1) c_conflict++;
      if (dut.u_switch.u_req_xbar.busy_q[o] != 0 && dut.u_switch.u_req_xbar.req[o] != 0) c_busy++;
    end
  end

  function automatic int dram_total();
    int t = 0;
    for (int b = 0; b < NM; b++) t += n_req[b];
    return t;
  endfunction

  logic [31:0] ref_mem [paddr_t];
  function automatic logic [31:0] ref_rd(paddr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : tb_pkg::init_word(a);
  endfunction

  // kind: 0 vector (CU), 1 scalar, 2 instruction
  task automatic access(input int kind, input int g, input int c, input logic we,
                        input paddr_t a, input logic [31:0] wd,
                        output logic [31:0] rd, output int lat, output int nd);
    int n0, t;
    cu_req_t r;
    n0 = dram_total();
    t  = 0;
    r  = '{we: we, addr: a, wdata: wd, be: 4'hF};
    // drive and sample at the falling edge, away from the rising edge
    @(negedge clk);
    case (kind)
      0: begin cu_req[g][c] = r; cu_req_valid[g][c] = 1'b1; end
      1: begin sc_req[g][c] = r; sc_req_valid[g][c] = 1'b1; end
      default: begin ic_req[g][c] = r; ic_req_valid[g][c] = 1'b1; end
    endcase
    while (!((kind == 0 && cu_req_ready[g][c]) || (kind == 1 && sc_req_ready[g][c]) ||
             (kind == 2 && ic_req_ready[g][c])))
      @(negedge clk);
    @(negedge clk);     // taken at the rising edge in between
    case (kind)
      0: cu_req_valid[g][c] = 1'b0;
      1: sc_req_valid[g][c] = 1'b0;
      default: ic_req_valid[g][c] = 1'b0;
    endcase
    t = 1;
    forever begin
      if (kind == 0 && cu_resp_valid[g][c]) begin rd = cu_resp[g][c].rdata; break; end
      if (kind == 1 && sc_resp_valid[g][c]) begin rd = sc_resp[g][c].rdata; break; end
      if (kind == 2 && ic_resp_valid[g][c]) begin rd = ic_resp[g][c].rdata; break; end
      @(negedge clk);
      t++;
    end
    lat = t;
    nd  = dram_total() - n0;
    if (we) ref_mem[a] = wd;
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    int lat, nd;
    paddr_t a;
    cu_req_valid = '0; sc_req_valid = '0; ic_req_valid = '0;
    for (int g = 0; g < NG; g++) begin
      for (int c = 0; c < NC; c++) cu_req[g][c] = '0;
      for (int c = 0; c < NS; c++) sc_req[g][c] = '0;
      for (int c = 0; c < NI; c++) ic_req[g][c] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // 1. GPU0 writes, every other GPU reads the same physical address
    a = 35'h1_2345_6788;
    access(0, 0, 0, 1, a, 32'hCAFE_F00D, rd, lat, nd);
    chk(nd == 1, "write-through reaches DRAM");
    if (nd == 1) c_wt++;
    for (int g = 1; g < NG; g++) begin
      access(0, g, 5, 0, a, 0, rd, lat, nd);
      chk(rd == 32'hCAFE_F00D && nd == 1, $sformatf("GPU%0d reads GPU0's write", g));
      if (rd == 32'hCAFE_F00D) c_xgpu++;
      if (nd == 1) c_dram++;
    end
    // 2. L1 hit
    access(0, 3, 5, 0, a, 0, rd, lat, nd);
    chk(rd == 32'hCAFE_F00D && nd == 0 && lat == 2, $sformatf("L1 hit (lat %0d)", lat));
    if (nd == 0 && lat == 2) c_l1hit++;
    // 3. L2 hit: another CU of GPU3
    access(0, 3, 6, 0, a, 0, rd, lat, nd);
    chk(rd == 32'hCAFE_F00D && nd == 0 && lat > 2, "L2 hit");
    if (nd == 0 && lat > 2) c_l2hit++;
    // 4. GPU2 overwrites, GPU1 (which never cached this word) sees it
    a = 35'h0_0040_0104;
    access(0, 2, 9, 1, a, 32'h0BAD_CAFE, rd, lat, nd);
    if (nd == 1) c_wt++;
    access(0, 1, 9, 0, a, 0, rd, lat, nd);
    chk(rd == 32'h0BAD_CAFE, "GPU1 sees GPU2's write");
    if (rd == 32'h0BAD_CAFE) c_xgpu++;
    // 5. scalar and instruction caches read shared memory
    access(1, 0, 3, 0, 35'h1_2345_6788, 0, rd, lat, nd);
    chk(rd == 32'hCAFE_F00D, "scalar cache read");
    if (rd == 32'hCAFE_F00D) c_scalar++;
    access(2, 1, 7, 0, 35'h0_0777_0010, 0, rd, lat, nd);
    chk(rd == tb_pkg::init_word(35'h0_0777_0010), "instruction fetch");
    if (rd == tb_pkg::init_word(35'h0_0777_0010)) c_ifetch++;
    // 6. all 4 GPUs write the same DRAM bank at once: switch conflict and
    //    link serialisation; then every GPU reads all four words back
    fork
      begin automatic logic [31:0] r0; automatic int l0, n0; access(0, 0, 1, 1, 35'h0_0000_5000, 32'h1000_0000, r0, l0, n0); end
      begin automatic logic [31:0] r1; automatic int l1, n1; access(0, 1, 1, 1, 35'h0_0004_5040, 32'h1111_1111, r1, l1, n1); end
      begin automatic logic [31:0] r2; automatic int l2, n2; access(0, 2, 1, 1, 35'h0_0008_5080, 32'h2222_2222, r2, l2, n2); end
      begin automatic logic [31:0] r3; automatic int l3, n3; access(0, 3, 1, 1, 35'h0_000C_50C0, 32'h3333_3333, r3, l3, n3); end
    join
    c_wt += 4;
    for (int g = 0; g < NG; g++) begin
      paddr_t ad [4];
      ad[0] = 35'h0_0000_5000; ad[1] = 35'h0_0004_5040; ad[2] = 35'h0_0008_5080; ad[3] = 35'h0_000C_50C0;
      for (int k = 0; k < 4; k++) begin
        access(0, g, 20, 0, ad[k], 0, rd, lat, nd);
        chk(rd == ref_rd(ad[k]), $sformatf("GPU%0d reads word %0d of the contended bank", g, k));
      end
    end
    // 7. L2 eviction on GPU1: 17 lines of one set of L2 bank 2
    for (int k = 0; k < 17; k++) begin
      a = (paddr_t'(8 * (200 + 32 * k) + 2) << PAGE_BITS) + 35'h80;
      access(0, 1, 30, 0, a, 0, rd, lat, nd);
      chk(rd == ref_rd(a) && nd == 1, $sformatf("L2 fill %0d", k));
    end
    a = (paddr_t'(8 * 200 + 2) << PAGE_BITS) + 35'h80;
    access(0, 1, 31, 0, a, 0, rd, lat, nd);
    chk(rd == ref_rd(a) && nd == 1, "evicted L2 line read again from DRAM");
    if (nd == 1) c_evict++;
    // 8. parallel random traffic from every GPU (reads of unwritten lines)
    n_done = 0;
    for (int g = 0; g < NG; g++)
      for (int c = 0; c < 8; c++)
        fork
          automatic int gg = g;
          automatic int cc = c;
          begin
            automatic logic [31:0] r;
            automatic int l, n;
            automatic paddr_t x;
            for (int k = 0; k < 6; k++) begin
              x = (paddr_t'($urandom_range(32'hFFFF)) << 12) + 35'h2_0000_0000 +
                  paddr_t'($urandom_range(1023) * 4);
              access(0, gg, cc, 0, x, 0, r, l, n);
              chk(r == tb_pkg::init_word(x), $sformatf("GPU%0d CU%0d random read %h", gg, cc, x));
              if (n >= 1) c_dram++;
            end
            n_done++;
          end
        join_none
    wait (n_done == NG * 8);
    repeat (10) @(posedge clk);

    $display("mechanisms: write_through=%0d l1_hit=%0d l2_hit=%0d dram_read=%0d cross_gpu=%0d l2_evict=%0d switch_conflict=%0d link_busy=%0d scalar=%0d ifetch=%0d",
             c_wt, c_l1hit, c_l2hit, c_dram, c_xgpu, c_evict, c_conflict, c_busy, c_scalar, c_ifetch);
    chk(c_wt > 0, "write-through happened");
    chk(c_l1hit > 0, "L1 hit happened");
    chk(c_l2hit > 0, "L2 hit happened");
    chk(c_dram > 0, "DRAM read happened");
    chk(c_xgpu > 0, "cross-GPU sharing happened");
    chk(c_evict > 0, "L2 eviction happened");
    chk(c_conflict > 0, "switch conflict happened");
    chk(c_busy > 0, "link serialisation stall happened");
    chk(c_scalar > 0, "scalar cache used");
    chk(c_ifetch > 0, "instruction cache used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tsm_switch: checks the central switch at its full size (32 L2 ports,
// 64 DRAM ports, 16-byte/cycle links).
// The DRAM side is an always-ready queue per bank that answers after 10
// cycles. The L2 side issues several requests per port without waiting.
//  Phase 1: random reads (of lines nobody writes) and writes (port p writes
//           only line p of a page) from all ports. Every request must reach
//           the bank that owns its page (page mod 64) with src = its port,
//           and every response must come back to the issuing port with the
//           right data.
//  Phase 2: every port reads back the lines it wrote last.
//  Phase 3: link rate. Two writes from two ports to one bank are 4 cycles
//           apart on the bank link; two reads are 1 cycle apart; two read
//           responses to one port are 4 cycles apart.
module tb_tsm_switch;
  import tsm_pkg::*;
  localparam int NP = 32, NM = 64, LAT = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic     [NP-1:0] l2_req_valid, l2_req_ready, l2_resp_valid, l2_resp_ready;
  mem_pkt_t          l2_req [NP], l2_resp [NP];
  logic     [NM-1:0] mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_pkt_t          mem_req [NM], mem_resp [NM];

  tsm_switch dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- DRAM side ----------------
  logic [LINE_BITS-1:0] dram [paddr_t];
  mem_pkt_t bq [NM][$];
  int       bt [NM][$];
  int       bank_hs [NM][$];
  assign mem_req_ready = '1;
  always @(posedge clk) begin
    for (int b = 0; b < NM; b++) begin
      if (mem_resp_valid[b] && mem_resp_ready[b]) begin
        void'(bq[b].pop_front());
        void'(bt[b].pop_front());
      end
      if (rst_n && mem_req_valid[b]) begin
        mem_pkt_t p;
        logic [LINE_BITS-1:0] l;
        p = mem_req[b];
        bank_hs[b].push_back(cyc);
        chk(int'(p.addr[17:12]) == b && int'(p.src) < NP, $sformatf("bank %0d got addr %h", b, p.addr));
        l = dram.exists(p.addr) ? dram[p.addr] : tb_pkg::init_line(p.addr);
        if (p.cmd == CMD_WR) begin
          for (int k = 0; k < LINE_BYTES; k++) if (p.mask[k]) l[k*8 +: 8] = p.data[k*8 +: 8];
          dram[p.addr] = l;
        end
        p.dst  = p.src;
        p.cmd  = (p.cmd == CMD_WR) ? CMD_WR_ACK : CMD_RD_RESP;
        p.data = (p.cmd == CMD_WR_ACK) ? '0 : l;
        bq[b].push_back(p);
        bt[b].push_back(cyc + LAT);
      end
    end
  end
  always_comb
    for (int b = 0; b < NM; b++) begin
      mem_resp_valid[b] = bq[b].size() > 0 && bt[b][0] <= cyc;
      mem_resp[b]       = (bq[b].size() > 0) ? bq[b][0] : '0;
    end

  // ---------------- L2 side ----------------
  mem_pkt_t sq [NP][$];                       // packets waiting to be sent
  int       outstanding [NP];
  logic [LINE_BITS-1:0] last_wr [NP][paddr_t];
  int       port_hs [NP][$];
  assign l2_resp_ready = '1;
  always_comb
    for (int p = 0; p < NP; p++) begin
      l2_req_valid[p] = sq[p].size() > 0;
      l2_req[p]       = (sq[p].size() > 0) ? sq[p][0] : '0;
    end
  always @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (l2_req_valid[p] && l2_req_ready[p]) void'(sq[p].pop_front());
      if (rst_n && l2_resp_valid[p]) begin
        mem_pkt_t r;
        r = l2_resp[p];
        port_hs[p].push_back(cyc);
        outstanding[p]--;
        chk(int'(r.dst) == p, "response on its port");
        if (r.cmd == CMD_RD_RESP) begin
          logic [LINE_BITS-1:0] e;
          e = last_wr[p].exists(r.addr) ? last_wr[p][r.addr] : tb_pkg::init_line(r.addr);
          chk(r.data == e, $sformatf("port %0d read %h data", p, r.addr));
        end
      end
    end
  end

  task automatic send(int p, cmd_e c, paddr_t a, logic [LINE_BITS-1:0] d);
    mem_pkt_t k;
    k = '0;
    k.cmd = c; k.addr = a; k.data = d; k.mask = (c == CMD_WR) ? '1 : '0;
    k.src = 8'hEE; k.dst = 8'hEE;         // the switch must overwrite both
    sq[p].push_back(k);
    outstanding[p]++;
  endtask

  task automatic drain();
    int left;
    do begin
      @(posedge clk);
      left = 0;
      for (int p = 0; p < NP; p++) left += outstanding[p];
    end while (left != 0);
    repeat (2) @(posedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    paddr_t a;
    logic [LINE_BITS-1:0] d;
    for (int p = 0; p < NP; p++) outstanding[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1
    for (int r = 0; r < 20; r++) begin
      for (int p = 0; p < NP; p++) begin
        int pg;
        pg = $urandom_range(2047);
        if ($urandom_range(1) == 1) begin
          a = (paddr_t'(pg) << 12) + paddr_t'(p * 64);
          d = {16{$urandom}};
          send(p, CMD_WR, a, d);
          last_wr[p][a] = d;
        end else begin
          a = (paddr_t'(pg) << 12) + paddr_t'((32 + $urandom_range(31)) * 64);
          send(p, CMD_RD, a, '0);
        end
      end
      repeat ($urandom_range(3)) @(posedge clk);
    end
    drain();
    // phase 2: read back
    for (int p = 0; p < NP; p++)
      foreach (last_wr[p][k]) send(p, CMD_RD, k, '0);
    drain();
    // phase 3: link rate
    bank_hs[5].delete();
    send(0, CMD_WR, paddr_t'(5) << 12, '1);
    send(1, CMD_WR, (paddr_t'(69) << 12) + 64, '1);
    last_wr[0][paddr_t'(5) << 12] = '1;
    last_wr[1][(paddr_t'(69) << 12) + 64] = '1;
    drain();
    chk(bank_hs[5].size() == 2 && bank_hs[5][1] - bank_hs[5][0] == 4,
        $sformatf("write spacing on bank link %0d", bank_hs[5][1] - bank_hs[5][0]));
    bank_hs[5].delete();
    send(0, CMD_RD, paddr_t'(5) << 12, '0);
    send(1, CMD_RD, paddr_t'(69) << 12, '0);
    drain();
    chk(bank_hs[5].size() == 2 && bank_hs[5][1] - bank_hs[5][0] == 1,
        $sformatf("read spacing on bank link %0d", bank_hs[5][1] - bank_hs[5][0]));
    port_hs[0].delete();
    send(0, CMD_RD, paddr_t'(6) << 12, '0);
    send(0, CMD_RD, paddr_t'(7) << 12, '0);
    drain();
    chk(port_hs[0].size() == 2 && port_hs[0][1] - port_hs[0][0] == 4,
        $sformatf("read-response spacing on L2 link %0d", port_hs[0][1] - port_hs[0][0]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

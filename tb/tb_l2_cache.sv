// tb_l2_cache: checks one L2 bank (256 KB, 16-way, 8 banks per GPU) with a
// behavioural DRAM bank (latency 12) below it. The requests model the L1
// side: line reads and masked line writes for pages of bank 3.
// Checks: read miss fetches from memory, read hit does not and answers
// 2 cycles after the request is taken, responses go back to the requester
// (dst = src), writes go through to memory with their mask and update a hit
// line, 16 ways hold 16 lines of one set and the 17th evicts the oldest,
// and random traffic against a line-level reference memory.
module tb_l2_cache;
  import tsm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     up_req_valid, up_req_ready, up_resp_valid, up_resp_ready;
  mem_pkt_t up_req, up_resp;
  logic     dn_req_valid, dn_req_ready, dn_resp_valid, dn_resp_ready;
  mem_pkt_t dn_req, dn_resp;
  int       n_mem;
  int checks = 0, failures = 0;

  l2_cache dut (.*);
  hbm_bank_model #(.LAT(12)) u_mem (
    .clk(clk), .rst_n(rst_n),
    .req_valid(dn_req_valid), .req(dn_req), .req_ready(dn_req_ready),
    .resp_valid(dn_resp_valid), .resp(dn_resp), .resp_ready(dn_resp_ready),
    .n_req(n_mem));

  logic [LINE_BITS-1:0] ref_mem [paddr_t];
  function automatic logic [LINE_BITS-1:0] ref_rd(paddr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : tb_pkg::init_line(a);
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // pages of bank 3: page = 8*k + 3; same set every 32 pages (SETS=256)
  function automatic paddr_t bank3(int k, int line);
    return (paddr_t'(8 * k + 3) << PAGE_BITS) + paddr_t'(line * LINE_BYTES);
  endfunction

  task automatic access(input cmd_e c, input paddr_t a, input logic [LINE_BITS-1:0] d,
                        input logic [LINE_BYTES-1:0] m,
                        output logic [LINE_BITS-1:0] rd, output int lat, output int nm);
    int n0 = n_mem;
    int t = 0;
    int id = $urandom_range(47);
    up_req_valid <= 1'b1;
    up_req       <= '{cmd: c, src: ID_W'(id), dst: 8'd3, addr: a, mask: m, data: d};
    do @(posedge clk); while (!up_req_ready);
    up_req_valid <= 1'b0;
    do begin @(posedge clk); t++; end while (!up_resp_valid);
    rd  = up_resp.data;
    lat = t;
    nm  = n_mem - n0;
    chk(int'(up_resp.dst) == id && up_resp.cmd == (c == CMD_WR ? CMD_WR_ACK : CMD_RD_RESP),
        "response routed to requester with right command");
    if (c == CMD_WR) begin
      logic [LINE_BITS-1:0] l = ref_rd(a);
      for (int b = 0; b < LINE_BYTES; b++) if (m[b]) l[b*8 +: 8] = d[b*8 +: 8];
      ref_mem[a] = l;
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LINE_BITS-1:0] rd, wd;
    logic [LINE_BYTES-1:0] m;
    int lat, nm;
    paddr_t a;
    up_req_valid = 0; up_req = '0; up_resp_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    a = bank3(5, 7);
    access(CMD_RD, a, '0, '0, rd, lat, nm);
    chk(nm == 1 && rd == ref_rd(a), "read miss");
    access(CMD_RD, a, '0, '0, rd, lat, nm);
    chk(nm == 0 && rd == ref_rd(a), "read hit");
    chk(lat == 2, $sformatf("hit latency %0d != 2", lat));
    // masked write to a hit line
    wd = {16{32'hA5A5_5A5A}};
    m  = 64'h0000_FFFF_0000_00F0;
    access(CMD_WR, a, wd, m, rd, lat, nm);
    chk(nm == 1, "write goes through to memory");
    access(CMD_RD, a, '0, '0, rd, lat, nm);
    chk(nm == 0 && rd == ref_rd(a), "hit line updated by write");
    // write to an absent line: no allocate
    a = bank3(9, 1);
    access(CMD_WR, a, wd, m, rd, lat, nm);
    access(CMD_RD, a, '0, '0, rd, lat, nm);
    chk(nm == 1 && rd == ref_rd(a), "no write-allocate, memory holds the write");
    // 17 lines of one set
    for (int k = 0; k < 17; k++) begin
      a = bank3(64 + 32 * k, 2);
      access(CMD_RD, a, '0, '0, rd, lat, nm);
      chk(nm == 1 && rd == ref_rd(a), $sformatf("fill %0d", k));
    end
    for (int k = 1; k < 17; k++) begin
      a = bank3(64 + 32 * k, 2);
      access(CMD_RD, a, '0, '0, rd, lat, nm);
      chk(nm == 0, $sformatf("way %0d kept", k));
    end
    a = bank3(64, 2);
    access(CMD_RD, a, '0, '0, rd, lat, nm);
    chk(nm == 1 && rd == ref_rd(a), "oldest line evicted");
    // random traffic
    for (int k = 0; k < 600; k++) begin
      cmd_e c;
      c = ($urandom_range(2) == 0) ? CMD_WR : CMD_RD;
      a = bank3(32 * $urandom_range(19), $urandom_range(2));
      wd = {16{$urandom}};
      m  = {$urandom, $urandom};
      access(c, a, wd, m, rd, lat, nm);
      if (c == CMD_RD) chk(rd == ref_rd(a), $sformatf("random read %h", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

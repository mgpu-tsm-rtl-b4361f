// l1_tb_core: shared body of the L1 cache testbenches (vector, scalar,
// instruction). Drives one l1_cache through its CU port; the memory side is
// a behavioural DRAM bank with a 5-cycle latency. A word-level reference
// memory in the testbench gives the expected read data.
// Checks: read miss goes to memory, read hit does not and answers 2 cycles
// after the request is taken, write-through (every write reaches memory
// with the right mask), no-write-allocate, eviction after WAYS+1 lines of
// one set, and random traffic against the reference memory.
module l1_tb_core #(
  parameter int unsigned SIZE_BYTES = 16 * 1024,
  parameter int unsigned WAYS       = 4,
  parameter bit          READ_ONLY  = 1'b0
) (
  output int checks,
  output int failures,
  output bit done
);
  import tsm_pkg::*;
  localparam int unsigned SETS = SIZE_BYTES / (LINE_BYTES * WAYS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     cu_req_valid, cu_req_ready, cu_resp_valid;
  cu_req_t  cu_req;
  cu_resp_t cu_resp;
  logic     mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_pkt_t mem_req, mem_resp;
  int       n_mem;
  int       n_wr_pkts;
  mem_pkt_t last_wr;

  l1_cache #(.SIZE_BYTES(SIZE_BYTES), .WAYS(WAYS), .READ_ONLY(READ_ONLY)) dut (.*);

  hbm_bank_model #(.LAT(5)) u_mem (
    .clk(clk), .rst_n(rst_n),
    .req_valid(mem_req_valid), .req(mem_req), .req_ready(mem_req_ready),
    .resp_valid(mem_resp_valid), .resp(mem_resp), .resp_ready(mem_resp_ready),
    .n_req(n_mem));

  always @(posedge clk)
    if (mem_req_valid && mem_req_ready && mem_req.cmd == CMD_WR) begin
      n_wr_pkts <= n_wr_pkts + 1;
      last_wr   <= mem_req;
    end

  logic [31:0] ref_mem [paddr_t];
  function automatic logic [31:0] ref_rd(paddr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : tb_pkg::init_word(a);
  endfunction

  // one CU access; returns read data, cycles from acceptance to response and
  // the number of memory requests it caused
  task automatic access(input logic we, input paddr_t a, input logic [31:0] wd,
                        output logic [31:0] rd, output int lat, output int nm);
    int n0 = n_mem;
    int t = 0;
    cu_req_valid <= 1'b1;
    cu_req.we    <= we;
    cu_req.addr  <= a;
    cu_req.wdata <= wd;
    cu_req.be    <= 4'hF;
    do @(posedge clk); while (!cu_req_ready);
    cu_req_valid <= 1'b0;
    do begin @(posedge clk); t++; end while (!cu_resp_valid);
    rd  = cu_resp.rdata;
    lat = t;
    nm  = n_mem - n0;
    if (we) ref_mem[a] = wd;
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    done = 1;
  end

  initial begin
    logic [31:0] rd; int lat, nm;
    paddr_t a;
    checks = 0; failures = 0; done = 0; n_wr_pkts = 0;
    cu_req_valid = 0; cu_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // read miss then hit
    access(0, 35'h1234_5678, 0, rd, lat, nm);
    chk(rd == tb_pkg::init_word(35'h1234_5678) && nm == 1, "read miss");
    access(0, 35'h1234_5678, 0, rd, lat, nm);
    chk(rd == tb_pkg::init_word(35'h1234_5678) && nm == 0, "read hit data / no memory access");
    chk(lat == 2, $sformatf("read hit latency %0d != 2", lat));
    access(0, 35'h1234_567C, 0, rd, lat, nm);
    chk(rd == tb_pkg::init_word(35'h1234_567C) && nm == 0, "hit other word of the line");
    if (!READ_ONLY) begin
      int w0 = n_wr_pkts;
      // write hit: through to memory, line updated
      access(1, 35'h1234_5678, 32'hDEAD_BEEF, rd, lat, nm);
      chk(nm == 1 && n_wr_pkts == w0 + 1, "write hit goes through to memory");
      chk(last_wr.mask == (64'hF << 56),
          $sformatf("write mask %h", last_wr.mask));
      chk(last_wr.data[56*8 +: 32] == 32'hDEAD_BEEF, "write data lane");
      access(0, 35'h1234_5678, 0, rd, lat, nm);
      chk(rd == 32'hDEAD_BEEF && nm == 0, "read after write hit");
      // write miss: no allocate
      access(1, 35'h0ABC_0040, 32'h1357_9BDF, rd, lat, nm);
      chk(nm == 1, "write miss goes to memory");
      access(0, 35'h0ABC_0040, 0, rd, lat, nm);
      chk(rd == 32'h1357_9BDF && nm == 1, "no write-allocate: read after write misses, sees data");
    end
    // eviction: WAYS+1 lines of one set
    for (int k = 0; k <= int'(WAYS); k++) begin
      a = 35'h2_0000_0000 + paddr_t'(k) * paddr_t'(SETS * LINE_BYTES);
      access(0, a, 0, rd, lat, nm);
      chk(nm == 1 && rd == ref_rd(a), $sformatf("fill way %0d", k));
    end
    access(0, 35'h2_0000_0000, 0, rd, lat, nm);
    chk(nm == 1 && rd == ref_rd(35'h2_0000_0000), "evicted line misses again");
    a = 35'h2_0000_0000 + paddr_t'(WAYS) * paddr_t'(SETS * LINE_BYTES);
    access(0, a, 0, rd, lat, nm);
    chk(nm == 0, "most recent line still present");
    // random traffic over a small pool of lines
    for (int k = 0; k < 400; k++) begin
      logic we;
      // 6 tags x 4 sets: more lines per set than ways, so evictions happen
      a  = 35'h3_0000_0000 + paddr_t'($urandom_range(5)) * paddr_t'(SETS * LINE_BYTES) +
           paddr_t'($urandom_range(3) * 64 + $urandom_range(15) * 4);
      we = !READ_ONLY && ($urandom_range(2) == 0);
      access(we, a, $urandom, rd, lat, nm);
      if (!we) chk(rd == ref_rd(a), $sformatf("random read %h: %h vs %h", a, rd, ref_rd(a)));
    end
    done = 1;
  end
endmodule

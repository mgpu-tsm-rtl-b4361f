// tb_xbar: checks the packet crossbar with 4 inputs, 3 outputs and a
// 16-byte/cycle link model.
//  Phase 1: random traffic, random sink back-pressure. Every packet must
//           arrive once, at the output named by dst, in order per
//           input/output pair.
//  Phase 2: all inputs stream line-carrying writes to output 0. Outputs must
//           be granted round-robin (0,1,2,3,...) and accept one packet every
//           64/16 = 4 cycles.
//  Phase 3: header-only reads to output 1 from all inputs: one per cycle.
module tb_xbar;
  import tsm_pkg::*;
  localparam int NI = 4, NO = 3, LB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     [NI-1:0] in_valid, in_ready;
  mem_pkt_t          in_pkt [NI];
  logic     [NO-1:0] out_valid, out_ready;
  mem_pkt_t          out_pkt [NO];
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  xbar #(.N_IN(NI), .N_OUT(NO), .LINK_BYTES(LB)) dut (.*);

  int exp_q [NI][NO][$];
  int seq [NI];
  int phase = 0;
  int recv_cyc [NO][$];
  int recv_src [NO][$];

  function automatic mem_pkt_t mk(int i, int s, int o, cmd_e c);
    mem_pkt_t p = '0;
    p.cmd = c; p.src = ID_W'(i); p.dst = ID_W'(o);
    p.data[31:0] = 32'(s);
    return p;
  endfunction

  // sources: input i issues packets until issued[i] reaches target[i]
  int issued [NI], sent [NI], target [NI];
  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < NI; i++) begin
        logic busy;
        busy = in_valid[i];
        if (in_valid[i] && in_ready[i]) begin
          exp_q[i][int'(in_pkt[i].dst)].push_back(int'(in_pkt[i].data[31:0]));
          busy = 1'b0;
          sent[i]++;
        end
        if (!busy && issued[i] < target[i] && (phase != 1 || $urandom_range(1) == 1)) begin
          int o; cmd_e c;
          if (phase == 1) begin o = $urandom_range(NO-1); c = cmd_e'($urandom_range(3)); end
          else if (phase == 2) begin o = 0; c = CMD_WR; end
          else begin o = 1; c = CMD_RD; end
          in_pkt[i]   <= mk(i, seq[i], o, c);
          in_valid[i] <= 1'b1;
          seq[i]++;
          issued[i]++;
        end else if (!busy) in_valid[i] <= 1'b0;
      end
    end
  end

  // sinks
  always @(posedge clk) begin
    for (int o = 0; o < NO; o++) begin
      if (rst_n && out_valid[o] && out_ready[o]) begin
        int s;
        s = int'(out_pkt[o].src);
        checks++;
        if (int'(out_pkt[o].dst) != o || exp_q[s][o].size() == 0 ||
            exp_q[s][o][0] != int'(out_pkt[o].data[31:0])) begin
          failures++;
          $display("FAIL out %0d got src %0d seq %0d", o, s, out_pkt[o].data[31:0]);
        end else void'(exp_q[s][o].pop_front());
        recv_cyc[o].push_back(cyc);
        recv_src[o].push_back(s);
      end
      out_ready[o] <= (phase == 1) ? 1'($urandom_range(1)) : 1'b1;
    end
  end

  task automatic run_phase(int ph, int n);
    phase = ph;
    for (int o = 0; o < NO; o++) begin recv_cyc[o].delete(); recv_src[o].delete(); end
    for (int i = 0; i < NI; i++) target[i] += n;
    for (int t = 0; t < 5000; t++) begin
      int left = 0;
      @(posedge clk);
      for (int i = 0; i < NI; i++) left += target[i] - sent[i];
      for (int i = 0; i < NI; i++) for (int o = 0; o < NO; o++) left += exp_q[i][o].size();
      if (left == 0) break;
    end
    repeat (3) @(posedge clk);
    checks++;
    for (int i = 0; i < NI; i++) for (int o = 0; o < NO; o++)
      if (exp_q[i][o].size() != 0 || sent[i] != target[i]) begin
        failures++;
        $display("FAIL phase %0d: in %0d out %0d left %0d", ph, i, o, exp_q[i][o].size());
      end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = '0; out_ready = '0;
    for (int i = 0; i < NI; i++) in_pkt[i] = '0;
    for (int i = 0; i < NI; i++) begin seq[i] = 0; issued[i] = 0; sent[i] = 0; target[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_phase(1, 200);
    $display("after phase1 checks=%0d failures=%0d t=%0d", checks, failures, cyc);
    run_phase(2, 8);
    // 32 writes to one output: spacing 4 cycles, round-robin source order
    checks++;
    if (recv_cyc[0].size() != 32) begin failures++; $display("FAIL phase2 count %0d", recv_cyc[0].size()); end
    for (int k = 1; k < recv_cyc[0].size(); k++) begin
      checks++;
      if (recv_cyc[0][k] - recv_cyc[0][k-1] != 4 || recv_src[0][k] != (recv_src[0][k-1] + 1) % NI) begin
        failures++;
        $display("FAIL phase2 k=%0d gap=%0d src %0d after %0d", k, recv_cyc[0][k] - recv_cyc[0][k-1],
                 recv_src[0][k], recv_src[0][k-1]);
      end
    end
    $display("after phase2 checks=%0d failures=%0d t=%0d", checks, failures, cyc);
    run_phase(3, 8);
    $display("after phase3 t=%0d", cyc);
    checks++;
    if (recv_cyc[1].size() != 32) begin failures++; $display("FAIL phase3 count"); end
    for (int k = 1; k < recv_cyc[1].size(); k++) begin
      checks++;
      if (recv_cyc[1][k] - recv_cyc[1][k-1] != 1) begin
        failures++;
        $display("FAIL phase3 k=%0d gap=%0d", k, recv_cyc[1][k] - recv_cyc[1][k-1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
